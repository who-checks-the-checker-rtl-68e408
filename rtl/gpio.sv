// gpio: general-purpose IO peripheral, fully triplicated.
//
// Registers (32-bit, one bit per pin): 0x00 IN (read: synchronised pin inputs), 0x04 OUT
// (rw), 0x08 OE (rw, output enable), 0x0C TOGGLE (write: OUT ^= wdata). Other offsets answer
// with err. The inputs pass a two-flip-flop synchroniser. Every register, the synchroniser
// included, is held three times with a voter per lane, each relobi_decoder lane drives its
// own copy of the logic, and the outputs are voted once in front of the single pad, which
// leaves that last voter unprotected as the paper observes. The paper only names the GPIO;
// the register set and NumGpio = 32 are this design's own.
module gpio
  import relobi_pkg::*;
#(
  parameter int unsigned NumGpio = 32
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  rel_req_t           rel_req_i,
  output rel_rsp_t           rel_rsp_o,
  input  logic [NumGpio-1:0] gpio_i,
  output logic [NumGpio-1:0] gpio_o,
  output logic [NumGpio-1:0] gpio_oe_o,
  output logic               corr_o,
  output logic               uncorr_o
);
  typedef struct packed {
    logic [NumGpio-1:0] out;
    logic [NumGpio-1:0] oe;
    logic [NumGpio-1:0] in1;
    logic [NumGpio-1:0] in2;
  } st_t;

  localparam int unsigned SW = $bits(st_t);

  obi_req_t             lreq   [3];
  logic [DataWidth-1:0] lrdata [3];
  logic                 lerr   [3];
  logic [SW-1:0]        d [3];
  logic [SW-1:0]        q [3];
  logic                 dec_corr, tmr_err;

  relobi_decoder i_dec (
    .clk_i, .rst_ni, .rel_req_i, .rel_rsp_o, .lane_req_o(lreq), .lane_rdata_i(lrdata),
    .lane_err_i(lerr), .corr_o(dec_corr), .uncorr_o
  );

  for (genvar k = 0; k < 3; k++) begin : g_lane
    st_t s, n;
    always_comb begin
      s         = st_t'(q[k]);
      n         = s;
      n.in1     = gpio_i;
      n.in2     = s.in1;
      lrdata[k] = '0;
      lerr[k]   = 1'b0;
      unique case (lreq[k].addr[11:2])
        10'h0: lrdata[k] = DataWidth'(s.in2);
        10'h1: lrdata[k] = DataWidth'(s.out);
        10'h2: lrdata[k] = DataWidth'(s.oe);
        10'h3: lrdata[k] = '0;
        default: lerr[k] = 1'b1;
      endcase
      if (lreq[k].req && lreq[k].we) begin
        unique case (lreq[k].addr[11:2])
          10'h1: n.out = lreq[k].wdata[NumGpio-1:0];
          10'h2: n.oe  = lreq[k].wdata[NumGpio-1:0];
          10'h3: n.out = s.out ^ lreq[k].wdata[NumGpio-1:0];
          default: ;
        endcase
      end
      d[k] = SW'(n);
    end
  end

  tmr_reg #(.W(SW)) i_regs (.clk_i, .rst_ni, .d_i(d), .q_o(q), .err_o(tmr_err));

  st_t v;
  assign v         = st_t'((q[0] & q[1]) | (q[0] & q[2]) | (q[1] & q[2]));
  assign gpio_o    = v.out;
  assign gpio_oe_o = v.oe;
  assign corr_o    = dec_corr || tmr_err;

  logic unused;
  assign unused = ^{v.in1, v.in2};
endmodule
