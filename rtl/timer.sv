// timer: timer peripheral with a compare interrupt, fully triplicated.
//
// Registers (32-bit): 0x00 CTRL (bit 0 enable), 0x04 COUNT (rw), 0x08 COMPARE (rw).
// While enabled COUNT increments every cycle. irq_o is high while enabled and
// COUNT >= COMPARE; software acknowledges it by moving COMPARE. Other offsets answer with
// err. All state is held in a triplicated register with voters, each relobi_decoder lane
// drives its own copy of the logic, and irq_o is voted. The paper only names a timer and its
// interrupt; the register set is this design's own.
module timer
  import relobi_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  rel_req_t rel_req_i,
  output rel_rsp_t rel_rsp_o,
  output logic     irq_o,
  output logic     corr_o,
  output logic     uncorr_o
);
  typedef struct packed {
    logic        en;
    logic [31:0] cnt;
    logic [31:0] cmp;
  } st_t;

  localparam int unsigned SW = $bits(st_t);

  obi_req_t             lreq   [3];
  logic [DataWidth-1:0] lrdata [3];
  logic                 lerr   [3];
  logic [SW-1:0]        d [3];
  logic [SW-1:0]        q [3];
  logic [2:0]           lirq;
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
      lrdata[k] = '0;
      lerr[k]   = 1'b0;
      if (s.en) n.cnt = s.cnt + 32'd1;
      unique case (lreq[k].addr[11:2])
        10'h0: lrdata[k] = {31'd0, s.en};
        10'h1: lrdata[k] = s.cnt;
        10'h2: lrdata[k] = s.cmp;
        default: lerr[k] = 1'b1;
      endcase
      if (lreq[k].req && lreq[k].we) begin
        unique case (lreq[k].addr[11:2])
          10'h0: n.en  = lreq[k].wdata[0];
          10'h1: n.cnt = lreq[k].wdata;
          10'h2: n.cmp = lreq[k].wdata;
          default: ;
        endcase
      end
      lirq[k] = s.en && (s.cnt >= s.cmp);
      d[k]    = SW'(n);
    end
  end

  tmr_reg #(.W(SW)) i_regs (.clk_i, .rst_ni, .d_i(d), .q_o(q), .err_o(tmr_err));

  assign irq_o  = maj3(lirq[0], lirq[1], lirq[2]);
  assign corr_o = dec_corr || tmr_err;
endmodule
