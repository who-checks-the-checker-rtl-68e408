// soc_ctrl: SoC control registers, fully triplicated.
//
// Registers (offsets within its 4 KiB window, 32-bit accesses):
//   0x00 BOOT_ADDR   rw  boot address given to the cores            (reset 0x1000_0000)
//   0x04 FETCH_EN    rw  bit 0: let the cores fetch                 (reset 0)
//   0x08 CORE_STATUS rw  return value written by software at the end of the application
//   0x0C SCRUB_CTRL  rw  bit 0: scrubber enable, bits 31:16: scrub period in cycles
//   0x10 DBG_ISOLATE rw  bit 0: isolate the debug module's bus ports  (reset 0)
//   0x14 TCLS        r: bit 0 = TCLS mismatch flag; w: bit 0 = 1 clears it (tcls_clear_o pulse)
// Other offsets answer with err. Reads return data one cycle after the request.
//
// Every register is held three times with a voter per lane (tmr_reg), and each of the three
// lanes of relobi_decoder drives its own copy of the register logic, so a fault in a lane,
// register or voter is outvoted. Outputs are voted. The paper names boot/programming control
// registers, a return-value register and a configurable scrub period; the register set and
// map are this design's own.
module soc_ctrl
  import relobi_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  rel_req_t             rel_req_i,
  output rel_rsp_t             rel_rsp_o,
  input  logic                 tcls_flag_i,
  output logic [AddrWidth-1:0] boot_addr_o,
  output logic                 fetch_en_o,
  output logic [DataWidth-1:0] core_status_o,
  output logic                 scrub_en_o,
  output logic [15:0]          scrub_period_o,
  output logic                 dbg_isolate_o,
  output logic                 tcls_clear_o,
  output logic                 corr_o,
  output logic                 uncorr_o
);
  typedef struct packed {
    logic [AddrWidth-1:0] boot_addr;
    logic                 fetch_en;
    logic [DataWidth-1:0] core_status;
    logic                 scrub_en;
    logic [15:0]          scrub_period;
    logic                 dbg_isolate;
  } st_t;

  localparam int unsigned SW = $bits(st_t);
  localparam st_t RstVal = '{boot_addr: Sram0Base, scrub_period: 16'd255, default: '0};

  obi_req_t             lreq   [3];
  logic [DataWidth-1:0] lrdata [3];
  logic                 lerr   [3];
  logic [SW-1:0]        d [3];
  logic [SW-1:0]        q [3];
  logic [2:0]           lclear;
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
      lclear[k] = 1'b0;
      unique case (lreq[k].addr[11:2])
        10'h0: lrdata[k] = s.boot_addr;
        10'h1: lrdata[k] = {31'd0, s.fetch_en};
        10'h2: lrdata[k] = s.core_status;
        10'h3: lrdata[k] = {s.scrub_period, 15'd0, s.scrub_en};
        10'h4: lrdata[k] = {31'd0, s.dbg_isolate};
        10'h5: lrdata[k] = {31'd0, tcls_flag_i};
        default: lerr[k] = 1'b1;
      endcase
      if (lreq[k].req && lreq[k].we) begin
        unique case (lreq[k].addr[11:2])
          10'h0: n.boot_addr   = lreq[k].wdata;
          10'h1: n.fetch_en    = lreq[k].wdata[0];
          10'h2: n.core_status = lreq[k].wdata;
          10'h3: begin
            n.scrub_en     = lreq[k].wdata[0];
            n.scrub_period = lreq[k].wdata[31:16];
          end
          10'h4: n.dbg_isolate = lreq[k].wdata[0];
          10'h5: lclear[k]     = lreq[k].wdata[0];
          default: ;
        endcase
      end
      d[k] = SW'(n);
    end
  end

  tmr_reg #(.W(SW), .RstVal(SW'(RstVal))) i_regs (.clk_i, .rst_ni, .d_i(d), .q_o(q), .err_o(tmr_err));

  // voted outputs
  st_t v;
  assign v = st_t'((q[0] & q[1]) | (q[0] & q[2]) | (q[1] & q[2]));
  assign boot_addr_o    = v.boot_addr;
  assign fetch_en_o     = v.fetch_en;
  assign core_status_o  = v.core_status;
  assign scrub_en_o     = v.scrub_en;
  assign scrub_period_o = v.scrub_period;
  assign dbg_isolate_o  = v.dbg_isolate;
  assign tcls_clear_o   = maj3(lclear[0], lclear[1], lclear[2]);
  assign corr_o         = dec_corr || tmr_err;
endmodule
