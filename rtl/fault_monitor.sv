// fault_monitor: fault counters for traceability of the protection mechanisms.
//
// Each of the NumEvents fault event inputs is first registered (one pipeline stage, to keep
// the many fault signals off the critical path, as the paper describes) and then increments
// its own 32-bit saturating counter. Counter i is read at offset 4*i; writing offset 4*i
// sets it to wdata (write 0 to clear); other offsets answer with err. The bus access is
// reliable (relOBI decoder with three lanes, write enable, address and data voted), but the
// pipeline and counters themselves are single copies: they are not part of the operational
// design, as in the paper. Which events are counted is decided by the instantiating level.
module fault_monitor
  import relobi_pkg::*;
#(
  parameter int unsigned NumEvents = 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  rel_req_t             rel_req_i,
  output rel_rsp_t             rel_rsp_o,
  input  logic [NumEvents-1:0] events_i,
  output logic                 corr_o,
  output logic                 uncorr_o
);
  localparam int unsigned IW = (NumEvents > 1) ? $clog2(NumEvents) : 1;

  obi_req_t             lreq   [3];
  logic [DataWidth-1:0] lrdata [3];
  logic                 lerr   [3];
  logic [NumEvents-1:0] ev_q;
  logic [31:0]          cnt_q [NumEvents];

  relobi_decoder i_dec (
    .clk_i, .rst_ni, .rel_req_i, .rel_rsp_o, .lane_req_o(lreq), .lane_rdata_i(lrdata),
    .lane_err_i(lerr), .corr_o, .uncorr_o
  );

  for (genvar k = 0; k < 3; k++) begin : g_lane
    always_comb begin
      lrdata[k] = '0;
      lerr[k]   = 1'b1;
      if (int'(lreq[k].addr[11:2]) < NumEvents) begin
        lrdata[k] = cnt_q[lreq[k].addr[IW+1:2]];
        lerr[k]   = 1'b0;
      end
    end
  end

  // voted write request
  logic                 wr;
  logic [AddrWidth-1:0] waddr;
  logic [DataWidth-1:0] wdata;
  assign wr    = maj3(lreq[0].req && lreq[0].we, lreq[1].req && lreq[1].we, lreq[2].req && lreq[2].we);
  assign waddr = (lreq[0].addr & lreq[1].addr) | (lreq[0].addr & lreq[2].addr) | (lreq[1].addr & lreq[2].addr);
  assign wdata = (lreq[0].wdata & lreq[1].wdata) | (lreq[0].wdata & lreq[2].wdata) | (lreq[1].wdata & lreq[2].wdata);

  logic unused;
  assign unused = ^{waddr[AddrWidth-1:12], waddr[1:0]};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ev_q <= '0;
      for (int i = 0; i < NumEvents; i++) cnt_q[i] <= '0;
    end else begin
      ev_q <= events_i;
      for (int i = 0; i < NumEvents; i++) begin
        if (wr && int'(waddr[11:2]) == i) cnt_q[i] <= wdata;
        else if (ev_q[i] && cnt_q[i] != '1) cnt_q[i] <= cnt_q[i] + 32'd1;
      end
    end
  end
endmodule
