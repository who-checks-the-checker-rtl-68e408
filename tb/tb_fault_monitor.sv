// tb_fault_monitor: checks the fault counters: each event pulse is counted once (after the
// pipeline stage), counters are independent, saturate-free counting over many pulses,
// writes set/clear a counter, err beyond the last counter.
module tb_fault_monitor;
  import relobi_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  obi_req_t oreq;
  obi_rsp_t orsp;
  rel_req_t rreq;
  rel_rsp_t rrsp;
  logic     ecorr, eunc, corr, unc;

  relobi_encoder i_enc (.isolate_i(1'b0), .obi_req_i(oreq), .obi_rsp_o(orsp), .rel_req_o(rreq),
                        .rel_rsp_i(rrsp), .corr_o(ecorr), .uncorr_o(eunc));

  logic [7:0] ev;
  int         ref_cnt [8];

  fault_monitor #(.NumEvents(8)) dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq), .rel_rsp_o(rrsp),
                                      .events_i(ev), .corr_o(corr), .uncorr_o(unc));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // one OBI access through the relobi_encoder; rvalid must come one cycle after the grant
  task automatic access(input logic we, input logic [31:0] a, input logic [31:0] wd,
                        output logic [31:0] rd, output logic err);
    @(negedge clk);
    oreq.req = 1; oreq.we = we; oreq.addr = a; oreq.be = 4'hF; oreq.wdata = wd;
    forever begin
      #4;
      if (orsp.gnt) break;
      @(negedge clk);
    end
    @(negedge clk);
    oreq.req = 0;
    #4;
    chk(orsp.rvalid, "rvalid one cycle after the grant");
    rd  = orsp.rdata;
    err = orsp.err;
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] wd);
    logic [31:0] rd;
    logic err;
    access(1, a, wd, rd, err);
    chk(!err, $sformatf("write %h accepted", a));
  endtask

  task automatic rd_expect(input logic [31:0] a, input logic [31:0] exp, input string what);
    logic [31:0] rd;
    logic err;
    access(0, a, 0, rd, err);
    chk(!err && rd == exp, $sformatf("%s: read %h expected %h", what, rd, exp));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    logic err;
    oreq = '0; ev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) ref_cnt[i] = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      ev = 8'($urandom);
      for (int i = 0; i < 8; i++) if (ev[i]) ref_cnt[i]++;
    end
    @(negedge clk);
    ev = '0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 8; i++) rd_expect(32'h0300_1000 + 32'(4 * i), 32'(ref_cnt[i]), $sformatf("counter %0d", i));
    // one pulse: visible two cycles later (pipeline stage, then counter)
    @(negedge clk);
    ev = 8'h04;
    @(negedge clk);
    ev = 8'h00;
    #1;
    chk(dut.cnt_q[2] == 32'(ref_cnt[2]), "pipelined: not yet counted");
    @(negedge clk);
    #1;
    chk(dut.cnt_q[2] == 32'(ref_cnt[2] + 1), "counted after the pipeline stage");
    wr(32'h0300_1008, 32'd0);
    rd_expect(32'h0300_1008, 32'd0, "counter cleared");
    wr(32'h0300_100C, 32'd77);
    rd_expect(32'h0300_100C, 32'd77, "counter set");
    access(0, 32'h0300_1020, 0, r, err);
    chk(err, "offset beyond the counters answered with err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
