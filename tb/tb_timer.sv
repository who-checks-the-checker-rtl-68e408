// tb_timer: checks the triplicated timer: COUNT advances by one per cycle while enabled
// (two reads a known number of cycles apart), stops when disabled, the interrupt rises when
// COUNT reaches COMPARE and falls when COMPARE is moved, err on an unmapped offset, and an
// upset in one copy is outvoted and repaired.
module tb_timer;
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

  logic irq;
  int   irq_cycles = 0;

  timer dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq), .rel_rsp_o(rrsp), .irq_o(irq),
             .corr_o(corr), .uncorr_o(unc));

  always_ff @(posedge clk) if (irq) irq_cycles++;

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
    logic [31:0] r1, r2;
    logic err;
    int c1, c2, cyc;
    oreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(32'h0300_A008, 32'd200);
    wr(32'h0300_A004, 32'd0);
    wr(32'h0300_A000, 32'd1);
    access(0, 32'h0300_A004, 0, r1, err);
    repeat (10) @(negedge clk);
    access(0, 32'h0300_A004, 0, r2, err);
    // the two reads sample COUNT 12 cycles apart (rest of the first access, 10 idle cycles,
    // wait for the next negative edge)
    chk(r2 - r1 == 32'd12, $sformatf("count rate one per cycle (%0d)", r2 - r1));
    chk(!irq, "no interrupt before compare");
    cyc = 0;
    while (!irq && cyc < 400) begin
      @(negedge clk);
      cyc++;
    end
    chk(irq, "interrupt at compare");
    access(0, 32'h0300_A004, 0, r1, err);
    chk(r1 >= 200 && r1 < 205, $sformatf("interrupt at COUNT == COMPARE (%0d)", r1));
    wr(32'h0300_A008, 32'd100000);
    @(negedge clk);
    chk(!irq, "interrupt acknowledged by moving COMPARE");
    wr(32'h0300_A000, 32'd0);
    access(0, 32'h0300_A004, 0, r1, err);
    repeat (5) @(negedge clk);
    access(0, 32'h0300_A004, 0, r2, err);
    chk(r1 == r2, "count stops when disabled");
    access(0, 32'h0300_A00C, 0, r1, err);
    chk(err, "unmapped offset answered with err");
    @(negedge clk);
    force dut.i_regs.q[2] = ~dut.i_regs.q[2];
    #1;
    chk(corr && !irq, "upset outvoted and reported");
    @(negedge clk);
    release dut.i_regs.q[2];
    repeat (2) @(negedge clk);
    chk(!corr, "upset repaired");
    access(0, 32'h0300_A004, 0, r1, err);
    chk(r1 == r2, "count intact after upset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
