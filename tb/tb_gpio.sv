// tb_gpio: checks the triplicated GPIO: OUT and OE registers drive the voted pins, TOGGLE
// flips the selected pins, IN returns the pins after the two-stage synchroniser (visible
// two cycles after a change), err on an unmapped offset, and an upset of one copy does not
// reach the pins and is repaired.
module tb_gpio;
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

  logic [31:0] gi, go, goe;

  gpio dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq), .rel_rsp_o(rrsp), .gpio_i(gi),
            .gpio_o(go), .gpio_oe_o(goe), .corr_o(corr), .uncorr_o(unc));

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
    oreq = '0; gi = 32'h1234_5678;
    repeat (3) @(negedge clk);
    rst_n = 1;
    chk(go == 0 && goe == 0, "reset values");
    for (int t = 0; t < 30; t++) begin
      logic [31:0] o, e, tg, in;
      o = $urandom; e = $urandom; tg = $urandom; in = $urandom;
      wr(32'h0300_5004, o);
      wr(32'h0300_5008, e);
      @(negedge clk);
      chk(go == o && goe == e, "pins follow OUT/OE");
      wr(32'h0300_500C, tg);
      @(negedge clk);
      chk(go == (o ^ tg), "TOGGLE");
      rd_expect(32'h0300_5004, o ^ tg, "OUT readback");
      rd_expect(32'h0300_5008, e, "OE readback");
      @(negedge clk);
      gi = in;
      @(negedge clk);
      @(negedge clk);
      #1;
      chk(dut.i_regs.q[0][31:0] == in, "input synchronised after two cycles");
      rd_expect(32'h0300_5000, in, "IN");
    end
    access(0, 32'h0300_5010, 0, r, err);
    chk(err, "unmapped offset answered with err");
    r = go;
    @(negedge clk);
    force dut.i_regs.q[1] = ~dut.i_regs.q[1];
    #1;
    chk(go == r && corr, "upset outvoted and reported");
    @(negedge clk);
    release dut.i_regs.q[1];
    repeat (2) @(negedge clk);
    chk(!corr && go == r, "upset repaired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
