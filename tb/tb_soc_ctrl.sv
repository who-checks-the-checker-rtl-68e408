// tb_soc_ctrl: checks the triplicated SoC control registers through relOBI: reset values,
// write/read of every register and the matching outputs, the TCLS clear pulse, err on an
// unmapped offset, and an upset in one stored copy, which must not reach the outputs, must
// be reported, and must be repaired by the next clock edge.
module tb_soc_ctrl;
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

  logic [31:0] boot, status;
  logic        fetch, sen, iso, clr, flag;
  logic [15:0] per;
  int          clr_pulses = 0;

  soc_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq), .rel_rsp_o(rrsp), .tcls_flag_i(flag),
    .boot_addr_o(boot), .fetch_en_o(fetch), .core_status_o(status), .scrub_en_o(sen),
    .scrub_period_o(per), .dbg_isolate_o(iso), .tcls_clear_o(clr), .corr_o(corr), .uncorr_o(unc));

  always_ff @(posedge clk) if (clr) clr_pulses++;

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
    logic [31:0] rd;
    logic err;
    oreq = '0; flag = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    chk(boot == 32'h1000_0000 && !fetch && !sen && !iso && per == 16'd255, "reset values");
    rd_expect(32'h0300_0000, 32'h1000_0000, "boot address reset");
    for (int t = 0; t < 20; t++) begin
      logic [31:0] b, s;
      logic [15:0] p;
      b = $urandom; s = $urandom; p = 16'($urandom);
      wr(32'h0300_0000, b);
      wr(32'h0300_0004, 32'(t % 2));
      wr(32'h0300_0008, s);
      wr(32'h0300_000C, {p, 15'd0, 1'(t % 2)});
      wr(32'h0300_0010, 32'((t + 1) % 2));
      @(negedge clk);
      chk(boot == b && fetch == 1'(t % 2) && status == s && per == p && sen == 1'(t % 2) &&
          iso == 1'((t + 1) % 2), "outputs follow the registers");
      rd_expect(32'h0300_0000, b, "BOOT_ADDR");
      rd_expect(32'h0300_0004, 32'(t % 2), "FETCH_EN");
      rd_expect(32'h0300_0008, s, "CORE_STATUS");
      rd_expect(32'h0300_000C, {p, 15'd0, 1'(t % 2)}, "SCRUB_CTRL");
      rd_expect(32'h0300_0010, 32'((t + 1) % 2), "DBG_ISOLATE");
    end
    rd_expect(32'h0300_0014, 32'd1, "TCLS flag readable");
    wr(32'h0300_0014, 32'd1);
    @(negedge clk);
    chk(clr_pulses == 1, "TCLS clear pulse");
    access(0, 32'h0300_0040, 0, rd, err);
    chk(err, "unmapped offset answered with err");
    // upset of one stored copy
    wr(32'h0300_0008, 32'hA5A5_5A5A);
    @(negedge clk);
    force dut.i_regs.q[0] = ~dut.i_regs.q[0];
    #1;
    chk(status == 32'hA5A5_5A5A && corr, "upset outvoted and reported");
    @(negedge clk);
    release dut.i_regs.q[0];
    @(negedge clk);
    @(negedge clk);
    chk(!corr && dut.i_regs.q[0] == dut.i_regs.q[1], "upset repaired");
    rd_expect(32'h0300_0008, 32'hA5A5_5A5A, "CORE_STATUS after upset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
