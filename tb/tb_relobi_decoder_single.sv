// tb_relobi_decoder_single: checks the debug-module isolation adapter. The testbench models
// the debug module's subordinate port (gnt = req, rvalid and read data = address XOR a
// constant one cycle later). Checked: decoded request, lane copies of gnt/rvalid, encoded
// read data, correction of a single-bit write-data error, a single faulty req lane outvoted,
// and isolation: no request reaches the debug module and the adapter answers err itself.
module tb_relobi_decoder_single;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, iso = 0;
  always #5 clk = ~clk;

  rel_req_t rreq;
  rel_rsp_t rrsp;
  obi_req_t oreq;
  obi_rsp_t orsp;
  logic     corr, unc;
  bit       corr_seen;
  logic     dm_rv;
  logic [31:0] dm_rd;

  relobi_decoder_single dut (.clk_i(clk), .rst_ni(rst_n), .isolate_i(iso), .rel_req_i(rreq),
                             .rel_rsp_o(rrsp), .obi_req_o(oreq), .obi_rsp_i(orsp),
                             .corr_o(corr), .uncorr_o(unc));

  // debug module model
  always_ff @(posedge clk) begin
    dm_rv <= oreq.req;
    dm_rd <= oreq.addr ^ 32'h1234_0000;
  end
  assign orsp.gnt = oreq.req;
  assign orsp.rvalid = dm_rv;
  assign orsp.rdata = dm_rd;
  assign orsp.err = 1'b0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input logic [31:0] a, input logic [31:0] wd, input logic [2:0] lanes,
                        input logic [38:0] wflip);
    @(negedge clk);
    rreq.req      = lanes;
    rreq.addr_cw  = ref_enc32(a);
    rreq.meta_cw  = ref_enc_meta(1'b1, 4'hF);
    rreq.wdata_cw = ref_enc32(wd) ^ wflip;
    #1;
    corr_seen = corr;
    chk(oreq.req == !iso, "request forwarded unless isolated");
    if (!iso) chk(oreq.addr == a && oreq.wdata == wd && oreq.we, "decoded fields");
    chk(rrsp.gnt == 3'b111, "gnt lanes");
    @(negedge clk);
    rreq.req = 3'b000;
    #1;
    chk(rrsp.rvalid == 3'b111, "rvalid lanes");
    chk(rrsp.err == {3{iso}}, "err only when isolated");
    if (!iso) chk(rrsp.rdata_cw == ref_enc32(a ^ 32'h1234_0000), "encoded read data");
  endtask

  initial begin
    rreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) access($urandom & 32'h0003_FFFC, $urandom, 3'b111, '0);
    access(32'h0000_0100, 32'hCAFE_F00D, 3'b111, 39'd1 << 9);
    access(32'h0000_0104, 32'h0BAD_F00D, 3'b101, '0);
    chk(corr_seen, "lane fault reported");
    iso = 1;
    access(32'h0000_0200, 32'h1, 3'b111, '0);
    access(32'h0000_0204, 32'h2, 3'b111, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
