// tb_relobi_decoder: checks the triplicated subordinate-side relOBI adapter. The testbench
// plays the three peripheral lanes (read data = address XOR a constant; offset 0xFFC
// answers err). Checked: decoded request fields on every lane, rvalid exactly one cycle
// after the request, the voted read-data codeword, correction of a single-bit address
// error, outvoting of one lane returning wrong data, and rejection (err, no lane request)
// of an uncorrectable address codeword.
module tb_relobi_decoder;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rel_req_t             rreq;
  rel_rsp_t             rrsp;
  obi_req_t             lreq [3];
  logic [31:0]          lrdata [3];
  logic                 lerr [3];
  logic                 corr, unc;
  int                   bad_lane = -1;

  relobi_decoder dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq), .rel_rsp_o(rrsp),
                      .lane_req_o(lreq), .lane_rdata_i(lrdata), .lane_err_i(lerr),
                      .corr_o(corr), .uncorr_o(unc));

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      lrdata[k] = lreq[k].addr ^ 32'h5A5A_0000 ^ ((k == bad_lane) ? 32'h0000_0100 : 32'h0);
      lerr[k]   = (lreq[k].addr[11:0] == 12'hFFC);
    end
  end

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

  // one request, checked on the lanes and in the response
  task automatic access(input logic [31:0] a, input logic we, input logic [31:0] wd,
                        input logic [38:0] aflip, input bit expect_err, input bit expect_pass);
    @(negedge clk);
    rreq.req      = 3'b111;
    rreq.addr_cw  = ref_enc32(a) ^ aflip;
    rreq.meta_cw  = ref_enc_meta(we, 4'hF);
    rreq.wdata_cw = ref_enc32(wd);
    #1;
    for (int k = 0; k < 3; k++) begin
      chk(lreq[k].req == expect_pass, "lane req");
      if (expect_pass) chk(lreq[k].addr == a && lreq[k].we == we && lreq[k].wdata == wd, "lane fields");
    end
    chk(rrsp.gnt == 3'b111, "gnt");
    chk(rrsp.rvalid == 3'b000, "no early rvalid");
    @(negedge clk);
    rreq.req = 3'b000;
    #1;
    chk(rrsp.rvalid == 3'b111, "rvalid after one cycle");
    chk(rrsp.err == {3{expect_err}}, "err lanes");
    if (expect_pass && !expect_err)
      chk(rrsp.rdata_cw == ref_enc32(a ^ 32'h5A5A_0000), "voted read-data codeword");
  endtask

  initial begin
    rreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) access($urandom & 32'hFFFF_FFF0, 1'($urandom), $urandom, '0, 0, 1);
    // single-bit address error: corrected
    access(32'h0300_2008, 0, 0, 39'd1 << 5, 0, 1);
    // one lane returns wrong data: outvoted
    bad_lane = 1;
    access(32'h0300_2004, 0, 0, '0, 0, 1);
    chk(corr, "TMR mismatch reported");
    bad_lane = -1;
    // peripheral error
    access(32'h0300_2FFC, 0, 0, '0, 1, 1);
    // uncorrectable address: rejected with err
    access(32'h0300_2000, 1, 32'hDEAD_BEEF, (39'd1 << 3) | (39'd1 << 20), 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
