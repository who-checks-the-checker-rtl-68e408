// tb_tcls_unit: checks the lockstep wrapper. Three identical core outputs must give the
// reference relOBI encoding with no mismatch; a fault in one core (random bit of its data
// request) must be outvoted on the bus, raise mismatch, set the sticky flag (and the cores'
// TCLS interrupt) one cycle later, which clear_i removes. Responses: a single-bit read-data
// error and one wrong gnt lane must reach all three cores corrected.
module tb_tcls_unit;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  core_out_t co [3];
  core_in_t  ci [3];
  rel_req_t  ireq, dreq;
  rel_rsp_t  irsp, drsp;
  logic      clear, busy, mism, flag, corr, unc;
  logic      dreq_in = 0;

  tcls_unit dut (.clk_i(clk), .rst_ni(rst_n), .core_out_i(co), .core_in_o(ci),
                 .instr_req_o(ireq), .instr_rsp_i(irsp), .data_req_o(dreq), .data_rsp_i(drsp),
                 .irq_timer_i(1'b1), .fetch_en_i(1'b1), .debug_req_i(dreq_in), .boot_addr_i(32'h1000_0080),
                 .clear_i(clear), .busy_o(busy), .mismatch_o(mism), .flag_o(flag),
                 .corr_o(corr), .uncorr_o(unc));

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

  initial begin
    clear = 0; irsp = '0; drsp = '0;
    for (int c = 0; c < 3; c++) co[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      core_out_t o;
      int victim;
      o.instr.req = 1; o.instr.addr = $urandom; o.instr.we = 0; o.instr.be = 4'hF; o.instr.wdata = 0;
      o.data.req = 1; o.data.addr = $urandom; o.data.we = 1; o.data.be = 4'($urandom); o.data.wdata = $urandom;
      o.busy = 1;
      @(negedge clk);
      for (int c = 0; c < 3; c++) co[c] = o;
      #1;
      chk(!mism, "no mismatch with identical cores");
      chk(ireq.addr_cw == ref_enc32(o.instr.addr) && ireq.req == 3'b111, "instr request encoding");
      chk(dreq.addr_cw == ref_enc32(o.data.addr) && dreq.wdata_cw == ref_enc32(o.data.wdata) &&
          dreq.meta_cw == ref_enc_meta(1'b1, o.data.be), "data request encoding");
      chk(busy, "busy voted");
      // fault in one core
      victim = $urandom_range(2);
      co[victim].data.wdata = co[victim].data.wdata ^ (32'd1 << $urandom_range(31));
      #1;
      chk(mism, "mismatch detected");
      chk(dreq.wdata_cw == ref_enc32(o.data.wdata), "faulty core outvoted");
      @(negedge clk);
      co[victim] = o;
      #1;
      chk(flag && ci[0].irq_tcls && ci[1].irq_tcls && ci[2].irq_tcls, "resync interrupt raised");
      clear = 1;
      @(negedge clk);
      clear = 0;
      #1;
      chk(!flag && !ci[0].irq_tcls, "flag cleared");
      // response with errors
      begin
        logic [31:0] d;
        d = $urandom;
        dreq_in = 1'($urandom);
        drsp.gnt = 3'b101; drsp.rvalid = 3'b111; drsp.err = 3'b000;
        drsp.rdata_cw = ref_enc32(d) ^ (39'd1 << $urandom_range(38));
        #1;
        for (int c = 0; c < 3; c++) begin
          chk(ci[c].data.rvalid && ci[c].data.gnt && ci[c].data.rdata == d, "corrected response at every core");
          chk(ci[c].boot_addr == 32'h1000_0080 && ci[c].fetch_en && ci[c].irq_timer &&
              ci[c].debug_req == dreq_in, "fan-out of inputs");
        end
        chk(corr && !unc, "response correction reported");
        drsp = '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
