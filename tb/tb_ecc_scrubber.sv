// tb_ecc_scrubber: checks the scrubber against a modelled single-port memory of 64 words.
// Checked: reads are spaced by the configured period (period + 3 cycles per word: count
// to period, read, check), the addresses sweep the whole memory in order, no read is issued while the
// port is busy (deferral), a planted single-bit error is written back corrected and
// reported, a planted double-bit error is reported as uncorrectable and left alone, and an
// upset in one copy of the triplicated state is reported and repaired.
module tb_ecc_scrubber;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 64;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        en, busy, req, we, corr, unc, terr;
  logic [15:0] period;
  logic [5:0]  addr;
  logic [38:0] wdata, rdata;
  logic [38:0] mem [N];
  int          reads = 0, last_read = 0, cyc = 0, busy_reads = 0, ncorr = 0, nunc = 0;
  int          gaps_bad = 0;
  logic [5:0]  last_addr = '1;
  int          order_bad = 0;

  ecc_scrubber #(.NumWords(N)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .period_i(period),
    .ext_busy_i(busy), .req_o(req), .we_o(we), .addr_o(addr), .wdata_o(wdata), .rdata_i(rdata),
    .corr_o(corr), .uncorr_o(unc), .tmr_err_o(terr));

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (req) begin
      rdata <= mem[addr];
      if (busy) busy_reads++;
      if (reads > 0 && !busy && cyc - last_read != int'(period) + 3 && !$past(busy)) gaps_bad++;
      if (addr != last_addr + 6'd1) order_bad++;
      last_addr <= addr;
      last_read <= cyc;
      reads++;
    end
    if (we) mem[addr] <= wdata;
    if (corr) ncorr++;
    if (unc) nunc++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; busy = 0; period = 16'd5;
    for (int i = 0; i < N; i++) mem[i] = ref_enc32(32'h1000 + i);
    mem[10] = mem[10] ^ (39'd1 << 7);                        // single error
    mem[20] = mem[20] ^ (39'd1 << 3) ^ (39'd1 << 30);        // double error
    repeat (3) @(negedge clk);
    rst_n = 1;
    en = 1;
    repeat (N * 8) @(negedge clk);
    chk(reads >= N, $sformatf("whole memory swept (%0d reads)", reads));
    chk(gaps_bad == 0, $sformatf("read spacing equals period + 3 (%0d bad)", gaps_bad));
    chk(order_bad == 0, "addresses in order");
    chk(mem[10] == ref_enc32(32'h1000 + 10), "single error corrected in memory");
    chk(ncorr >= 1 && nunc >= 1, "corrected and uncorrectable events reported");
    chk(mem[20] == (ref_enc32(32'h1000 + 20) ^ (39'd1 << 3) ^ (39'd1 << 30)), "double error left alone");
    for (int i = 0; i < N; i++) if (i != 20) chk(mem[i] == ref_enc32(32'h1000 + i), "other words intact");
    // deferral
    busy = 1;
    begin
      int r0;
      r0 = reads;
      repeat (50) @(negedge clk);
      chk(reads == r0, "no scrub read while the port is busy");
    end
    busy = 0;
    repeat (20) @(negedge clk);
    chk(busy_reads == 0, "never read during busy");
    // state upset
    @(negedge clk);
    force dut.i_state.q[2] = ~dut.i_state.q[2];
    #1;
    chk(terr, "state upset reported");
    @(negedge clk);
    release dut.i_state.q[2];
    repeat (2) @(negedge clk);
    chk(!terr, "state upset repaired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
