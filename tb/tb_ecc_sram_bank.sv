// tb_ecc_sram_bank: checks one ECC SRAM bank behind a relobi_encoder (as a core would see
// it), with a small bank of 256 words. Checked against a reference memory model:
//  * full-word writes store the bus codeword unchanged (compared with the reference
//    encoding in the array), reads return the data with rvalid one cycle after the grant;
//  * byte writes (read-modify-write) merge correctly, respond one cycle after the grant and
//    hold off the next request in that response cycle (gnt low), while plain reads do not;
//  * a single-bit error planted in the array is corrected on the read and written back;
//  * a double-bit error is reported as uncorrectable;
//  * with one request lane stuck low, or one copy of the bank state upset, every access
//    still completes correctly (the three control lanes outvote the faulty one);
//  * with the scrubber enabled, planted single-bit errors in words that are never read are
//    repaired, and the scrubber defers to a stream of external accesses.
module tb_ecc_sram_bank;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 256;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  obi_req_t    oreq;
  obi_rsp_t    orsp;
  rel_req_t    rreq, rreq_d;
  int          kill_lane = -1;
  int          lane_corr = 0;
  rel_rsp_t    rrsp;
  logic        ecorr, eunc, bcorr, bunc, bsc, scrub_en;
  logic [15:0] period;
  logic [31:0] model [N];
  int          sc_events = 0, unc_events = 0;
  logic        gnt_at_rsp;

  relobi_encoder i_enc (.isolate_i(1'b0), .obi_req_i(oreq), .obi_rsp_o(orsp), .rel_req_o(rreq),
                        .rel_rsp_i(rrsp), .corr_o(ecorr), .uncorr_o(eunc));
  ecc_sram_bank #(.NumWords(N)) dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq_d), .rel_rsp_o(rrsp),
    .scrub_en_i(scrub_en), .scrub_period_i(period), .corr_o(bcorr), .uncorr_o(bunc), .scrub_corr_o(bsc));

  always_comb begin
    rreq_d = rreq;
    if (kill_lane >= 0) rreq_d.req[kill_lane] = 1'b0;   // one stuck request lane
  end

  always_ff @(posedge clk) begin
    if (kill_lane >= 0 && bcorr) lane_corr++;
    if (bsc) sc_events++;
    if (bunc) unc_events++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // OBI access; returns read data, error and the cycles spent waiting for gnt
  task automatic access(input logic we, input int idx, input logic [3:0] be, input logic [31:0] wd,
                        output logic [31:0] rd, output logic err, output int gnt_wait);
    @(negedge clk);
    oreq.req = 1; oreq.we = we; oreq.addr = Sram0Base + 32'(idx * 4); oreq.be = be; oreq.wdata = wd;
    gnt_wait = 0;
    forever begin
      #4;
      if (orsp.gnt) break;
      gnt_wait++;
      @(negedge clk);
    end
    @(negedge clk);
    oreq.req = 0;
    #4;
    chk(orsp.rvalid, "rvalid exactly one cycle after the grant");
    gnt_at_rsp = orsp.gnt;
    rd  = orsp.rdata;
    err = orsp.err;
  endtask

  initial begin
    logic [31:0] rd;
    logic        err;
    int          w;
    oreq = '0; scrub_en = 0; period = 16'd3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // initialise (as the boot code clears the memory)
    for (int i = 0; i < N; i++) begin
      model[i] = $urandom;
      access(1, i, 4'hF, model[i], rd, err, w);
    end
    for (int i = 0; i < N; i++) chk(dut.i_sram.mem[i] == ref_enc32(model[i]), "stored codeword is the bus codeword");
    for (int t = 0; t < 300; t++) begin
      int i;
      i = $urandom_range(N - 1);
      access(0, i, 4'hF, 0, rd, err, w);
      chk(rd == model[i] && !err, "read data");
    end
    // byte writes
    for (int t = 0; t < 200; t++) begin
      int i;
      logic [3:0]  be;
      logic [31:0] wd;
      i = $urandom_range(N - 1); be = 4'($urandom_range(14)); wd = $urandom;
      access(1, i, be, wd, rd, err, w);
      chk(!gnt_at_rsp, "RMW write-back cycle holds off the next request");
      for (int b = 0; b < 4; b++) if (be[b]) model[i][8*b +: 8] = wd[8*b +: 8];
      access(0, i, 4'hF, 0, rd, err, w);
      chk(gnt_at_rsp && w == 0, "plain read not held off");
      chk(rd == model[i], "RMW merge");
    end
    // single-bit error corrected on read and written back
    dut.i_sram.mem[5] = dut.i_sram.mem[5] ^ (39'd1 << 11);
    access(0, 5, 4'hF, 0, rd, err, w);
    chk(rd == model[5] && ecorr, "single error corrected at the reader");
    @(negedge clk);
    chk(dut.i_sram.mem[5] == ref_enc32(model[5]), "monitored read written back corrected");
    // double-bit error
    dut.i_sram.mem[6] = dut.i_sram.mem[6] ^ (39'd1 << 1) ^ (39'd1 << 2);
    access(0, 6, 4'hF, 0, rd, err, w);
    chk(eunc, "double error detected at the reader");
    @(negedge clk);
    chk(unc_events > 0, "double error reported by the bank");
    access(1, 6, 4'hF, model[6], rd, err, w);
    // one request lane stuck low: every kind of access still works, the fault is reported
    kill_lane = 2;
    for (int t = 0; t < 60; t++) begin
      int          i;
      logic [3:0]  be;
      logic [31:0] wd;
      i = $urandom_range(99); wd = $urandom;
      be = (t % 3 == 0) ? 4'hF : 4'($urandom_range(1, 14));
      if (t % 2 == 0) begin
        access(1, i, be, wd, rd, err, w);
        for (int b = 0; b < 4; b++) if (be[b]) model[i][8*b +: 8] = wd[8*b +: 8];
      end else begin
        access(0, i, 4'hF, 0, rd, err, w);
        chk(rd == model[i] && !err, "read with a stuck request lane");
      end
    end
    kill_lane = -1;
    chk(lane_corr > 0, "stuck request lane reported as corrected");
    for (int i = 0; i < 100; i++) begin
      access(0, i, 4'hF, 0, rd, err, w);
      chk(rd == model[i], "memory intact after the lane fault");
    end
    // upset in one copy of the bank state between grant and response of a byte write
    @(negedge clk);
    oreq.req = 1; oreq.we = 1; oreq.addr = Sram0Base + 32'(7 * 4); oreq.be = 4'b0010; oreq.wdata = 32'h0000_AB00;
    #4;
    chk(orsp.gnt, "byte write granted");
    @(posedge clk);
    #1;
    dut.i_state.q[1] = ~dut.i_state.q[1];
    @(negedge clk);
    oreq.req = 0;
    model[7][15:8] = 8'hAB;
    repeat (2) @(negedge clk);
    access(0, 7, 4'hF, 0, rd, err, w);
    chk(rd == model[7], "byte write completes despite an upset state copy");
    // scrubber
    for (int i = 100; i < 110; i++) dut.i_sram.mem[i] = dut.i_sram.mem[i] ^ (39'd1 << (i % 39));
    scrub_en = 1;
    for (int t = 0; t < 100; t++) begin   // scrubber must defer to this stream
      int i;
      i = $urandom_range(N - 1);
      if (i >= 100 && i < 110) i = 0;
      access(0, i, 4'hF, 0, rd, err, w);
      chk(rd == model[i], "read during scrubbing");
    end
    repeat (N * 8) @(negedge clk);
    for (int i = 100; i < 110; i++) chk(dut.i_sram.mem[i] == ref_enc32(model[i]), "scrubbed word repaired");
    chk(sc_events >= 10, $sformatf("scrubber corrections reported (%0d)", sc_events));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
