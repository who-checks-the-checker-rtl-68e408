// tb_croc_rel_soc: end-to-end test of the reliable croc SoC at its default size (two banks of
// 2048 words). The three lockstepped cores are replaced by a bus-level model that drives the
// same transactions on all three cores' ports, so every check also confirms that the three
// cores receive identical responses. The sequence follows the shape of the evaluated
// application loop: preloaded code is fetched on the instruction port, the data memory is
// cleared, the fault counters are cleared, the scrubber is started, a string goes out over
// the UART, GPIO pins are toggled, a timer delay ends in the timer interrupt, a checksum
// kernel runs over memory (with byte writes), and the result goes into the return-value
// register. Faults are injected along the way and each mechanism must be seen at least once:
// TCLS mismatch and resynchronisation interrupt, ECC correction on a read, scrubber
// correction, uncorrectable detection, a bit error on the encoded response wires corrected
// at the cores, read-modify-write, triplicated-state repair in the
// interconnect and in a peripheral, arbitration between instruction and data ports, debug
// access and debug isolation (bus ports and halt request), and err on an unmapped address.
// The fault counters must match.
module tb_croc_rel_soc;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  core_out_t   co [3];
  core_in_t    ci [3];
  logic        busy, tx, rx;
  obi_req_t    dmreq, dsreq;
  obi_rsp_t    dmrsp, dsrsp;
  logic [31:0] gi, go, goe, status;
  logic        dbg_halt;

  croc_rel_soc dut (.clk_i(clk), .rst_ni(rst_n), .core_out_i(co), .core_in_o(ci), .core_busy_o(busy),
    .dbg_mgr_req_i(dmreq), .dbg_mgr_rsp_o(dmrsp), .dbg_sub_req_o(dsreq), .dbg_sub_rsp_i(dsrsp), .dbg_req_i(dbg_halt),
    .uart_rx_i(rx), .uart_tx_o(tx), .gpio_i(gi), .gpio_o(go), .gpio_oe_o(goe), .status_o(status));

  // debug module subordinate model: answers the cycle after the request
  logic        dm_rv;
  logic [31:0] dm_rd;
  always_ff @(posedge clk) begin
    dm_rv <= dsreq.req;
    dm_rd <= dsreq.addr ^ 32'hD0D0_0000;
  end
  assign dsrsp = '{gnt: dsreq.req, rvalid: dm_rv, rdata: dm_rd, err: 1'b0};

  // mechanism counters
  int n_tcls = 0, n_tcls_irq = 0, n_ecc_read = 0, n_scrub = 0, n_unc = 0, n_rmw = 0;
  int n_xbar_fix = 0, n_periph_fix = 0, n_contention = 0, n_dbg = 0, n_dbg_iso = 0, n_unmapped = 0;
  int n_link_fix = 0;
  bit link_window = 0;
  int n_timer_irq = 0, n_uart_bytes = 0, n_gpio_toggles = 0, n_fetch = 0;

  always_ff @(posedge clk) begin
    if (dut.tcls_mismatch) n_tcls++;
    if (ci[0].irq_tcls && !$past(ci[0].irq_tcls)) n_tcls_irq++;
    if (ci[0].irq_timer && !$past(ci[0].irq_timer)) n_timer_irq++;
    if (dut.s0_sc || dut.s1_sc) n_scrub++;
    if (dut.i_sram0.rmw_wr || dut.i_sram1.rmw_wr) n_rmw++;
    if (dut.i_sram0.fix_wr || dut.i_sram1.fix_wr) n_ecc_read++;
    if (co[0].instr.req && co[0].data.req && addr_decode(co[0].instr.addr) == addr_decode(co[0].data.addr))
      n_contention++;
    if (go != $past(go)) n_gpio_toggles++;
    if (dut.i_xbar.tmr_err) n_xbar_fix++;
    if (dut.i_gpio.tmr_err) n_periph_fix++;
    if (link_window && dut.tcls_corr) n_link_fix++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ core data-port model
  int          fault_core = -1;
  logic [31:0] fault_mask = '0;

  task automatic cpu(input logic we, input logic [31:0] a, input logic [31:0] wd, input logic [3:0] be,
                     output logic [31:0] rd, output logic err);
    @(negedge clk);
    for (int c = 0; c < 3; c++) begin
      co[c].data.req = 1; co[c].data.we = we; co[c].data.addr = a; co[c].data.be = be;
      co[c].data.wdata = (c == fault_core) ? wd ^ fault_mask : wd;
    end
    forever begin
      #4;
      chk(ci[0].data.gnt == ci[1].data.gnt && ci[0].data.gnt == ci[2].data.gnt, "identical gnt at the cores");
      if (ci[0].data.gnt) break;
      @(negedge clk);
    end
    @(negedge clk);
    for (int c = 0; c < 3; c++) co[c].data.req = 0;
    forever begin
      #4;
      if (ci[0].data.rvalid) break;
      @(negedge clk);
    end
    chk(ci[0].data == ci[1].data && ci[0].data == ci[2].data, "identical responses at the three cores");
    rd  = ci[0].data.rdata;
    err = ci[0].data.err;
  endtask

  task automatic w32(input logic [31:0] a, input logic [31:0] wd);
    logic [31:0] rd;
    logic err;
    cpu(1, a, wd, 4'hF, rd, err);
    chk(!err, $sformatf("write %h", a));
  endtask

  task automatic r32(input logic [31:0] a, output logic [31:0] rd);
    logic err;
    cpu(0, a, 0, 4'hF, rd, err);
    chk(!err, $sformatf("read %h", a));
  endtask

  // ------------------------------------------------------------ instruction fetch model
  bit fetch_run = 0;
  localparam int CodeWords = 64;
  function automatic logic [31:0] code(input int i);
    return 32'h0000_0013 ^ (32'(i) << 7) ^ 32'h00A5_0000;   // arbitrary instruction-like words
  endfunction

  task automatic fetcher();
    int pc = 0;
    while (fetch_run) begin
      @(negedge clk);
      for (int c = 0; c < 3; c++) begin
        co[c].instr = '0;
        co[c].instr.req = 1; co[c].instr.addr = Sram0Base + 32'(pc * 4); co[c].instr.be = 4'hF;
      end
      forever begin
        #4;
        if (ci[0].instr.gnt) break;
        @(negedge clk);
      end
      @(negedge clk);
      for (int c = 0; c < 3; c++) co[c].instr.req = 0;
      forever begin
        #4;
        if (ci[0].instr.rvalid) break;
        @(negedge clk);
      end
      chk(ci[0].instr.rdata == code(pc) && ci[1].instr == ci[0].instr && ci[2].instr == ci[0].instr,
          "instruction fetch");
      n_fetch++;
      pc = (pc + 1) % CodeWords;
    end
  endtask

  // ------------------------------------------------------------ UART line monitor
  logic [7:0] uart_bytes [$];
  initial begin
    forever begin
      @(negedge clk);
      if (rst_n && !tx) begin
        logic [7:0] b;
        repeat (4) @(negedge clk);          // middle of the start bit (DIV = 8)
        for (int i = 0; i < 8; i++) begin
          repeat (8) @(negedge clk);
          b[i] = tx;
        end
        repeat (8) @(negedge clk);
        chk(tx, "stop bit");
        uart_bytes.push_back(b);
        n_uart_bytes++;
      end
    end
  end

  // ------------------------------------------------------------ debug manager access
  task automatic dbg(input logic [31:0] a, output logic [31:0] rd, output logic err);
    @(negedge clk);
    dmreq = '0; dmreq.req = 1; dmreq.addr = a; dmreq.be = 4'hF;
    for (int n = 0; n < 20; n++) begin
      #4;
      if (dmrsp.gnt) break;
      @(negedge clk);
    end
    if (!dmrsp.gnt) begin
      dmreq.req = 0;
      rd = '0; err = 1;       // isolated: never granted
      return;
    end
    @(negedge clk);
    dmreq.req = 0;
    forever begin
      #4;
      if (dmrsp.rvalid) break;
      @(negedge clk);
    end
    rd = dmrsp.rdata; err = dmrsp.err;
  endtask

  // ------------------------------------------------------------ main sequence
  localparam string Msg = "croc ok\n";
  logic [31:0] cnt_before [8];

  task automatic read_counters(output logic [31:0] c [8]);
    for (int i = 0; i < 8; i++) r32(FaultMonBase + 32'(4 * i), c[i]);
  endtask

  initial begin
    logic [31:0] rd, sum, ref_sum;
    logic        err;
    logic [31:0] cnt [8];
    int          words;
    words = dut.SramWords;
    for (int c = 0; c < 3; c++) co[c] = '0;
    dmreq = '0; rx = 1; gi = 32'h0; dbg_halt = 0;
    // preload the application code into bank 0 (as the simulation preloads the binary)
    for (int i = 0; i < CodeWords; i++) dut.i_sram0.i_sram.mem[i] = ref_enc32(code(i));
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(ci[0].boot_addr == Sram0Base && !ci[0].fetch_en, "boot address and fetch enable at reset");
    w32(SocCtrlBase + 32'h04, 32'd1);
    chk(ci[0].fetch_en && ci[1].fetch_en && ci[2].fetch_en, "fetch enabled");
    fetch_run = 1;
    fork fetcher(); join_none

    // clear the rest of the memory (both banks)
    for (int i = CodeWords; i < words; i++) w32(Sram0Base + 32'(4 * i), 32'd0);
    for (int i = 0; i < words; i++) w32(Sram1Base + 32'(4 * i), 32'd0);
    // clear the fault monitor, start the scrubber (period 0: one word every 3 cycles)
    for (int i = 0; i < 8; i++) w32(FaultMonBase + 32'(4 * i), 32'd0);
    w32(SocCtrlBase + 32'h0C, 32'h0000_0001);

    // UART string
    w32(UartBase + 32'h0C, 32'd8);
    for (int i = 0; i < Msg.len(); i++) begin
      do r32(UartBase + 32'h08, rd); while (rd[0]);
      w32(UartBase, {24'd0, Msg[i]});
    end
    do r32(UartBase + 32'h08, rd); while (rd[0]);
    repeat (100) @(negedge clk);

    // GPIO toggling
    w32(GpioBase + 32'h08, 32'h0000_00FF);
    for (int i = 0; i < 8; i++) w32(GpioBase + 32'h0C, 32'h0000_0001 << i);
    @(negedge clk);
    chk(go[7:0] == 8'hFF && goe == 32'hFF, "GPIO pins toggled");
    gi = 32'hCAFE_0001;
    repeat (3) @(negedge clk);
    r32(GpioBase, rd);
    chk(rd == 32'hCAFE_0001, "GPIO input");

    // timer delay with interrupt
    w32(TimerBase + 32'h08, 32'd300);
    w32(TimerBase + 32'h04, 32'd0);
    w32(TimerBase, 32'd1);
    while (!ci[0].irq_timer) @(negedge clk);
    chk(ci[1].irq_timer && ci[2].irq_timer, "timer interrupt at all cores");
    w32(TimerBase, 32'd0);

    // checksum kernel with byte writes into bank 1
    ref_sum = 0;
    for (int i = 0; i < 64; i++) begin
      logic [31:0] v;
      v = 32'h0101_0101 * 32'(i) ^ 32'h5A00_00A5;
      w32(Sram1Base + 32'(4 * i), v);
      cpu(1, Sram1Base + 32'(4 * i), {24'd0, 8'(i)}, 4'b0001, rd, err);   // byte write
      v[7:0] = 8'(i);
      ref_sum += v;
    end
    sum = 0;
    for (int i = 0; i < 64; i++) begin
      r32(Sram1Base + 32'(4 * i), rd);
      sum += rd;
    end
    chk(sum == ref_sum, "checksum over memory with byte writes");

    // ---------------------------------------------------------------- fault injection
    read_counters(cnt_before);
    // 1. TCLS: core 1 computes a wrong value once
    fault_core = 1; fault_mask = 32'h0000_0100;
    w32(Sram1Base + 32'h100, 32'h1111_2222);
    fault_core = -1;
    r32(Sram1Base + 32'h100, rd);
    chk(rd == 32'h1111_2222, "lockstep vote masks the faulty core");
    @(negedge clk);
    chk(ci[0].irq_tcls && ci[1].irq_tcls && ci[2].irq_tcls, "resynchronisation interrupt");
    r32(SocCtrlBase + 32'h14, rd);
    chk(rd == 32'd1, "TCLS flag readable");
    w32(SocCtrlBase + 32'h14, 32'd1);
    @(negedge clk);
    chk(!ci[0].irq_tcls, "TCLS flag cleared");
    // 2. SRAM single-bit upset, read by the core: corrected and written back
    dut.i_sram1.i_sram.mem[64] = dut.i_sram1.i_sram.mem[64] ^ (39'd1 << 13);
    r32(Sram1Base + 32'h100, rd);
    chk(rd == 32'h1111_2222, "ECC corrects the read");
    @(negedge clk);
    chk(dut.i_sram1.i_sram.mem[64] == ref_enc32(32'h1111_2222), "monitored read written back");
    // 3. SRAM upsets in words nobody reads: the scrubber repairs them
    for (int i = 0; i < 4; i++)
      dut.i_sram0.i_sram.mem[1000 + i] = dut.i_sram0.i_sram.mem[1000 + i] ^ (39'd1 << (5 * i));
    repeat (3 * words + 200) @(negedge clk);
    for (int i = 0; i < 4; i++) chk(dut.i_sram0.i_sram.mem[1000 + i] == '0, "scrubber repaired the word");
    // 4. double-bit upset: detected as uncorrectable
    dut.i_sram1.i_sram.mem[65] = dut.i_sram1.i_sram.mem[65] ^ 39'h3;
    cpu(0, Sram1Base + 32'h104, 0, 4'hF, rd, err);
    w32(Sram1Base + 32'h104, 32'd0);
    // 5. upset in one copy of the interconnect state
    @(negedge clk);
    dut.i_xbar.i_state.q[0] = ~dut.i_xbar.i_state.q[0];
    @(negedge clk);
    r32(Sram1Base + 32'h100, rd);
    chk(rd == 32'h1111_2222, "interconnect works after a state upset");
    // 6. upset in one copy of the GPIO registers
    @(negedge clk);
    dut.i_gpio.i_regs.q[2] = ~dut.i_gpio.i_regs.q[2];
    #1;
    chk(go[7:0] == 8'hFF && goe == 32'hFF, "GPIO pins unaffected by an upset copy");
    @(negedge clk);
    chk(!dut.i_gpio.i_regs.err_o, "GPIO copy repaired after one clock");
    repeat (4) @(negedge clk);
    // 7. bit error on the encoded response wires of the GPIO subordinate, during a read
    fork
      begin
        r32(GpioBase + 32'h04, rd);
      end
      begin
        logic b;
        @(posedge dut.i_gpio.rel_rsp_o.rvalid[0]);
        #1;
        b = dut.i_gpio.rel_rsp_o.rdata_cw[5];
        force dut.i_gpio.rel_rsp_o.rdata_cw[5] = ~b;
        link_window = 1;
        @(negedge clk);
        @(negedge clk);
        release dut.i_gpio.rel_rsp_o.rdata_cw[5];
        link_window = 0;
      end
    join
    chk(rd == 32'hFF, "relOBI response codeword corrected at the cores");
    // 8. debug module: access, then isolation
    dbg(DebugBase + 32'h0000_0400, rd, err);
    chk(!err && rd == (32'h0000_0400 ^ 32'hD0D0_0000), "debug module subordinate reached");
    n_dbg++;
    dbg(Sram1Base + 32'h100, rd, err);
    chk(!err && rd == 32'h1111_2222, "debug module reads memory");
    n_dbg++;
    dbg_halt = 1;
    #1;
    chk(ci[0].debug_req && ci[1].debug_req && ci[2].debug_req, "debug halt request reaches the cores");
    w32(SocCtrlBase + 32'h10, 32'd1);
    chk(!ci[0].debug_req && !ci[1].debug_req && !ci[2].debug_req, "isolated debug halt request blocked");
    dbg_halt = 0;
    dbg(Sram1Base + 32'h100, rd, err);
    chk(err, "isolated debug manager is not granted");
    cpu(0, DebugBase + 32'h400, 0, 4'hF, rd, err);
    chk(err, "isolated debug subordinate answered with err");
    n_dbg_iso++;
    w32(SocCtrlBase + 32'h10, 32'd0);
    // 9. unmapped address
    cpu(0, 32'h2000_0000, 0, 4'hF, rd, err);
    chk(err, "unmapped address answered with err");
    n_unmapped++;
    repeat (4) @(negedge clk);
    read_counters(cnt);
    chk(cnt[0] > cnt_before[0], "fault counter: TCLS mismatch");
    chk(cnt[4] - cnt_before[4] == 1, "fault counter: bank 1 read correction");
    chk(cnt[3] - cnt_before[3] == 4, "fault counter: bank 0 scrubber corrections");
    chk(cnt[5] >= cnt_before[5] + 4, "fault counter: scrubber corrections");
    chk(cnt[7] > cnt_before[7], "fault counter: uncorrectable");
    chk(cnt[2] > cnt_before[2], "fault counter: interconnect state repair");
    chk(cnt[6] > cnt_before[6], "fault counter: peripheral repair");
    n_unc = int'(cnt[7] - cnt_before[7]);

    // return value
    w32(SocCtrlBase + 32'h08, {1'b1, 31'(sum == ref_sum ? 0 : 1)});
    @(negedge clk);
    chk(status == 32'h8000_0000, "return value register");
    fetch_run = 0;
    repeat (20) @(negedge clk);

    // UART output and mechanism coverage
    chk(uart_bytes.size() == Msg.len(), $sformatf("UART bytes %0d", uart_bytes.size()));
    for (int i = 0; i < uart_bytes.size() && i < Msg.len(); i++) chk(uart_bytes[i] == Msg[i], "UART string");
    $display("mechanisms: tcls=%0d tcls_irq=%0d ecc_read_fix=%0d scrub=%0d uncorrectable=%0d rmw=%0d",
             n_tcls, n_tcls_irq, n_ecc_read, n_scrub, n_unc, n_rmw);
    $display("            xbar_fix=%0d periph_fix=%0d contention=%0d dbg=%0d dbg_iso=%0d unmapped=%0d",
             n_xbar_fix, n_periph_fix, n_contention, n_dbg, n_dbg_iso, n_unmapped);
    $display("            link_fix=%0d timer_irq=%0d uart_bytes=%0d gpio_changes=%0d fetches=%0d",
             n_link_fix, n_timer_irq, n_uart_bytes, n_gpio_toggles, n_fetch);
    chk(n_tcls > 0, "mechanism: TCLS mismatch");
    chk(n_tcls_irq > 0, "mechanism: TCLS interrupt");
    chk(n_ecc_read > 0, "mechanism: ECC read correction");
    chk(n_scrub >= 4, "mechanism: scrubber correction");
    chk(n_unc > 0, "mechanism: uncorrectable detection");
    chk(n_rmw > 0, "mechanism: read-modify-write");
    chk(n_xbar_fix > 0, "mechanism: interconnect state repair");
    chk(n_periph_fix > 0, "mechanism: peripheral state repair");
    chk(n_contention > 0, "mechanism: instruction/data contention");
    chk(n_dbg > 0 && n_dbg_iso > 0, "mechanism: debug access and isolation");
    chk(n_unmapped > 0, "mechanism: unmapped address error");
    chk(n_link_fix > 0, "mechanism: relOBI codeword correction on the bus");
    chk(n_timer_irq > 0, "mechanism: timer interrupt");
    chk(n_gpio_toggles >= 8, "mechanism: GPIO toggling");
    chk(n_fetch > 0, "mechanism: instruction fetch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
