// tb_relobi_xbar: checks the relOBI interconnect with three concurrent managers (each an OBI
// master behind a relobi_encoder) and eight modelled subordinates that stall gnt at random
// and answer one cycle after the grant with read data = {subordinate index, address bits}.
// Every response must come back to the right manager with the right data; unmapped
// addresses must be answered with err. Also counted and required: cycles in which several
// managers contend for one subordinate, subordinate stalls, and a single upset in the
// interconnect's triplicated state, which must be repaired without a wrong response.
module tb_relobi_xbar;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  int contention = 0, stalls = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  obi_req_t oreq [3];
  obi_rsp_t orsp [3];
  rel_req_t mreq [3];
  rel_rsp_t mrsp [3];
  rel_req_t sreq [8];
  rel_rsp_t srsp [8];
  logic     xcorr, xunc;
  logic     mc [3], mu [3];

  for (genvar m = 0; m < 3; m++) begin : g_m
    relobi_encoder i_enc (.isolate_i(1'b0), .obi_req_i(oreq[m]), .obi_rsp_o(orsp[m]),
                          .rel_req_o(mreq[m]), .rel_rsp_i(mrsp[m]), .corr_o(mc[m]), .uncorr_o(mu[m]));
  end

  relobi_xbar dut (.clk_i(clk), .rst_ni(rst_n), .mgr_req_i(mreq), .mgr_rsp_o(mrsp),
                   .sub_req_o(sreq), .sub_rsp_i(srsp), .corr_o(xcorr), .uncorr_o(xunc));

  // subordinate models
  for (genvar s = 0; s < 8; s++) begin : g_s
    logic        g, rv;
    logic [38:0] rd;
    always_ff @(posedge clk) g <= ($urandom_range(3) != 0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rv <= 1'b0;
      else        rv <= sreq[s].req[0] && g;
      rd <= ref_enc32({4'(s), sreq[s].addr_cw[27:0]});
    end
    always_ff @(posedge clk) if (sreq[s].req[0] && !g) stalls++;
    assign srsp[s].gnt      = {3{g}};
    assign srsp[s].rvalid   = {3{rv}};
    assign srsp[s].err      = 3'b000;
    assign srsp[s].rdata_cw = rv ? rd : '0;
  end

  // contention monitor
  always_ff @(posedge clk) begin
    for (int s = 0; s < 8; s++) begin
      int n;
      n = 0;
      for (int m = 0; m < 3; m++)
        if (oreq[m].req && addr_decode(oreq[m].addr) == sub_idx_e'(s)) n++;
      if (n > 1) contention++;
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
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pick_addr(input int i);
    logic [31:0] bases [9];
    bases = '{DebugBase, SocCtrlBase, FaultMonBase, UartBase, GpioBase, TimerBase, Sram0Base,
              Sram1Base, 32'h2000_0000};
    return bases[i] | ($urandom & 32'h0000_0FFC);
  endfunction

  task automatic master(input int m, input int n);
    for (int t = 0; t < n; t++) begin
      int sidx;
      logic [31:0] a;
      sidx = $urandom_range(8);
      if (sidx < 8 && $urandom_range(1)) sidx = 6;   // make contention on bank 0 likely
      a = pick_addr(sidx);
      @(negedge clk);
      oreq[m].req = 1; oreq[m].addr = a; oreq[m].we = 0; oreq[m].be = 4'hF; oreq[m].wdata = 0;
      forever begin
        #4;
        if (orsp[m].gnt) break;
        @(negedge clk);
      end
      @(negedge clk);
      oreq[m].req = 0;
      forever begin
        #4;
        if (orsp[m].rvalid) break;
        @(negedge clk);
      end
      if (sidx == 8) chk(orsp[m].err, "unmapped address answered with err");
      else chk(!orsp[m].err && orsp[m].rdata == {4'(sidx), a[27:0]},
               $sformatf("mgr %0d sub %0d data %h", m, sidx, orsp[m].rdata));
    end
  endtask

  initial begin
    for (int m = 0; m < 3; m++) oreq[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      master(0, 300);
      master(1, 300);
      master(2, 300);
      begin
        // upset one copy of the interconnect state mid-run
        repeat (500) @(negedge clk);
        force dut.i_state.q[1] = ~dut.i_state.q[1];
        @(posedge clk);
        #1 release dut.i_state.q[1];
        #1 chk(xcorr, "state upset reported");
      end
    join
    chk(contention > 0, "contention happened");
    chk(stalls > 0, "subordinate stalls happened");
    $display("contention cycles %0d, stalls %0d", contention, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
