// tb_uart: checks the triplicated UART with DIV = 8: a written byte appears on tx as start
// bit, eight data bits LSB first and stop bit, each exactly 8 cycles long, with STATUS busy
// meanwhile; a byte sent serially into rx is received, flagged in STATUS and read from RX,
// which clears the flag; err on an unmapped offset; an upset of one copy during a
// transmission does not disturb the line.
module tb_uart;
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

  logic rx, tx;

  uart dut (.clk_i(clk), .rst_ni(rst_n), .rel_req_i(rreq), .rel_rsp_o(rrsp), .rx_i(rx), .tx_o(tx),
            .corr_o(corr), .uncorr_o(unc));

  logic [9:0] frame;
  int         t_start;
  int         cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

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

  task automatic capture(output logic [9:0] f);
    // wait for the falling edge of the start bit, then sample each bit at its middle
    while (tx) @(negedge clk);
    t_start = cyc;
    repeat (4) @(negedge clk);
    for (int i = 0; i < 10; i++) begin
      f[i] = tx;
      repeat (8) @(negedge clk);
    end
  endtask

  task automatic send(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (8) @(negedge clk);
    end
  endtask

  initial begin
    logic [31:0] r;
    logic err;
    oreq = '0; rx = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd_expect(32'h0300_200C, 32'd16, "DIV reset value");
    wr(32'h0300_200C, 32'd8);
    for (int t = 0; t < 6; t++) begin
      logic [7:0] b;
      b = 8'($urandom);
      fork
        wr(32'h0300_2000, {24'd0, b});
        capture(frame);
      join
      chk(frame == {1'b1, b, 1'b0}, $sformatf("tx frame %b for %h", frame, b));
      rd_expect(32'h0300_2008, 32'd0, "idle after the frame");
      send(8'(b + 8'd3));
      repeat (4) @(negedge clk);
      rd_expect(32'h0300_2008, 32'd2, "rx valid");
      rd_expect(32'h0300_2004, {24'd0, 8'(b + 8'd3)}, "rx data");
      rd_expect(32'h0300_2008, 32'd0, "rx valid cleared by the read");
    end
    // busy flag and an upset during a transmission
    fork
      begin
        wr(32'h0300_2000, 32'h0000_00C3);
        rd_expect(32'h0300_2008, 32'd1, "busy while sending");
        repeat (20) @(negedge clk);
        force dut.i_regs.q[0] = ~dut.i_regs.q[0];
        @(negedge clk);
        release dut.i_regs.q[0];
      end
      capture(frame);
    join
    chk(frame == {1'b1, 8'hC3, 1'b0}, "frame intact despite upset");
    access(0, 32'h0300_2010, 0, r, err);
    chk(err, "unmapped offset answered with err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
