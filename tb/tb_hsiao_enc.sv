// tb_hsiao_enc: checks the Hsiao encoder against the independent reference encoder for the
// 32-bit and the 5-bit ({we, be}) widths, over walking-one patterns and random words.
module tb_hsiao_enc;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] d32;
  logic [38:0] c32;
  logic [4:0]  d5;
  logic [9:0]  c5;

  hsiao_enc #(.K(32)) dut32 (.data_i(d32), .cw_o(c32));
  hsiao_enc #(.K(5))  dut5  (.data_i(d5),  .cw_o(c5));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      d32 = 32'd1 << i; #1;
      chk(c32 == ref_enc32(d32), $sformatf("walking one %0d: %h vs %h", i, c32, ref_enc32(d32)));
    end
    for (int i = 0; i < 2000; i++) begin
      d32 = $urandom; #1;
      chk(c32 == ref_enc32(d32), $sformatf("random %h: %h vs %h", d32, c32, ref_enc32(d32)));
    end
    for (int i = 0; i < 32; i++) begin
      d5 = 5'(i); #1;
      chk(c5 == ref_enc_meta(d5[4], d5[3:0]), $sformatf("meta %h", d5));
    end
    d32 = 0; #1;
    chk(c32 == 39'd0, "zero word encodes to zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
