// tb_hsiao_dec: checks the Hsiao decoder. For random words encoded by the reference
// encoder: no flip decodes cleanly; every single-bit flip (all 39 positions) is corrected,
// flagged as single and the corrected codeword restored; random double-bit flips are
// flagged as uncorrectable.
module tb_hsiao_dec;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic [38:0] cw, fixed;
  logic [31:0] data;
  logic        single, dbl;

  hsiao_dec #(.K(32)) dut (.cw_i(cw), .data_o(data), .cw_o(fixed), .single_o(single), .double_o(dbl));

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
    for (int t = 0; t < 200; t++) begin
      logic [31:0] d;
      logic [38:0] good;
      d    = $urandom;
      good = ref_enc32(d);
      cw   = good; #1;
      chk(data == d && !single && !dbl && fixed == good, "clean word");
      for (int b = 0; b < 39; b++) begin
        cw = good ^ (39'd1 << b); #1;
        chk(data == d && single && !dbl && fixed == good, $sformatf("single flip bit %0d", b));
      end
      for (int j = 0; j < 10; j++) begin
        int b1, b2;
        b1 = $urandom_range(38);
        b2 = (b1 + 1 + $urandom_range(37)) % 39;
        cw = good ^ (39'd1 << b1) ^ (39'd1 << b2); #1;
        chk(dbl && !single, $sformatf("double flip %0d %0d", b1, b2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
