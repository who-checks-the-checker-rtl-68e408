// tb_util_pkg: reference models shared by the testbenches.
//
// ref_enc is an independent Hsiao SECDED reference encoder: for k data bits and r check
// bits it uses as data columns the odd-weight (3, 5, 7) r-bit values in increasing weight
// and then increasing value, the unit vectors for the check bits, and returns the systematic
// codeword {check, data}. ref_enc32 is the 32-bit / 7-check-bit case used on the buses and
// in the memories.
package tb_util_pkg;

  function automatic logic [71:0] ref_enc(input logic [63:0] d, input int k, input int r);
    logic [7:0] chk;
    int n;
    chk = '0;
    n   = 0;
    for (int w = 3; w <= 7; w += 2) begin
      for (int v = 0; v < (1 << r); v++) begin
        int pc;
        pc = 0;
        for (int b = 0; b < r; b++) pc += (v >> b) & 1;
        if (pc == w && n < k) begin
          if (d[n]) chk = chk ^ 8'(v);
          n++;
        end
      end
    end
    return (72'(chk) << k) | 72'(d & ((64'd1 << k) - 64'd1));
  endfunction

  function automatic logic [38:0] ref_enc32(input logic [31:0] d);
    return 39'(ref_enc(64'(d), 32, 7));
  endfunction

  function automatic logic [9:0] ref_enc_meta(input logic we, input logic [3:0] be);
    return 10'(ref_enc(64'({we, be}), 5, 5));
  endfunction

endpackage
