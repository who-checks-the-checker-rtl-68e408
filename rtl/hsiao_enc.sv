// hsiao_enc: Hsiao SECDED encoder.
//
// Appends R check bits to a K-bit data word. Check bit i is the XOR of the data bits whose
// parity-check column (relobi_pkg::hsiao_cols) has bit i set. The codeword is systematic:
// {check, data}, data in the low K bits. With the default K = 32 this is the 39-bit (7 check
// bits) code the paper uses for memory words and relOBI signals; the choice of columns
// (lowest-valued weight-3 columns first) is this design's own. Purely combinational.
module hsiao_enc #(
  parameter int unsigned K = 32,
  parameter int unsigned R = relobi_pkg::hsiao_r(K)
) (
  input  logic [K-1:0]   data_i,
  output logic [K+R-1:0] cw_o
);
  localparam logic [511:0] Cols = relobi_pkg::hsiao_cols(K, R);

  logic [R-1:0] check;

  always_comb begin
    check = '0;
    for (int unsigned j = 0; j < K; j++) begin
      logic [7:0] col;
      col = Cols[8*j +: 8];
      for (int unsigned i = 0; i < R; i++) begin
        if (col[i]) check[i] = check[i] ^ data_i[j];
      end
    end
  end

  assign cw_o = {check, data_i};
endmodule
