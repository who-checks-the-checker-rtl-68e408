// hsiao_dec: Hsiao SECDED decoder.
//
// Recomputes the check bits of the received data and XORs them with the received check bits
// to form the syndrome. A zero syndrome means no error. A syndrome equal to the column of a
// data bit flips that bit; a weight-1 syndrome is an error in a check bit (data already
// correct). Any other syndrome (even weight, or odd weight matching no column) is an
// uncorrectable multi-bit error. Besides the corrected data it outputs the corrected
// codeword, which the scrubber writes back. Purely combinational. Column choice as in
// hsiao_enc.
module hsiao_dec #(
  parameter int unsigned K = 32,
  parameter int unsigned R = relobi_pkg::hsiao_r(K)
) (
  input  logic [K+R-1:0] cw_i,
  output logic [K-1:0]   data_o,
  output logic [K+R-1:0] cw_o,        // corrected codeword
  output logic           single_o,    // single error found and corrected
  output logic           double_o     // uncorrectable error detected
);
  localparam logic [511:0] Cols = relobi_pkg::hsiao_cols(K, R);

  logic [R-1:0] syndrome;
  logic [K-1:0] flip;

  always_comb begin
    syndrome = cw_i[K+R-1:K];
    for (int unsigned j = 0; j < K; j++) begin
      logic [7:0] col;
      col = Cols[8*j +: 8];
      for (int unsigned i = 0; i < R; i++) begin
        if (col[i]) syndrome[i] = syndrome[i] ^ cw_i[j];
      end
    end
    flip = '0;
    for (int unsigned j = 0; j < K; j++) begin
      flip[j] = (syndrome == Cols[8*j +: R]);
    end
  end

  always_comb begin
    data_o   = cw_i[K-1:0] ^ flip;
    single_o = (|flip) || ($countones(syndrome) == 1);
    double_o = (syndrome != '0) && !single_o;
    // corrected codeword: recompute check bits on the corrected data
    cw_o     = cw_i;
    cw_o[K-1:0] = data_o;
    if ($countones(syndrome) == 1) cw_o[K+R-1:K] = cw_i[K+R-1:K] ^ syndrome;
  end
endmodule
