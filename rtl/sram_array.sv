// sram_array: single-port synchronous SRAM model written as an array (one word per cycle,
// read data registered, available the cycle after the read). It stands for one SRAM macro
// of an ECC bank and holds Width-bit words, by default 39-bit Hsiao codewords. Contents are
// not reset, as in a real macro.
module sram_array #(
  parameter int unsigned NumWords = 2048,
  parameter int unsigned Width    = 39,
  localparam int unsigned AW      = $clog2(NumWords)
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AW-1:0]    addr_i,
  input  logic [Width-1:0] wdata_i,
  output logic [Width-1:0] rdata_o
);
  logic [Width-1:0] mem [NumWords];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end
endmodule
