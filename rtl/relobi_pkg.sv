// relobi_pkg: shared types, constants and helper functions of the reliable croc SoC.
//
// It holds the plain OBI request/response types used by the cores and the debug module,
// the relOBI (reliable OBI) types used on the protected interconnect, the Hsiao SECDED
// parity-check matrix generator shared by every encoder and decoder, and the address map.
//
// relOBI, as used here: the handshake signals (req, gnt, rvalid) and the error flag are
// carried in three copies ("lanes"); address, write data and the write attributes (we, be)
// and the read data are each carried as one Hsiao codeword. A 32-bit word becomes a 39-bit
// codeword (7 check bits), the same encoding the SRAM banks store, so a word travels from a
// core to a memory cell and back without being re-encoded. The split of fields into
// codewords, the absence of transaction IDs and of rready, and the address map are this
// design's own choices.
package relobi_pkg;

  localparam int unsigned AddrWidth = 32;
  localparam int unsigned DataWidth = 32;
  localparam int unsigned BeWidth   = DataWidth / 8;

  // Smallest number of check bits r for a Hsiao code over k data bits: the data columns are
  // distinct odd-weight columns of weight >= 3.
  function automatic int unsigned hsiao_r(input int unsigned k);
    for (int unsigned r = 3; r <= 8; r++) begin
      int unsigned avail = 0;
      for (int unsigned v = 0; v < (1 << r); v++) begin
        if (($countones(v) % 2 == 1) && ($countones(v) >= 3)) avail++;
      end
      if (avail >= k) return r;
    end
    return 8;
  endfunction

  localparam int unsigned EccWidth  = hsiao_r(DataWidth);     // 7
  localparam int unsigned CwWidth   = DataWidth + EccWidth;   // 39
  localparam int unsigned MetaWidth = 1 + BeWidth;            // {we, be}
  localparam int unsigned MetaEcc   = hsiao_r(MetaWidth);     // 5
  localparam int unsigned MetaCw    = MetaWidth + MetaEcc;    // 10

  // Data part of the parity-check matrix for k (<= 64) data bits and r check bits, column j
  // in bits [8j +: 8]. Columns are taken in order of increasing odd weight (3, 5, 7), and
  // within one weight in increasing numeric value. Every column is distinct and of odd
  // weight, which is what makes the code single-error-correcting and double-error-detecting
  // (Hsiao, 1970). The check-bit columns are the r unit vectors. Evaluated once per module as
  // a constant.
  function automatic logic [511:0] hsiao_cols(input int unsigned k, input int unsigned r);
    logic [511:0] cols;
    int unsigned n;
    cols = '0;
    n = 0;
    for (int unsigned w = 3; w <= 7; w += 2) begin
      for (int unsigned v = 0; v < (1 << r); v++) begin
        if ($countones(v) == w && n < k) begin
          cols[8*n +: 8] = 8'(v);
          n++;
        end
      end
    end
    return cols;
  endfunction

  // ---------------------------------------------------------------- plain OBI
  typedef struct packed {
    logic                 req;
    logic [AddrWidth-1:0] addr;
    logic                 we;
    logic [BeWidth-1:0]   be;
    logic [DataWidth-1:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic                 gnt;
    logic                 rvalid;
    logic [DataWidth-1:0] rdata;
    logic                 err;
  } obi_rsp_t;

  // ---------------------------------------------------------------- relOBI
  typedef struct packed {
    logic [2:0]         req;       // triplicated handshake
    logic [CwWidth-1:0] addr_cw;   // Hsiao codeword of addr
    logic [MetaCw-1:0]  meta_cw;   // Hsiao codeword of {we, be}
    logic [CwWidth-1:0] wdata_cw;  // Hsiao codeword of wdata
  } rel_req_t;

  typedef struct packed {
    logic [2:0]         gnt;       // triplicated handshake
    logic [2:0]         rvalid;    // triplicated handshake
    logic [2:0]         err;       // triplicated error flag
    logic [CwWidth-1:0] rdata_cw;  // Hsiao codeword of rdata
  } rel_rsp_t;

  // ---------------------------------------------------------------- core interface
  // Bus-side signals of one RISC-V core (instruction fetch and data ports).
  typedef struct packed {
    obi_req_t instr;
    obi_req_t data;
    logic     busy;
  } core_out_t;

  typedef struct packed {
    obi_rsp_t             instr;
    obi_rsp_t             data;
    logic                 irq_timer;
    logic                 irq_tcls;    // TCLS mismatch: start the resynchronisation routine
    logic                 debug_req;   // halt request from the debug module (isolatable)
    logic                 fetch_en;
    logic [AddrWidth-1:0] boot_addr;
  } core_in_t;

  // ---------------------------------------------------------------- address map
  localparam int unsigned XbarNumMgr = 3;  // core instr, core data, debug
  localparam int unsigned XbarNumSub = 8;

  typedef enum logic [3:0] {
    SubDebug    = 4'd0,
    SubSocCtrl  = 4'd1,
    SubFaultMon = 4'd2,
    SubUart     = 4'd3,
    SubGpio     = 4'd4,
    SubTimer    = 4'd5,
    SubSram0    = 4'd6,
    SubSram1    = 4'd7,
    SubNone     = 4'd8   // unmapped: answered with err by the interconnect
  } sub_idx_e;

  localparam logic [AddrWidth-1:0] DebugBase    = 32'h0000_0000;
  localparam logic [AddrWidth-1:0] SocCtrlBase  = 32'h0300_0000;
  localparam logic [AddrWidth-1:0] FaultMonBase = 32'h0300_1000;
  localparam logic [AddrWidth-1:0] UartBase     = 32'h0300_2000;
  localparam logic [AddrWidth-1:0] GpioBase     = 32'h0300_5000;
  localparam logic [AddrWidth-1:0] TimerBase    = 32'h0300_A000;
  localparam logic [AddrWidth-1:0] Sram0Base    = 32'h1000_0000;
  localparam logic [AddrWidth-1:0] Sram1Base    = 32'h1000_2000;

  function automatic sub_idx_e addr_decode(input logic [AddrWidth-1:0] a);
    logic unused_offset;
    unused_offset = ^a[11:0];
    if (a[31:18] == DebugBase[31:18])         return SubDebug;     // 256 KiB
    if (a[31:12] == SocCtrlBase[31:12])       return SubSocCtrl;   // 4 KiB each
    if (a[31:12] == FaultMonBase[31:12])      return SubFaultMon;
    if (a[31:12] == UartBase[31:12])          return SubUart;
    if (a[31:12] == GpioBase[31:12])          return SubGpio;
    if (a[31:12] == TimerBase[31:12])         return SubTimer;
    if (a[31:13] == Sram0Base[31:13])         return SubSram0;     // 8 KiB each
    if (a[31:13] == Sram1Base[31:13])         return SubSram1;
    return SubNone;
  endfunction

  function automatic logic maj3(input logic a, input logic b, input logic c);
    return (a & b) | (a & c) | (b & c);
  endfunction

endpackage
