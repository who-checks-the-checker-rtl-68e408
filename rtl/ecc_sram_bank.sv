// ecc_sram_bank: one ECC-protected SRAM bank with a relOBI subordinate port.
//
// Overlap with relOBI: the bank stores the 39-bit Hsiao codeword of the relOBI write data
// exactly as it arrives, and returns the stored codeword unchanged as relOBI read data. No
// encoder or decoder sits between bus and memory for full-word accesses; any single-bit
// error in the memory or on the bus is corrected by the decoder at the manager.
//
// Byte writes (be != 4'hF) are read-modify-write: in the grant cycle the old word is read;
// in the next cycle the response is given immediately while the old word is decoded,
// merged with the new bytes, re-encoded and written, and the next request is held off for
// that one cycle. Every external read is also checked: a correctable word is written back
// corrected in the cycle after the read (again holding off one request), as the paper's
// scrubber "directly corrects any erroneous reads it monitors". The ecc_scrubber walks the
// whole bank in the background, deferring to external accesses.
//
// Handshake and control run in three lanes, like the rest of the protected design: lane k
// decodes its own copy of the address and attribute codewords, watches only req lane k,
// drives gnt/rvalid/err lane k and computes its next state from its own copy of the
// triplicated state register. The three lanes' memory-port commands (request, write enable,
// address, write-data source) are voted before the single SRAM port; the data path (array,
// read decoder, merge, write data) is single and protected by the code itself. gnt is given
// unless the port is needed for a write-back; rvalid follows one cycle after the grant.
// Requests with an uncorrectable address or attribute codeword, or an uncorrectable
// write-data codeword for a byte write, are answered with err and do nothing. Port priority
// per cycle: RMW write, read-correction write, scrubber write-back, external access,
// scrubber read. The lane structure is this design's reading of the paper's rule that the
// control FSMs are triplicated.
module ecc_sram_bank
  import relobi_pkg::*;
#(
  parameter int unsigned NumWords = 2048,
  localparam int unsigned AW      = $clog2(NumWords)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  rel_req_t    rel_req_i,
  output rel_rsp_t    rel_rsp_o,
  input  logic        scrub_en_i,
  input  logic [15:0] scrub_period_i,
  output logic        corr_o,         // corrected error (read monitor, scrubber, request)
  output logic        uncorr_o,       // uncorrectable error detected
  output logic        scrub_corr_o    // scrubber corrected a word
);
  typedef enum logic [1:0] {OpNone = 2'd0, OpRead = 2'd1, OpWrite = 2'd2, OpRmw = 2'd3} op_e;

  typedef struct packed {
    op_e                  op;
    logic                 err;
    logic [AW-1:0]        addr;
    logic [BeWidth-1:0]   be;
    logic [DataWidth-1:0] wdata;
  } st_t;

  localparam int unsigned SW = $bits(st_t);

  // write-data payload: decoded once (datapath, protected by its ECC)
  logic [DataWidth-1:0] wdata;
  logic [CwWidth-1:0]   fw;
  logic                 sw, dw;
  hsiao_dec #(.K(DataWidth)) i_dec_w (.cw_i(rel_req_i.wdata_cw), .data_o(wdata), .cw_o(fw), .single_o(sw), .double_o(dw));

  // state
  logic [SW-1:0] st_d [3];
  logic [SW-1:0] st_q [3];
  logic          st_err;
  st_t           s;
  assign s = st_t'(st_q[0]);   // voted copy for the datapath

  // memory read data check
  logic [CwWidth-1:0]   sram_rdata, rd_fixed, merged_cw;
  logic [DataWidth-1:0] rd_data, merged;
  logic                 rd_single, rd_double;

  hsiao_dec #(.K(DataWidth)) i_dec_r (.cw_i(sram_rdata), .data_o(rd_data), .cw_o(rd_fixed),
                                      .single_o(rd_single), .double_o(rd_double));

  always_comb begin
    for (int b = 0; b < BeWidth; b++) begin
      merged[8*b +: 8] = s.be[b] ? s.wdata[8*b +: 8] : rd_data[8*b +: 8];
    end
  end
  hsiao_enc #(.K(DataWidth)) i_enc_m (.data_i(merged), .cw_o(merged_cw));

  // scrubber
  logic               sc_req, sc_we, sc_corr, sc_unc, sc_tmr;
  logic [AW-1:0]      sc_addr;
  logic [CwWidth-1:0] sc_wdata;
  logic               ext_busy;

  ecc_scrubber #(.NumWords(NumWords)) i_scrub (
    .clk_i, .rst_ni, .en_i(scrub_en_i), .period_i(scrub_period_i), .ext_busy_i(ext_busy),
    .req_o(sc_req), .we_o(sc_we), .addr_o(sc_addr), .wdata_o(sc_wdata), .rdata_i(sram_rdata),
    .corr_o(sc_corr), .uncorr_o(sc_unc), .tmr_err_o(sc_tmr)
  );

  // ---------------------------------------------------------------- three control lanes
  typedef enum logic [1:0] {SrcBus = 2'd0, SrcMerged = 2'd1, SrcFixed = 2'd2, SrcScrub = 2'd3} src_e;

  logic          l_rmw [3], l_fix [3], l_gnt [3], l_busy [3], l_mreq [3], l_mwe [3];
  logic          l_single [3], l_bad [3], l_hs [3];
  logic [AW-1:0] l_maddr [3];
  logic [1:0]    l_src [3];

  for (genvar k = 0; k < 3; k++) begin : g_lane
    logic [AddrWidth-1:0] addr;
    logic [MetaWidth-1:0] meta;
    logic [CwWidth-1:0]   fa;
    logic [MetaCw-1:0]    fm;
    logic                 sa, da, sm, dm, we, bad, hs;
    logic [BeWidth-1:0]   be;
    st_t                  sk, n;

    hsiao_dec #(.K(AddrWidth)) i_dec_a (.cw_i(rel_req_i.addr_cw), .data_o(addr), .cw_o(fa), .single_o(sa), .double_o(da));
    hsiao_dec #(.K(MetaWidth)) i_dec_m (.cw_i(rel_req_i.meta_cw), .data_o(meta), .cw_o(fm), .single_o(sm), .double_o(dm));

    assign sk  = st_t'(st_q[k]);
    assign we  = meta[BeWidth];
    assign be  = meta[BeWidth-1:0];
    assign bad = da || dm || (we && (be != '1) && dw);

    assign l_rmw[k]  = (sk.op == OpRmw);
    assign l_fix[k]  = (sk.op == OpRead) && rd_single;
    assign l_gnt[k]  = !(l_rmw[k] || l_fix[k] || sc_we);
    assign hs        = rel_req_i.req[k] && l_gnt[k];
    assign l_busy[k] = hs || l_rmw[k] || l_fix[k];
    assign l_hs[k]   = hs;
    assign l_bad[k]  = bad;
    assign l_single[k] = sa || sm || (we && sw);

    always_comb begin
      l_mreq[k]  = 1'b0;
      l_mwe[k]   = 1'b0;
      l_maddr[k] = addr[AW+1:2];
      l_src[k]   = SrcBus;
      n          = sk;
      n.op       = OpNone;
      n.err      = 1'b0;
      if (l_rmw[k]) begin
        l_mreq[k] = 1'b1; l_mwe[k] = 1'b1; l_maddr[k] = sk.addr; l_src[k] = SrcMerged;
      end else if (l_fix[k]) begin
        l_mreq[k] = 1'b1; l_mwe[k] = 1'b1; l_maddr[k] = sk.addr; l_src[k] = SrcFixed;
      end else if (sc_we) begin
        l_mreq[k] = 1'b1; l_mwe[k] = 1'b1; l_maddr[k] = sc_addr; l_src[k] = SrcScrub;
      end else if (hs) begin
        n.addr  = addr[AW+1:2];
        n.be    = be;
        n.wdata = wdata;
        if (bad) begin
          n.op  = OpWrite;   // answered with err, memory untouched
          n.err = 1'b1;
        end else if (we && be == '1) begin
          l_mreq[k] = 1'b1; l_mwe[k] = 1'b1;   // store the bus codeword as is
          n.op      = OpWrite;
        end else if (we) begin
          l_mreq[k] = 1'b1;                    // read old word for the merge
          n.op      = OpRmw;
        end else begin
          l_mreq[k] = 1'b1;
          n.op      = OpRead;
        end
      end else if (sc_req) begin
        l_mreq[k] = 1'b1; l_maddr[k] = sc_addr;
      end
      st_d[k] = SW'(n);
    end

    assign rel_rsp_o.gnt[k]    = l_gnt[k];
    assign rel_rsp_o.rvalid[k] = (sk.op != OpNone);
    assign rel_rsp_o.err[k]    = sk.err || (l_rmw[k] && rd_double);

    logic unused;
    assign unused = ^{fa, fm, addr[AddrWidth-1:AW+2], addr[1:0]};
  end

  tmr_reg #(.W(SW)) i_state (.clk_i, .rst_ni, .d_i(st_d), .q_o(st_q), .err_o(st_err));

  // vote of the lanes' memory port commands: the single SRAM port and the scrubber see one
  logic               m_req, m_we, rmw_wr, fix_wr;
  logic [AW-1:0]      m_addr;
  logic [1:0]         m_src;
  logic [CwWidth-1:0] m_wdata;

  assign m_req    = maj3(l_mreq[0], l_mreq[1], l_mreq[2]);
  assign m_we     = maj3(l_mwe[0], l_mwe[1], l_mwe[2]);
  assign m_addr   = (l_maddr[0] & l_maddr[1]) | (l_maddr[0] & l_maddr[2]) | (l_maddr[1] & l_maddr[2]);
  assign m_src    = (l_src[0] & l_src[1]) | (l_src[0] & l_src[2]) | (l_src[1] & l_src[2]);
  assign ext_busy = maj3(l_busy[0], l_busy[1], l_busy[2]);
  assign rmw_wr   = maj3(l_rmw[0], l_rmw[1], l_rmw[2]);
  assign fix_wr   = maj3(l_fix[0], l_fix[1], l_fix[2]);

  always_comb begin
    unique case (src_e'(m_src))
      SrcMerged: m_wdata = merged_cw;
      SrcFixed:  m_wdata = rd_fixed;
      SrcScrub:  m_wdata = sc_wdata;
      default:   m_wdata = rel_req_i.wdata_cw;
    endcase
  end

  sram_array #(.NumWords(NumWords), .Width(CwWidth)) i_sram (
    .clk_i, .req_i(m_req), .we_i(m_we), .addr_i(m_addr), .wdata_i(m_wdata), .rdata_o(sram_rdata)
  );

  assign rel_rsp_o.rdata_cw = (s.op == OpRead) ? sram_rdata : '0;

  logic hs_v, bad_v, single_v, lane_diff;
  assign hs_v      = maj3(l_hs[0], l_hs[1], l_hs[2]);
  assign bad_v     = maj3(l_bad[0], l_bad[1], l_bad[2]);
  assign single_v  = maj3(l_single[0], l_single[1], l_single[2]);
  assign lane_diff = (rel_req_i.req != '0) && (rel_req_i.req != '1);

  assign corr_o       = fix_wr || rmw_wr && rd_single || sc_corr || st_err || sc_tmr || lane_diff ||
                        (hs_v && single_v);
  assign uncorr_o     = ((s.op == OpRead || rmw_wr) && rd_double) || sc_unc || (hs_v && bad_v);
  assign scrub_corr_o = sc_corr;

  logic unused;
  assign unused = ^{fw, s.addr, s.err};
endmodule
