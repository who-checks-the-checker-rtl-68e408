// relobi_decoder_single: single-lane relOBI subordinate adapter, used as the protected
// isolation unit in front of the (unprotected) debug module's subordinate port.
//
// The three req lanes are voted into one OBI req, address, {we, be} and write data are
// decoded and corrected, and the debug module's gnt, rvalid and err are copied onto the
// three lanes while its read data is Hsiao-encoded. While isolate_i is high, requests are
// not passed to the debug module: the adapter grants them itself and answers the next cycle
// with err, from a triplicated pending flag, so a misbehaving debug module cannot stall or
// corrupt the bus. The isolation behaviour is this design's own reading of the paper's
// "isolated with dedicated units that are protected". Uncorrectable request codewords are
// likewise answered with err.
module relobi_decoder_single
  import relobi_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     isolate_i,
  input  rel_req_t rel_req_i,
  output rel_rsp_t rel_rsp_o,
  output obi_req_t obi_req_o,
  input  obi_rsp_t obi_rsp_i,
  output logic     corr_o,
  output logic     uncorr_o
);
  logic [AddrWidth-1:0] addr;
  logic [MetaWidth-1:0] meta;
  logic [DataWidth-1:0] wdata;
  logic [CwWidth-1:0]   fa, fw, rcw;
  logic [MetaCw-1:0]    fm;
  logic sa, da, sm, dm, sw, dw, bad, req, local_req;
  logic pend_d [3];
  logic pend_q [3];
  logic tmr_err;

  hsiao_dec #(.K(AddrWidth)) i_dec_a (.cw_i(rel_req_i.addr_cw),  .data_o(addr),  .cw_o(fa), .single_o(sa), .double_o(da));
  hsiao_dec #(.K(MetaWidth)) i_dec_m (.cw_i(rel_req_i.meta_cw),  .data_o(meta),  .cw_o(fm), .single_o(sm), .double_o(dm));
  hsiao_dec #(.K(DataWidth)) i_dec_w (.cw_i(rel_req_i.wdata_cw), .data_o(wdata), .cw_o(fw), .single_o(sw), .double_o(dw));
  hsiao_enc #(.K(DataWidth)) i_enc_r (.data_i(obi_rsp_i.rdata), .cw_o(rcw));

  assign req       = maj3(rel_req_i.req[0], rel_req_i.req[1], rel_req_i.req[2]);
  assign bad       = da || dm || (meta[BeWidth] && dw);
  assign local_req = req && (isolate_i || bad);   // answered here with err

  always_comb begin
    obi_req_o.req   = req && !local_req;
    obi_req_o.addr  = addr;
    obi_req_o.we    = meta[BeWidth];
    obi_req_o.be    = meta[BeWidth-1:0];
    obi_req_o.wdata = wdata;
    for (int k = 0; k < 3; k++) pend_d[k] = local_req;
  end

  tmr_reg #(.W(1)) i_pend (.clk_i, .rst_ni, .d_i(pend_d), .q_o(pend_q), .err_o(tmr_err));

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      rel_rsp_o.gnt[k]    = local_req ? 1'b1 : obi_rsp_i.gnt;
      rel_rsp_o.rvalid[k] = pend_q[k] || obi_rsp_i.rvalid;
      rel_rsp_o.err[k]    = pend_q[k] || obi_rsp_i.err;
    end
    rel_rsp_o.rdata_cw = pend_q[0] ? '0 : rcw;   // all-zero is the codeword of 0
  end

  assign corr_o   = tmr_err || (req && (sa || sm || (meta[BeWidth] && sw))) ||
                    (rel_req_i.req != '0 && rel_req_i.req != '1);
  assign uncorr_o = req && bad;

  logic unused;
  assign unused = ^{fa, fm, fw};
endmodule
