// relobi_encoder: manager-side relOBI adapter (OBI manager -> relOBI).
//
// Request path: the OBI req is copied onto the three handshake lanes, and address, {we, be}
// and write data are each Hsiao-encoded. Response path: the three gnt lanes and the three
// rvalid and err lanes are each reduced by majority vote, and the read-data codeword is
// decoded (single errors corrected). In the TCLS domain every core has its own instance, so
// the encoding happens before the lockstep vote and the decoding after it, as in the
// paper's overlapped arrangement; this adapter is also the protected isolation unit in front
// of the debug module's manager port, where isolate_i blocks its requests (an isolated
// manager sees no gnt). Purely combinational.
module relobi_encoder
  import relobi_pkg::*;
(
  input  logic     isolate_i,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output rel_req_t rel_req_o,
  input  rel_rsp_t rel_rsp_i,
  output logic     corr_o,      // corrected error on the response (ECC or lane mismatch)
  output logic     uncorr_o     // uncorrectable read-data error
);
  logic                 req;
  logic [DataWidth-1:0] rdata;
  logic [CwWidth-1:0]   rdata_cw_fix;
  logic                 single, double_err;

  assign req = obi_req_i.req && !isolate_i;

  hsiao_enc #(.K(AddrWidth)) i_enc_addr (.data_i(obi_req_i.addr), .cw_o(rel_req_o.addr_cw));
  hsiao_enc #(.K(MetaWidth)) i_enc_meta (.data_i({obi_req_i.we, obi_req_i.be}), .cw_o(rel_req_o.meta_cw));
  hsiao_enc #(.K(DataWidth)) i_enc_wdata(.data_i(obi_req_i.wdata), .cw_o(rel_req_o.wdata_cw));
  assign rel_req_o.req = {3{req}};

  hsiao_dec #(.K(DataWidth)) i_dec_rdata (
    .cw_i(rel_rsp_i.rdata_cw), .data_o(rdata), .cw_o(rdata_cw_fix),
    .single_o(single), .double_o(double_err)
  );

  always_comb begin
    obi_rsp_o.gnt    = maj3(rel_rsp_i.gnt[0], rel_rsp_i.gnt[1], rel_rsp_i.gnt[2]) && !isolate_i;
    obi_rsp_o.rvalid = maj3(rel_rsp_i.rvalid[0], rel_rsp_i.rvalid[1], rel_rsp_i.rvalid[2]);
    obi_rsp_o.err    = maj3(rel_rsp_i.err[0], rel_rsp_i.err[1], rel_rsp_i.err[2]);
    obi_rsp_o.rdata  = rdata;
  end

  logic lane_mismatch;
  assign lane_mismatch = (rel_rsp_i.gnt    != '0 && rel_rsp_i.gnt    != '1) ||
                         (rel_rsp_i.rvalid != '0 && rel_rsp_i.rvalid != '1) ||
                         (rel_rsp_i.err    != '0 && rel_rsp_i.err    != '1);
  assign corr_o   = lane_mismatch || (obi_rsp_o.rvalid && single);
  assign uncorr_o = obi_rsp_o.rvalid && double_err;

  logic unused;
  assign unused = ^rdata_cw_fix;
endmodule
