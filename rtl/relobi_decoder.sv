// relobi_decoder: subordinate-side relOBI adapter for a triplicated peripheral.
//
// The peripheral behind it runs in three lanes. Lane k takes req lane k and decodes its own
// copy of address, {we, be} and write data, and hands a plain OBI request to peripheral lane
// k. The adapter is always ready (gnt = 1 on all lanes). Each lane registers its peripheral
// lane's read data and error flag in a triplicated register with voters, answers with rvalid
// one cycle after the request, and encodes the registered read data; the three encoded
// responses are then voted bit-wise into the single relOBI read-data codeword. A fault in
// one lane, in its encoder or in the voter therefore either is outvoted or shows up as a
// correctable codeword error at the manager. A request whose address or attributes cannot
// be corrected is not passed on and is answered with err. The split into three decoder lanes
// follows the stacked decoders of the paper's block diagram; the one-cycle, always-ready
// response is this design's own.
module relobi_decoder
  import relobi_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  rel_req_t             rel_req_i,
  output rel_rsp_t             rel_rsp_o,
  output obi_req_t             lane_req_o   [3],
  input  logic [DataWidth-1:0] lane_rdata_i [3],
  input  logic                 lane_err_i   [3],
  output logic                 corr_o,      // corrected fault (ECC on request or TMR copy)
  output logic                 uncorr_o     // uncorrectable request codeword
);
  localparam int unsigned RspW = 2 + DataWidth;  // {rvalid, err, rdata}

  logic [RspW-1:0]    rsp_d [3];
  logic [RspW-1:0]    rsp_q [3];
  logic [CwWidth-1:0] cw    [3];
  logic [2:0]         lane_single, lane_double;
  logic               tmr_err;

  for (genvar k = 0; k < 3; k++) begin : g_lane
    logic [AddrWidth-1:0] addr;
    logic [MetaWidth-1:0] meta;
    logic [DataWidth-1:0] wdata;
    logic [CwWidth-1:0]   fa, fw;
    logic [MetaCw-1:0]    fm;
    logic sa, da, sm, dm, sw, dw, bad;

    hsiao_dec #(.K(AddrWidth)) i_dec_a (.cw_i(rel_req_i.addr_cw),  .data_o(addr),  .cw_o(fa), .single_o(sa), .double_o(da));
    hsiao_dec #(.K(MetaWidth)) i_dec_m (.cw_i(rel_req_i.meta_cw),  .data_o(meta),  .cw_o(fm), .single_o(sm), .double_o(dm));
    hsiao_dec #(.K(DataWidth)) i_dec_w (.cw_i(rel_req_i.wdata_cw), .data_o(wdata), .cw_o(fw), .single_o(sw), .double_o(dw));

    assign bad = da || dm || (meta[BeWidth] && dw);

    always_comb begin
      lane_req_o[k].req   = rel_req_i.req[k] && !bad;
      lane_req_o[k].addr  = addr;
      lane_req_o[k].we    = meta[BeWidth];
      lane_req_o[k].be    = meta[BeWidth-1:0];
      lane_req_o[k].wdata = wdata;
    end

    always_comb begin
      rsp_d[k] = {rel_req_i.req[k], (rel_req_i.req[k] && bad) || (lane_req_o[k].req && lane_err_i[k]),
                  lane_req_o[k].req ? lane_rdata_i[k] : '0};
    end

    assign lane_single[k] = rel_req_i.req[k] && (sa || sm || (meta[BeWidth] && sw));
    assign lane_double[k] = rel_req_i.req[k] && bad;

    hsiao_enc #(.K(DataWidth)) i_enc_r (.data_i(rsp_q[k][DataWidth-1:0]), .cw_o(cw[k]));

    assign rel_rsp_o.gnt[k]    = 1'b1;
    assign rel_rsp_o.rvalid[k] = rsp_q[k][RspW-1];
    assign rel_rsp_o.err[k]    = rsp_q[k][RspW-2];

    logic unused;
    assign unused = ^{fa, fm, fw};
  end

  tmr_reg #(.W(RspW)) i_rsp (.clk_i, .rst_ni, .d_i(rsp_d), .q_o(rsp_q), .err_o(tmr_err));

  // bit-wise vote of the three encoded responses
  assign rel_rsp_o.rdata_cw = (cw[0] & cw[1]) | (cw[0] & cw[2]) | (cw[1] & cw[2]);

  assign corr_o   = tmr_err || (|lane_single) || (rel_req_i.req != '0 && rel_req_i.req != '1);
  assign uncorr_o = |lane_double;
endmodule
