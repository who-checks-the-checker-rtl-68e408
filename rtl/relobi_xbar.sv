// relobi_xbar: relOBI interconnect with triplicated control.
//
// Connects NumMgr relOBI managers (core instruction port, core data port, debug module) to
// NumSub relOBI subordinates by the address map of relobi_pkg. The whole control path runs
// in three independent lanes: lane k decodes its own copy of every manager's address
// codeword, uses only handshake lane k, and computes grants and responses from its own copy
// of the interconnect state. The state (per manager: outstanding transaction, pending error
// response; per subordinate: busy, owner, round-robin pointer) lives in a triplicated
// register with voters, so an upset in one copy is outvoted and repaired on the next cycle.
// The payload (address, attribute, write- and read-data codewords) is not triplicated: it
// passes through multiplexers in encoded form, and errors on it are corrected by the
// decoders at the far end.
//
// Protocol choices of this design (the paper does not specify them): each manager and each
// subordinate has at most one transaction outstanding, so responses need no IDs; a manager
// can issue its next request the cycle after its response. Arbitration per subordinate is
// round-robin. Requests to unmapped addresses, or whose address codeword is uncorrectable,
// are granted at once and answered the next cycle with err. Grant is combinational from
// req; rvalid is forwarded combinationally from the subordinate.
module relobi_xbar
  import relobi_pkg::*;
#(
  parameter int unsigned NumMgr = relobi_pkg::XbarNumMgr,
  parameter int unsigned NumSub = relobi_pkg::XbarNumSub
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  rel_req_t mgr_req_i [NumMgr],
  output rel_rsp_t mgr_rsp_o [NumMgr],
  output rel_req_t sub_req_o [NumSub],
  input  rel_rsp_t sub_rsp_i [NumSub],
  output logic     corr_o,
  output logic     uncorr_o
);
  localparam int unsigned MW = (NumMgr > 1) ? $clog2(NumMgr) : 1;

  typedef struct packed {
    logic [NumMgr-1:0]         mgr_out;
    logic [NumMgr-1:0]         err_pend;
    logic [NumSub-1:0]         sub_busy;
    logic [NumSub-1:0][MW-1:0] owner;
    logic [NumSub-1:0][MW-1:0] rr;
  } state_t;

  localparam int unsigned SW = $bits(state_t);

  logic [SW-1:0] st_d [3];
  logic [SW-1:0] st_q [3];
  logic          tmr_err;

  logic [NumSub-1:0][MW-1:0] chosen [3];
  logic [2:0] lane_single, lane_double;

  for (genvar l = 0; l < 3; l++) begin : g_lane
    logic [NumMgr-1:0][3:0] tgt;
    logic [NumMgr-1:0]      m_single, m_double;
    state_t                 st, nx;
    logic [NumSub-1:0]      sreq, hs, rv;
    logic [NumMgr-1:0]      errhs;

    for (genvar m = 0; m < NumMgr; m++) begin : g_dec
      logic [AddrWidth-1:0] a;
      logic [CwWidth-1:0]   fix;
      hsiao_dec #(.K(AddrWidth)) i_dec (.cw_i(mgr_req_i[m].addr_cw), .data_o(a), .cw_o(fix),
                                        .single_o(m_single[m]), .double_o(m_double[m]));
      assign tgt[m] = m_double[m] ? SubNone : addr_decode(a);
      logic unused;
      assign unused = ^fix;
    end

    assign lane_single[l] = |(m_single & mgr_req_i_lane(2'(l)));
    assign lane_double[l] = |(m_double & mgr_req_i_lane(2'(l)));

    // arbitration (independent of the subordinates' gnt)
    assign st = state_t'(st_q[l]);
    always_comb begin
      for (int s = 0; s < NumSub; s++) begin
        logic found;
        found = 1'b0;
        chosen[l][s] = st.rr[s];
        for (int i = 0; i < NumMgr; i++) begin
          int m;
          m = (int'(st.rr[s]) + i) % NumMgr;
          if (!found && mgr_req_i[m].req[l] && tgt[m] == 4'(s) && !st.mgr_out[m]) begin
            found = 1'b1;
            chosen[l][s] = MW'(m);
          end
        end
        sreq[s] = found && !st.sub_busy[s];
      end
    end

    always_comb begin
      nx = st;
      for (int s = 0; s < NumSub; s++) begin
        hs[s] = sreq[s] && sub_rsp_i[s].gnt[l];
        rv[s] = st.sub_busy[s] && sub_rsp_i[s].rvalid[l];
      end
      for (int m = 0; m < NumMgr; m++) begin
        errhs[m] = mgr_req_i[m].req[l] && (tgt[m] == SubNone) && !st.mgr_out[m];
      end
      // responses
      for (int s = 0; s < NumSub; s++) begin
        if (rv[s]) begin
          nx.sub_busy[s] = 1'b0;
          nx.mgr_out[st.owner[s]] = 1'b0;
        end
      end
      for (int m = 0; m < NumMgr; m++) begin
        if (st.err_pend[m]) begin
          nx.err_pend[m] = 1'b0;
          nx.mgr_out[m]  = 1'b0;
        end
      end
      // new transactions
      for (int s = 0; s < NumSub; s++) begin
        if (hs[s]) begin
          nx.sub_busy[s]           = 1'b1;
          nx.owner[s]              = chosen[l][s];
          nx.mgr_out[chosen[l][s]] = 1'b1;
          nx.rr[s]                 = (int'(chosen[l][s]) == NumMgr - 1) ? '0 : chosen[l][s] + 1'b1;
        end
      end
      for (int m = 0; m < NumMgr; m++) begin
        if (errhs[m]) begin
          nx.err_pend[m] = 1'b1;
          nx.mgr_out[m]  = 1'b1;
        end
      end
      st_d[l] = SW'(nx);
    end

    // handshake lane l towards subordinates and managers
    for (genvar s = 0; s < NumSub; s++) begin : g_sreq
      assign sub_req_o[s].req[l] = sreq[s];
    end
    always_comb begin
      for (int m = 0; m < NumMgr; m++) begin
        mgr_rsp_o[m].gnt[l]    = errhs[m];
        mgr_rsp_o[m].rvalid[l] = st.err_pend[m];
        mgr_rsp_o[m].err[l]    = st.err_pend[m];
        for (int s = 0; s < NumSub; s++) begin
          if (hs[s] && chosen[l][s] == MW'(m)) mgr_rsp_o[m].gnt[l] = 1'b1;
          if (rv[s] && st.owner[s] == MW'(m)) begin
            mgr_rsp_o[m].rvalid[l] = 1'b1;
            mgr_rsp_o[m].err[l]    = sub_rsp_i[s].err[l];
          end
        end
      end
    end
  end

  function automatic logic [NumMgr-1:0] mgr_req_i_lane(input logic [1:0] l);
    logic [NumMgr-1:0] r;
    for (int m = 0; m < NumMgr; m++) r[m] = mgr_req_i[m].req[l];
    return r;
  endfunction

  tmr_reg #(.W(SW)) i_state (.clk_i, .rst_ni, .d_i(st_d), .q_o(st_q), .err_o(tmr_err));

  // encoded payload multiplexers, steered by the voted lane choices
  state_t st0;
  assign st0 = state_t'(st_q[0]);
  logic unused_st0;
  assign unused_st0 = ^{st0.mgr_out, st0.err_pend, st0.rr};   // only busy/owner steer the read data

  always_comb begin
    for (int s = 0; s < NumSub; s++) begin
      logic [MW-1:0] sel;
      sel = (chosen[0][s] & chosen[1][s]) | (chosen[0][s] & chosen[2][s]) | (chosen[1][s] & chosen[2][s]);
      sub_req_o[s].addr_cw  = mgr_req_i[sel].addr_cw;
      sub_req_o[s].meta_cw  = mgr_req_i[sel].meta_cw;
      sub_req_o[s].wdata_cw = mgr_req_i[sel].wdata_cw;
    end
    for (int m = 0; m < NumMgr; m++) begin
      mgr_rsp_o[m].rdata_cw = '0;   // codeword of 0, used for error responses
      for (int s = 0; s < NumSub; s++) begin
        if (st0.sub_busy[s] && st0.owner[s] == MW'(m)) mgr_rsp_o[m].rdata_cw = sub_rsp_i[s].rdata_cw;
      end
    end
  end

  assign corr_o   = tmr_err || (|lane_single);
  assign uncorr_o = |lane_double;
endmodule
