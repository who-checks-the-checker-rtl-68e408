// tcls_unit: static triple-core lockstep (TCLS) wrapper with overlapped relOBI encoding.
//
// The three cores themselves sit outside this module (their bus signals are its ports). All
// three receive identical inputs. Each core's instruction and data OBI ports go through a
// relOBI encoder belonging to that core, so encoders and response decoders are triplicated
// together with the cores. The voter then works on the encoded signals: lane k of the
// outgoing req is the majority of the three cores' lane k, and the address, attribute and
// write-data codewords are voted bit-wise. A fault inside the voter therefore reaches the
// interconnect as a single lane or codeword error that relOBI corrects, while a fault in one
// core's encoder shows up as a lockstep mismatch. The voted core_busy output goes to a pin.
//
// Any disagreement between the cores' encoded outputs sets a triplicated sticky mismatch
// flag, which drives the cores' TCLS interrupt so that software can run its
// resynchronisation routine; software clears it through clear_i (a write to the control
// registers). This follows the paper's description; the sticky-flag/clear handshake is this
// design's own. Timing: voting is combinational, the flag is set one cycle after a mismatch.
module tcls_unit
  import relobi_pkg::*;
#(
  parameter int unsigned NumCores = 3
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  core_out_t            core_out_i [NumCores],
  output core_in_t             core_in_o  [NumCores],
  output rel_req_t             instr_req_o,
  input  rel_rsp_t             instr_rsp_i,
  output rel_req_t             data_req_o,
  input  rel_rsp_t             data_rsp_i,
  input  logic                 irq_timer_i,
  input  logic                 fetch_en_i,
  input  logic                 debug_req_i,
  input  logic [AddrWidth-1:0] boot_addr_i,
  input  logic                 clear_i,
  output logic                 busy_o,
  output logic                 mismatch_o,      // mismatch seen this cycle
  output logic                 flag_o,          // sticky mismatch flag (interrupt)
  output logic                 corr_o,          // corrected error in a core's response decoder
  output logic                 uncorr_o
);
  rel_req_t instr_enc [NumCores];
  rel_req_t data_enc  [NumCores];
  obi_rsp_t instr_rsp [NumCores];
  obi_rsp_t data_rsp  [NumCores];
  logic [NumCores-1:0] c_corr_i, c_unc_i, c_corr_d, c_unc_d;
  logic flag_d [3];
  logic flag_q [3];
  logic flag_err;

  for (genvar c = 0; c < NumCores; c++) begin : g_core
    relobi_encoder i_enc_instr (
      .isolate_i(1'b0), .obi_req_i(core_out_i[c].instr), .obi_rsp_o(instr_rsp[c]),
      .rel_req_o(instr_enc[c]), .rel_rsp_i(instr_rsp_i), .corr_o(c_corr_i[c]), .uncorr_o(c_unc_i[c])
    );
    relobi_encoder i_enc_data (
      .isolate_i(1'b0), .obi_req_i(core_out_i[c].data), .obi_rsp_o(data_rsp[c]),
      .rel_req_o(data_enc[c]), .rel_rsp_i(data_rsp_i), .corr_o(c_corr_d[c]), .uncorr_o(c_unc_d[c])
    );
    always_comb begin
      core_in_o[c].instr     = instr_rsp[c];
      core_in_o[c].data      = data_rsp[c];
      core_in_o[c].irq_timer = irq_timer_i;
      core_in_o[c].irq_tcls  = flag_q[c % 3];
      core_in_o[c].fetch_en  = fetch_en_i;
      core_in_o[c].debug_req = debug_req_i;
      core_in_o[c].boot_addr = boot_addr_i;
    end
  end

  // bit-wise majority voters on the encoded requests (lane k from the three cores' lane k)
  assign instr_req_o = (instr_enc[0] & instr_enc[1]) | (instr_enc[0] & instr_enc[2]) | (instr_enc[1] & instr_enc[2]);
  assign data_req_o  = (data_enc[0]  & data_enc[1])  | (data_enc[0]  & data_enc[2])  | (data_enc[1]  & data_enc[2]);
  assign busy_o      = maj3(core_out_i[0].busy, core_out_i[1].busy, core_out_i[2].busy);

  always_comb begin
    mismatch_o = 1'b0;
    for (int c = 1; c < NumCores; c++) begin
      if (instr_enc[c] != instr_enc[0] || data_enc[c] != data_enc[0] ||
          core_out_i[c].busy != core_out_i[0].busy) mismatch_o = 1'b1;
    end
    for (int k = 0; k < 3; k++) flag_d[k] = (flag_q[k] || mismatch_o) && !clear_i;
  end

  tmr_reg #(.W(1)) i_flag (.clk_i, .rst_ni, .d_i(flag_d), .q_o(flag_q), .err_o(flag_err));

  assign flag_o   = flag_q[0];
  assign corr_o   = (|c_corr_i) || (|c_corr_d) || flag_err;
  assign uncorr_o = (|c_unc_i) || (|c_unc_d);

  initial assert (NumCores == 3) else $error("TCLS needs exactly three cores");
endmodule
