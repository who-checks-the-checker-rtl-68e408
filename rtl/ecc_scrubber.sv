// ecc_scrubber: background scrubber of one ECC SRAM bank, with a triplicated state machine.
//
// Every period_i + 3 cycles (while en_i is high: period_i + 1 counting cycles, one read and
// one check cycle) it reads the next word of the bank, walking the
// addresses in order and wrapping at NumWords. The read is deferred for as long as the bank's
// port is used by an external access (ext_busy_i), so the scrubber costs no bandwidth. In the
// cycle the word returns it is decoded; a single-bit error is written back corrected in that
// same cycle (the bank holds off external requests for it), a multi-bit error is only
// reported. Period counter, address pointer and state are held in a triplicated register
// with voters and the next-state logic runs in three lanes whose requests are voted, as the
// paper triplicates the scrubbing FSM. The paper gives the function (configurable period,
// deferral, correction); counter width, visiting order and the write-back timing are this
// design's own.
//
// Timing: req_o/addr_o ask for a read in this cycle; rdata_i must be the word read in the
// previous cycle when the scrubber is in its CHECK state.
module ecc_scrubber
  import relobi_pkg::*;
#(
  parameter int unsigned NumWords = 2048,
  localparam int unsigned AW      = $clog2(NumWords)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               en_i,
  input  logic [15:0]        period_i,
  input  logic               ext_busy_i,
  output logic               req_o,      // read request (only when the port is free)
  output logic               we_o,       // corrected write-back
  output logic [AW-1:0]      addr_o,
  output logic [CwWidth-1:0] wdata_o,
  input  logic [CwWidth-1:0] rdata_i,
  output logic               corr_o,     // corrected a word
  output logic               uncorr_o,   // found an uncorrectable word
  output logic               tmr_err_o
);
  typedef enum logic [1:0] {Idle = 2'd0, Read = 2'd1, Check = 2'd2} state_e;

  typedef struct packed {
    state_e        state;
    logic [15:0]   cnt;
    logic [AW-1:0] ptr;
  } st_t;

  localparam int unsigned SW = $bits(st_t);

  logic [SW-1:0]      d [3];
  logic [SW-1:0]      q [3];
  logic [2:0]         l_req, l_we, l_corr, l_unc;
  logic [AW-1:0]      l_addr [3];
  logic [CwWidth-1:0] l_wdata [3];

  for (genvar k = 0; k < 3; k++) begin : g_lane
    st_t                  s, n;
    logic [DataWidth-1:0] data;
    logic [CwWidth-1:0]   fixed;
    logic                 single, double_err;

    hsiao_dec #(.K(DataWidth)) i_dec (.cw_i(rdata_i), .data_o(data), .cw_o(fixed),
                                      .single_o(single), .double_o(double_err));

    always_comb begin
      s = st_t'(q[k]);
      n = s;
      l_req[k]  = 1'b0;
      l_we[k]   = 1'b0;
      l_corr[k] = 1'b0;
      l_unc[k]  = 1'b0;
      unique case (s.state)
        Idle: begin
          if (en_i) begin
            if (s.cnt >= period_i) begin
              n.cnt   = '0;
              n.state = Read;
            end else begin
              n.cnt = s.cnt + 16'd1;
            end
          end
        end
        Read: begin
          if (!ext_busy_i) begin
            l_req[k] = 1'b1;
            n.state  = Check;
          end
        end
        Check: begin
          l_we[k]   = single;
          l_corr[k] = single;
          l_unc[k]  = double_err;
          n.state   = Idle;
          n.ptr     = (int'(s.ptr) == NumWords - 1) ? '0 : s.ptr + 1'b1;
        end
        default: n.state = Idle;
      endcase
      l_addr[k]  = s.ptr;
      l_wdata[k] = fixed;
      d[k]       = SW'(n);
    end

    logic unused;
    assign unused = ^data;
  end

  tmr_reg #(.W(SW), .RstVal('0)) i_state (.clk_i, .rst_ni, .d_i(d), .q_o(q), .err_o(tmr_err_o));

  assign req_o    = maj3(l_req[0], l_req[1], l_req[2]);
  assign we_o     = maj3(l_we[0], l_we[1], l_we[2]);
  assign corr_o   = maj3(l_corr[0], l_corr[1], l_corr[2]);
  assign uncorr_o = maj3(l_unc[0], l_unc[1], l_unc[2]);
  assign addr_o   = (l_addr[0] & l_addr[1]) | (l_addr[0] & l_addr[2]) | (l_addr[1] & l_addr[2]);
  assign wdata_o  = (l_wdata[0] & l_wdata[1]) | (l_wdata[0] & l_wdata[2]) | (l_wdata[1] & l_wdata[2]);
endmodule
