// uart: 8N1 UART peripheral, fully triplicated.
//
// Registers (32-bit): 0x00 TX (write: send wdata[7:0] if the transmitter is idle, ignored
// otherwise), 0x04 RX (read: last received byte, clears the valid flag), 0x08 STATUS (bit 0
// transmitter busy, bit 1 received byte valid), 0x0C DIV (rw: clock cycles per bit, reset
// 16). Other offsets answer with err. Transmitter: start bit, 8 data bits LSB first, stop
// bit, each DIV cycles. Receiver: two-flip-flop synchroniser, start bit checked half a bit
// after the falling edge, then one sample per bit time. All state is held three times with a
// voter per lane, each relobi_decoder lane drives its own copy of the logic, and tx_o is
// voted. The paper only names the UART; this minimal register set is this design's own.
module uart
  import relobi_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  rel_req_t rel_req_i,
  output rel_rsp_t rel_rsp_o,
  input  logic     rx_i,
  output logic     tx_o,
  output logic     corr_o,
  output logic     uncorr_o
);
  typedef struct packed {
    logic [15:0] div;
    logic [9:0]  tx_shift;
    logic [3:0]  tx_bits;
    logic [15:0] tx_cnt;
    logic [1:0]  rx_sync;
    logic        rx_busy;
    logic [7:0]  rx_shift;
    logic [3:0]  rx_bits;
    logic [15:0] rx_cnt;
    logic        rx_valid;
    logic [7:0]  rx_data;
  } st_t;

  localparam int unsigned SW = $bits(st_t);
  localparam st_t RstVal = '{div: 16'd16, tx_shift: 10'h3FF, rx_sync: 2'b11, default: '0};

  obi_req_t             lreq   [3];
  logic [DataWidth-1:0] lrdata [3];
  logic                 lerr   [3];
  logic [SW-1:0]        d [3];
  logic [SW-1:0]        q [3];
  logic [2:0]           ltx;
  logic                 dec_corr, tmr_err;

  relobi_decoder i_dec (
    .clk_i, .rst_ni, .rel_req_i, .rel_rsp_o, .lane_req_o(lreq), .lane_rdata_i(lrdata),
    .lane_err_i(lerr), .corr_o(dec_corr), .uncorr_o
  );

  for (genvar k = 0; k < 3; k++) begin : g_lane
    st_t  s, n;
    logic rx;
    always_comb begin
      s         = st_t'(q[k]);
      n         = s;
      lrdata[k] = '0;
      lerr[k]   = 1'b0;
      rx        = s.rx_sync[1];
      n.rx_sync = {s.rx_sync[0], rx_i};

      // transmitter
      if (s.tx_bits != 4'd0) begin
        if (s.tx_cnt >= s.div - 16'd1) begin
          n.tx_cnt   = '0;
          n.tx_shift = {1'b1, s.tx_shift[9:1]};
          n.tx_bits  = s.tx_bits - 4'd1;
        end else begin
          n.tx_cnt = s.tx_cnt + 16'd1;
        end
      end

      // receiver
      if (!s.rx_busy) begin
        if (!rx) begin
          n.rx_busy = 1'b1;
          n.rx_cnt  = '0;
          n.rx_bits = '0;
        end
      end else if (s.rx_bits == 4'd0) begin
        if (s.rx_cnt >= (s.div >> 1) - 16'd1) begin
          n.rx_cnt = '0;
          if (rx) n.rx_busy = 1'b0;     // false start
          else    n.rx_bits = 4'd1;
        end else n.rx_cnt = s.rx_cnt + 16'd1;
      end else begin
        if (s.rx_cnt >= s.div - 16'd1) begin
          n.rx_cnt = '0;
          if (s.rx_bits == 4'd9) begin
            n.rx_busy  = 1'b0;
            n.rx_valid = 1'b1;
            n.rx_data  = s.rx_shift;
          end else begin
            n.rx_shift = {rx, s.rx_shift[7:1]};
            n.rx_bits  = s.rx_bits + 4'd1;
          end
        end else n.rx_cnt = s.rx_cnt + 16'd1;
      end

      // register access
      unique case (lreq[k].addr[11:2])
        10'h0: lrdata[k] = '0;
        10'h1: lrdata[k] = {24'd0, s.rx_data};
        10'h2: lrdata[k] = {30'd0, s.rx_valid, (s.tx_bits != 4'd0)};
        10'h3: lrdata[k] = {16'd0, s.div};
        default: lerr[k] = 1'b1;
      endcase
      if (lreq[k].req && lreq[k].we) begin
        unique case (lreq[k].addr[11:2])
          10'h0: if (s.tx_bits == 4'd0) begin
            n.tx_shift = {1'b1, lreq[k].wdata[7:0], 1'b0};
            n.tx_bits  = 4'd10;
            n.tx_cnt   = '0;
          end
          10'h3: n.div = lreq[k].wdata[15:0];
          default: ;
        endcase
      end else if (lreq[k].req && lreq[k].addr[11:2] == 10'h1) begin
        n.rx_valid = 1'b0;
      end
      ltx[k] = (s.tx_bits != 4'd0) ? s.tx_shift[0] : 1'b1;
      d[k]   = SW'(n);
    end
  end

  tmr_reg #(.W(SW), .RstVal(SW'(RstVal))) i_regs (.clk_i, .rst_ni, .d_i(d), .q_o(q), .err_o(tmr_err));

  assign tx_o   = maj3(ltx[0], ltx[1], ltx[2]);
  assign corr_o = dec_corr || tmr_err;
endmodule
