// uart: serial port of the management core (8 data bits, no parity, one
// stop bit), on the peripheral crossbar.
//
// Transmit: writing WDATA while the transmitter is idle sends the byte
// (start bit, 8 data bits LSB first, stop bit), each bit lasting DIV clock
// cycles. Receive: a falling edge on rx_i starts a frame; the line is
// sampled in the middle of every bit; a received byte is held in RDATA with
// RX_VALID set until RDATA is read. A missing stop bit sets FRAME_ERR. The
// rx line passes through a two-flop synchronizer.
//
// Registers (byte offsets):
//   0x00 CTRL    bits 15:0 DIV (clock cycles per bit, reset DEFAULT_DIV),
//                bit16 RX_IRQ_EN
//   0x04 STATUS  bit0 TX_BUSY, bit1 RX_VALID, bit2 RX_OVERRUN,
//                bit3 FRAME_ERR (bits 2 and 3 W1C)
//   0x08 WDATA   (write: byte to send; ignored while TX_BUSY)
//   0x0C RDATA   (read: last received byte, clears RX_VALID)
// irq_o = RX_VALID & RX_IRQ_EN.
// The paper only names the UART; everything here is this design's own
// minimal version of a standard UART. DEFAULT_DIV = 868 gives 115200 baud
// at the paper's 100 MHz measurement clock.
module uart
  import mv_pkg::*;
#(
  parameter int unsigned DEFAULT_DIV = 868
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_i,
  output tl_d2h_t tl_o,
  output logic    tx_o,
  input  logic    rx_i,
  output logic    irq_o
);

  logic        re, we;
  logic [31:0] addr, wdata, rdata_q;
  logic [3:0]  be;

  tlul_adapter_reg u_reg (
    .clk_i, .rst_ni, .tl_i, .tl_o,
    .re_o (re), .we_o (we), .addr_o (addr), .wdata_o (wdata), .be_o (be),
    .rdata_i (rdata_q), .err_i (1'b0)
  );

  logic [15:0] div_q;
  logic        rx_irq_en_q;

  // ---------------- transmitter ----------------
  logic        tx_busy_q;
  logic [9:0]  tx_shift_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;

  // ---------------- receiver ----------------
  logic [1:0]  rx_sync_q;
  logic        rx_s, rx_prev_q;
  logic        rx_busy_q, rx_valid_q, rx_ovr_q, frame_err_q;
  logic [3:0]  rx_bits_q;
  logic [15:0] rx_cnt_q;
  logic [7:0]  rx_shift_q, rx_data_q;

  assign rx_s  = rx_sync_q[1];
  assign irq_o = rx_valid_q && rx_irq_en_q;
  assign tx_o  = tx_busy_q ? tx_shift_q[0] : 1'b1;

  logic wr_data, rd_data;
  assign wr_data = we && (addr[3:2] == 2'd2);
  assign rd_data = re && (addr[3:2] == 2'd3);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q       <= 16'(DEFAULT_DIV);
      rx_irq_en_q <= 1'b0;
      rdata_q     <= '0;
      tx_busy_q   <= 1'b0;
      tx_shift_q  <= '1;
      tx_bits_q   <= '0;
      tx_cnt_q    <= '0;
      rx_sync_q   <= 2'b11;
      rx_prev_q   <= 1'b1;
      rx_busy_q   <= 1'b0;
      rx_valid_q  <= 1'b0;
      rx_ovr_q    <= 1'b0;
      frame_err_q <= 1'b0;
      rx_bits_q   <= '0;
      rx_cnt_q    <= '0;
      rx_shift_q  <= '0;
      rx_data_q   <= '0;
    end else begin
      // register access
      if (we && addr[3:2] == 2'd0) begin
        div_q       <= (wdata[15:0] == '0) ? 16'd1 : wdata[15:0];
        rx_irq_en_q <= wdata[16];
      end
      if (we && addr[3:2] == 2'd1) begin
        if (wdata[2]) rx_ovr_q    <= 1'b0;
        if (wdata[3]) frame_err_q <= 1'b0;
      end
      if (re) begin
        unique case (addr[3:2])
          2'd0: rdata_q <= {15'd0, rx_irq_en_q, div_q};
          2'd1: rdata_q <= {28'd0, frame_err_q, rx_ovr_q, rx_valid_q, tx_busy_q};
          2'd2: rdata_q <= '0;
          2'd3: rdata_q <= {24'd0, rx_data_q};
          default: rdata_q <= '0;
        endcase
      end
      if (rd_data) rx_valid_q <= 1'b0;

      // transmitter
      if (!tx_busy_q) begin
        if (wr_data) begin
          tx_busy_q  <= 1'b1;
          tx_shift_q <= {1'b1, wdata[7:0], 1'b0};
          tx_bits_q  <= 4'd10;
          tx_cnt_q   <= div_q - 16'd1;
        end
      end else if (tx_cnt_q != '0) begin
        tx_cnt_q <= tx_cnt_q - 16'd1;
      end else begin
        tx_shift_q <= {1'b1, tx_shift_q[9:1]};
        tx_cnt_q   <= div_q - 16'd1;
        tx_bits_q  <= tx_bits_q - 4'd1;
        if (tx_bits_q == 4'd1) tx_busy_q <= 1'b0;
      end

      // receiver
      rx_sync_q <= {rx_sync_q[0], rx_i};
      rx_prev_q <= rx_s;
      if (!rx_busy_q) begin
        if (rx_prev_q && !rx_s) begin
          rx_busy_q <= 1'b1;
          rx_bits_q <= 4'd0;
          rx_cnt_q  <= (div_q >> 1);
        end
      end else if (rx_cnt_q != '0) begin
        rx_cnt_q <= rx_cnt_q - 16'd1;
      end else begin
        rx_cnt_q  <= div_q - 16'd1;
        rx_bits_q <= rx_bits_q + 4'd1;
        if (rx_bits_q == 4'd0) begin
          if (rx_s) rx_busy_q <= 1'b0;          // false start bit
        end else if (rx_bits_q <= 4'd8) begin
          rx_shift_q <= {rx_s, rx_shift_q[7:1]};
        end else begin
          rx_busy_q <= 1'b0;
          if (!rx_s) begin
            frame_err_q <= 1'b1;
          end else begin
            rx_data_q  <= rx_shift_q;
            if (rx_valid_q && !rd_data) rx_ovr_q <= 1'b1;
            rx_valid_q <= 1'b1;
          end
        end
      end
    end
  end

endmodule
