// timer: 64-bit cycle counter with a compare interrupt, on the peripheral
// crossbar.
//
// The management core uses it in two ways: to read the current cycle count
// (execution times are measured in clock cycles) and to wait for the start
// time of the next step of a time-triggered schedule, via the compare
// interrupt. When enabled, MTIME increments by one every clock cycle. When
// MTIME >= MTIMECMP, INTR_STATE is set (it stays set until cleared by
// writing 1); irq_o = INTR_STATE & INTR_EN.
//
// Registers (byte offsets):
//   0x00 CTRL       bit0 ENABLE
//   0x04 MTIME_LO   0x08 MTIME_HI      (read/write)
//   0x0C CMP_LO     0x10 CMP_HI        (read/write; reset all ones)
//   0x14 INTR_EN    bit0
//   0x18 INTR_STATE bit0 (W1C)
// Reading MTIME_LO also latches MTIME_HI into a shadow register, which a
// following read of MTIME_HI returns, so a 64-bit value can be read without
// tearing. The paper only names a timer used for time-triggered schedules
// and cycle measurement; the register map and the one-tick-per-cycle rate
// are this design's choices (the rate matches "measured in clock cycles").
module timer
  import mv_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_i,
  output tl_d2h_t tl_o,
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

  logic        enable_q, intr_en_q, intr_q;
  logic [63:0] mtime_q, cmp_q;
  logic [31:0] hi_shadow_q;
  logic [2:0]  idx;

  assign idx   = addr[4:2];
  assign irq_o = intr_q && intr_en_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      enable_q    <= 1'b0;
      intr_en_q   <= 1'b0;
      intr_q      <= 1'b0;
      mtime_q     <= '0;
      cmp_q       <= '1;
      hi_shadow_q <= '0;
      rdata_q     <= '0;
    end else begin
      if (enable_q) mtime_q <= mtime_q + 64'd1;
      if (mtime_q >= cmp_q) intr_q <= 1'b1;
      if (we && (addr[7:5] == 3'd0)) begin
        unique case (idx)
          3'd0: enable_q      <= wdata[0];
          3'd1: mtime_q[31:0]  <= wdata;
          3'd2: mtime_q[63:32] <= wdata;
          3'd3: cmp_q[31:0]    <= wdata;
          3'd4: cmp_q[63:32]   <= wdata;
          3'd5: intr_en_q     <= wdata[0];
          3'd6: if (wdata[0]) intr_q <= 1'b0;
          default: ;
        endcase
      end
      if (re) begin
        unique case (idx)
          3'd0: rdata_q <= {31'd0, enable_q};
          3'd1: begin
            rdata_q     <= mtime_q[31:0];
            hi_shadow_q <= mtime_q[63:32];
          end
          3'd2: rdata_q <= hi_shadow_q;
          3'd3: rdata_q <= cmp_q[31:0];
          3'd4: rdata_q <= cmp_q[63:32];
          3'd5: rdata_q <= {31'd0, intr_en_q};
          3'd6: rdata_q <= {31'd0, intr_q};
          default: rdata_q <= '0;
        endcase
      end
    end
  end

endmodule
