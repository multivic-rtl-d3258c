// dma: copy engine of the management side.
//
// The management core programs a transfer through a small register file on
// the peripheral crossbar and starts it; the engine then copies SIZE bytes,
// one 32-bit word at a time, from a source to a destination. Each side can
// lie in one of two address spaces: the global scratchpad space reached
// through the main crossbar (the DMA is that crossbar's only host), or the
// DRAM reached through the dedicated memory-controller port (64-bit
// addresses, since the main memory is larger than 4 GiB). A word is read,
// then written, then the next word is read: at most one access is in flight,
// so the time of a transfer is the sum of fixed per-word steps plus the
// response times of the memories, which keeps it easy to bound for a static
// schedule.
//
// Registers (word offsets from the DMA base, all 32 bits):
//   0x00 SRC_LO   0x04 SRC_HI   0x08 DST_LO   0x0C DST_HI   0x10 SIZE (bytes)
//   0x14 CTRL     bit0 GO (write 1 to start, reads 0), bit1 SRC_DRAM,
//                 bit2 DST_DRAM, bit3 IRQ_EN
//   0x18 STATUS   bit0 BUSY (RO), bit1 DONE (W1C), bit2 ERROR (W1C)
// Writes to SRC/DST/SIZE/CTRL are ignored while BUSY. A transfer whose
// addresses or size are not multiples of 4 ends at once with ERROR; so does
// one that receives a bus or DRAM error (the copy stops at that word). A
// SIZE of 0 sets DONE immediately. irq_o = DONE & IRQ_EN.
//
// Timing on the main crossbar with one-cycle scratchpads: 4 cycles per word
// (read request, read response, write request, write response).
//
// From the paper: a DMA, controlled by the management core, that copies
// between DRAM and scratchpads and is the only host of the main crossbar.
// The paper uses a modified OpenTitan DMA without describing it; this
// register map, the word-by-word sequence and the error handling are this
// design's own simplest version of that function.
module dma
  import mv_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  // configuration port (peripheral crossbar device)
  input  tl_h2d_t   cfg_tl_i,
  output tl_d2h_t   cfg_tl_o,
  // host port on the main crossbar
  output tl_h2d_t   host_tl_o,
  input  tl_d2h_t   host_tl_i,
  // DRAM memory-controller port
  output dram_req_t dram_req_o,
  input  dram_rsp_t dram_rsp_i,
  output logic      irq_o,
  output logic      busy_o
);

  typedef enum logic [2:0] {
    StIdle, StRdReq, StRdWait, StWrReq, StWrWait
  } state_e;

  state_e      state_q, state_d;
  logic [63:0] src_q, dst_q;
  logic [31:0] size_q, remain_q;
  logic        src_dram_q, dst_dram_q, irq_en_q;
  logic        done_q, err_q;
  logic [31:0] data_q;

  // ---------------- register file ----------------
  logic        re, we, busy;
  logic [31:0] addr, wdata, rdata_q;
  logic [3:0]  be;

  tlul_adapter_reg u_cfg (
    .clk_i, .rst_ni,
    .tl_i    (cfg_tl_i),
    .tl_o    (cfg_tl_o),
    .re_o    (re),
    .we_o    (we),
    .addr_o  (addr),
    .wdata_o (wdata),
    .be_o    (be),
    .rdata_i (rdata_q),
    .err_i   (1'b0)
  );

  assign busy   = (state_q != StIdle);
  assign busy_o = busy;
  assign irq_o  = done_q && irq_en_q;

  logic [4:0] reg_idx;
  assign reg_idx = addr[6:2];

  logic go;
  assign go = we && !busy && (reg_idx == 5'd5) && wdata[0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rdata_q <= '0;
    end else if (re) begin
      unique case (reg_idx)
        5'd0:    rdata_q <= src_q[31:0];
        5'd1:    rdata_q <= src_q[63:32];
        5'd2:    rdata_q <= dst_q[31:0];
        5'd3:    rdata_q <= dst_q[63:32];
        5'd4:    rdata_q <= size_q;
        5'd5:    rdata_q <= {28'd0, irq_en_q, dst_dram_q, src_dram_q, 1'b0};
        5'd6:    rdata_q <= {29'd0, err_q, done_q, busy};
        default: rdata_q <= '0;
      endcase
    end
  end

  // ---------------- transfer engine ----------------
  logic rd_hs, rd_rsp, wr_hs, wr_rsp, rsp_err;
  logic misaligned;

  assign misaligned = (wdata[0] && ((src_q[1:0] != 2'b00) || (dst_q[1:0] != 2'b00)
                                     || (size_q[1:0] != 2'b00)));

  always_comb begin
    host_tl_o           = TL_H2D_IDLE;
    host_tl_o.a_size    = 2'd2;
    host_tl_o.a_mask    = 4'hF;
    host_tl_o.d_ready   = 1'b1;
    dram_req_o          = '0;
    dram_req_o.be       = 4'hF;
    unique case (state_q)
      StRdReq: begin
        if (src_dram_q) begin
          dram_req_o.req  = 1'b1;
          dram_req_o.addr = src_q;
        end else begin
          host_tl_o.a_valid   = 1'b1;
          host_tl_o.a_opcode  = Get;
          host_tl_o.a_address = src_q[31:0];
        end
      end
      StWrReq: begin
        if (dst_dram_q) begin
          dram_req_o.req   = 1'b1;
          dram_req_o.we    = 1'b1;
          dram_req_o.addr  = dst_q;
          dram_req_o.wdata = data_q;
        end else begin
          host_tl_o.a_valid   = 1'b1;
          host_tl_o.a_opcode  = PutFullData;
          host_tl_o.a_address = dst_q[31:0];
          host_tl_o.a_data    = data_q;
        end
      end
      default: ;
    endcase
  end

  assign rd_hs  = src_dram_q ? dram_rsp_i.gnt : host_tl_i.a_ready;
  assign rd_rsp = src_dram_q ? dram_rsp_i.rvalid : host_tl_i.d_valid;
  assign wr_hs  = dst_dram_q ? dram_rsp_i.gnt : host_tl_i.a_ready;
  assign wr_rsp = dst_dram_q ? dram_rsp_i.rvalid : host_tl_i.d_valid;
  assign rsp_err = (state_q == StRdWait) ? (src_dram_q ? dram_rsp_i.err : host_tl_i.d_error)
                                         : (dst_dram_q ? dram_rsp_i.err : host_tl_i.d_error);

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      StIdle:   if (go && !misaligned) state_d = (size_q == '0) ? StIdle : StRdReq;
      StRdReq:  if (rd_hs)  state_d = StRdWait;
      StRdWait: if (rd_rsp) state_d = rsp_err ? StIdle : StWrReq;
      StWrReq:  if (wr_hs)  state_d = StWrWait;
      StWrWait: if (wr_rsp) state_d = (rsp_err || remain_q == 32'd4) ? StIdle : StRdReq;
      default:  state_d = StIdle;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= StIdle;
      src_q      <= '0;
      dst_q      <= '0;
      size_q     <= '0;
      remain_q   <= '0;
      src_dram_q <= 1'b0;
      dst_dram_q <= 1'b0;
      irq_en_q   <= 1'b0;
      done_q     <= 1'b0;
      err_q      <= 1'b0;
      data_q     <= '0;
    end else begin
      state_q <= state_d;
      // register writes
      if (we && !busy) begin
        unique case (reg_idx)
          5'd0: src_q[31:0]  <= wdata;
          5'd1: src_q[63:32] <= wdata;
          5'd2: dst_q[31:0]  <= wdata;
          5'd3: dst_q[63:32] <= wdata;
          5'd4: size_q       <= wdata;
          5'd5: begin
            src_dram_q <= wdata[1];
            dst_dram_q <= wdata[2];
            irq_en_q   <= wdata[3];
          end
          default: ;
        endcase
      end
      if (we && reg_idx == 5'd6) begin
        if (wdata[1]) done_q <= 1'b0;
        if (wdata[2]) err_q  <= 1'b0;
      end
      // transfer bookkeeping (the working copies of src/dst walk forward;
      // the programmed values are not kept)
      if (go) begin
        remain_q <= size_q;
        done_q   <= 1'b0;
        if (misaligned) begin
          err_q  <= 1'b1;
          done_q <= 1'b1;
        end else if (size_q == '0) begin
          done_q <= 1'b1;
        end
      end
      if (state_q == StRdWait && rd_rsp) begin
        data_q <= (src_dram_q ? dram_rsp_i.rdata : host_tl_i.d_data);
        if (rsp_err) begin
          err_q  <= 1'b1;
          done_q <= 1'b1;
        end
      end
      if (state_q == StWrWait && wr_rsp) begin
        src_q    <= src_q + 64'd4;
        dst_q    <= dst_q + 64'd4;
        remain_q <= remain_q - 32'd4;
        if (rsp_err) err_q <= 1'b1;
        if (rsp_err || remain_q == 32'd4) done_q <= 1'b1;
      end
    end
  end

  // A TL-UL response may only arrive while the DMA waits for one.
  tl_rsp_expected: assert property (@(posedge clk_i) disable iff (!rst_ni)
    host_tl_i.d_valid |-> (state_q inside {StRdWait, StWrWait}));

endmodule
