// matmul_config_run: one multi-core system in a chosen configuration,
// running the matrix multiplication benchmark under a static schedule, for
// multivic_configs_tb.
//
// Same environment and schedule as multivic_top_tb (management host model,
// worker models, random-latency DRAM, boot, resident B blocks, one row of A
// at a time, status polling, C fragments back to DRAM), with the worker count
// and data-scratchpad size set by parameters. It also checks that the last
// word of every worker D-SPM is reachable through the global address map and
// that the word beyond it is answered with an error. done rises when the run
// is over; checks and failures are counted in the usual way.
module matmul_config_run
  import mv_pkg::*;
#(
  parameter int unsigned NW        = 2,
  parameter int unsigned DSPM_SIZE = 524288,
  parameter int unsigned N         = 16,
  parameter string       NAME      = "Dual"
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int unsigned BW = N / NW;
  localparam int unsigned PROG_WORDS = 8;
  localparam logic [31:0] A_OFS = 32'h100, C_OFS = 32'h800, B_OFS = 32'h1000;
  localparam logic [31:0] FN_PTR = WORKER_ISPM_BASE + 32'h100;

  localparam logic [63:0] DRAM_A   = 64'h1_0000_0000;
  localparam logic [63:0] DRAM_B   = 64'h1_0010_0000;
  localparam logic [63:0] DRAM_C   = 64'h1_0020_0000;
  localparam logic [63:0] DRAM_IMG = 64'h1_0030_0000;
  localparam logic [31:0] MD_IMG   = MGMT_DSPM_BASE + 32'h8000;  // boot image in mgmt D-SPM
  localparam logic [31:0] MD_MBOX  = MGMT_DSPM_BASE + 32'h0100;  // command staging word
  localparam logic [31:0] MD_POLL  = MGMT_DSPM_BASE + 32'h0200;  // polled status copy

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  core_req_t [NW-1:0] wk_ireq, wk_dreq;
  core_rsp_t [NW-1:0] wk_irsp, wk_drsp;
  core_req_t mg_ireq;
  core_rsp_t mg_irsp;
  tl_h2d_t   mg_h2d;
  tl_d2h_t   mg_d2h;
  logic      irq_timer, irq_dma, irq_uart, uart_line;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;
  int        dram_acc;
  int        execs [NW], bad_f [NW], bad_t [NW];
  longint    ex_min [NW], ex_max [NW];
  logic      wk_start = 1'b0;

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
  end

  multivic_top #(.NUM_WORKERS (NW), .WORKER_DSPM_SIZE (DSPM_SIZE)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .wk_instr_req_i (wk_ireq), .wk_instr_rsp_o (wk_irsp),
    .wk_data_req_i (wk_dreq), .wk_data_rsp_o (wk_drsp),
    .mgmt_instr_req_i (mg_ireq), .mgmt_instr_rsp_o (mg_irsp),
    .mgmt_tl_i (mg_h2d), .mgmt_tl_o (mg_d2h),
    .irq_timer_o (irq_timer), .irq_dma_o (irq_dma), .irq_uart_o (irq_uart),
    .dram_req_o (dram_req), .dram_rsp_i (dram_rsp),
    .uart_tx_o (uart_line), .uart_rx_i (uart_line)
  );

  tl_host_bfm mgmt (.clk_i (clk), .tl_o (mg_h2d), .tl_i (mg_d2h));
  dram_model #(.LAT_MIN (4), .LAT_MAX (12)) dram (
    .clk_i (clk), .rst_ni (rst_n), .req_i (dram_req), .rsp_o (dram_rsp), .accesses (dram_acc));

  for (genvar w = 0; w < NW; w++) begin : g_wk
    worker_model #(.ID (w), .N (N), .BW (BW), .PROG_WORDS (PROG_WORDS),
                   .A_OFS (A_OFS), .C_OFS (C_OFS), .B_OFS (B_OFS)) u_wk (
      .clk_i (clk), .rst_ni (rst_n), .start_i (wk_start),
      .instr_req_o (wk_ireq[w]), .instr_rsp_i (wk_irsp[w]),
      .data_req_o (wk_dreq[w]), .data_rsp_i (wk_drsp[w]),
      .executions (execs[w]), .bad_fetches (bad_f[w]), .bad_timing (bad_t[w]),
      .exec_min (ex_min[w]), .exec_max (ex_max[w])
    );
  end

  // ---------------- mechanism counters ----------------
  int n_dram2spm = 0, n_spm2dram = 0, n_spm2spm = 0, n_polls = 0;
  int n_dual = 0, n_timer_irq = 0;

  always @(posedge clk) begin
    for (int w = 0; w < NW; w++) begin
      if (wk_dreq[w].req && dut.spm_h2d[3 + 2*w].a_valid && dut.spm_d2h[3 + 2*w].a_ready)
        n_dual++;
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- management-side helpers ----------------
  task automatic dma_copy(input logic [63:0] src, input logic [63:0] dst, input int bytes,
                          input logic sdram, input logic ddram, output logic [31:0] status);
    mgmt.put32(DMA_BASE + 32'h00, src[31:0]);
    mgmt.put32(DMA_BASE + 32'h04, src[63:32]);
    mgmt.put32(DMA_BASE + 32'h08, dst[31:0]);
    mgmt.put32(DMA_BASE + 32'h0C, dst[63:32]);
    mgmt.put32(DMA_BASE + 32'h10, 32'(bytes));
    mgmt.put32(DMA_BASE + 32'h14, {28'd0, 1'b1, ddram, sdram, 1'b1});
    wait (irq_dma);
    mgmt.get32(DMA_BASE + 32'h18, status);
    mgmt.put32(DMA_BASE + 32'h18, 32'h6);
    if (!status[2]) begin
      if (sdram && !ddram) n_dram2spm++;
      else if (!sdram && ddram) n_spm2dram++;
      else if (!sdram && !ddram) n_spm2spm++;
    end
  endtask

  task automatic copy(input logic [63:0] src, input logic [63:0] dst, input int bytes,
                      input logic sdram, input logic ddram);
    logic [31:0] st;
    dma_copy(src, dst, bytes, sdram, ddram, st);
    check(st[1] && !st[2], $sformatf("DMA %h -> %h done without error", src, dst));
  endtask

  function automatic logic [31:0] mgmt_prog_word(int unsigned k);
    return 32'h0000_006F ^ (32'(k) << 12);
  endfunction

  function automatic logic [31:0] worker_prog_word(int unsigned k);
    return 32'h0000_0013 | (32'(k) << 20) | 32'h0700_0000;
  endfunction


  initial begin
    logic [31:0] A [N][N];
    logic [31:0] B [N][N];
    logic [31:0] ref_c, r, st, t_start, t_end;
    logic e; int lat;

    mg_ireq = '0;
    // matrices and boot image in DRAM
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        A[i][j] = 32'($urandom_range(255)) - 32'd128;
        B[i][j] = 32'($urandom_range(255)) - 32'd128;
        dram.poke(DRAM_A + 64'(4*(i*N + j)), A[i][j]);
        dram.poke(DRAM_B + 64'(4*(i*N + j)), B[i][j]);
      end
    for (int k = 0; k < PROG_WORDS; k++) begin
      dram.poke(DRAM_IMG + 64'(4*k), mgmt_prog_word(k));
      dram.poke(DRAM_IMG + 64'(4*(PROG_WORDS + k)), worker_prog_word(k));
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // ---- 1. boot image and program distribution ----
    copy(DRAM_IMG, 64'(MD_IMG), 8*PROG_WORDS, 1'b1, 1'b0);
    copy(64'(MD_IMG), 64'(MGMT_ISPM_BASE), 4*PROG_WORDS, 1'b0, 1'b0);
    for (int k = 0; k < PROG_WORDS; k++) begin
      @(negedge clk);
      mg_ireq = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: MGMT_ISPM_BASE + 4*k, wdata: '0};
      @(negedge clk);
      mg_ireq.req = 1'b0;
      check(mg_irsp.rvalid && mg_irsp.rdata == mgmt_prog_word(k), "management I-SPM fetch");
    end
    for (int w = 0; w < NW; w++)
      copy(64'(MD_IMG + 4*PROG_WORDS), 64'(worker_ispm_addr(w) + FN_PTR), 4*PROG_WORDS, 1'b0, 1'b0);

    // clear every worker's status area (command and status word), then
    // release the workers
    mgmt.put32(MD_POLL, 32'h0);
    mgmt.put32(MD_POLL + 4, 32'h0);
    for (int w = 0; w < NW; w++)
      copy(64'(MD_POLL), 64'(worker_dspm_addr(w)), 8, 1'b0, 1'b0);
    wk_start = 1'b1;

    // ---- 2. resident B blocks ----
    for (int w = 0; w < NW; w++)
      for (int k = 0; k < N; k++)
        copy(DRAM_B + 64'(4*(k*N + w*BW)), 64'(worker_dspm_addr(w) + B_OFS + 4*k*BW),
             4*BW, 1'b1, 1'b0);

    // ---- full D-SPM size reachable, one word beyond is an error ----
    for (int w = 0; w < NW; w++) begin
      mgmt.put32(MD_POLL + 8, 32'hD5D5_0000 + 32'(w));
      copy(64'(MD_POLL + 8), 64'(worker_dspm_addr(w) + DSPM_SIZE - 4), 4, 1'b0, 1'b0);
      copy(64'(worker_dspm_addr(w) + DSPM_SIZE - 4), 64'(MD_POLL + 12), 4, 1'b0, 1'b0);
      mgmt.get32(MD_POLL + 12, r);
      check(r == 32'hD5D5_0000 + 32'(w), $sformatf("%s: last D-SPM word of worker %0d", NAME, w));
      if (DSPM_SIZE < 524288) begin
        dma_copy(64'(worker_dspm_addr(w) + DSPM_SIZE), 64'(MD_POLL + 12), 4, 1'b0, 1'b0, st);
        check(st[2], $sformatf("%s: error beyond D-SPM of worker %0d", NAME, w));
      end
    end

    // ---- 3. time-triggered start ----
    mgmt.put32(TIMER_BASE + 32'h0C, 32'd0);
    mgmt.put32(TIMER_BASE + 32'h10, 32'd0);
    mgmt.put32(TIMER_BASE + 32'h04, 32'd0);
    mgmt.put32(TIMER_BASE + 32'h0C, 32'd300);
    mgmt.put32(TIMER_BASE + 32'h18, 32'h1);
    mgmt.put32(TIMER_BASE + 32'h14, 32'h1);
    mgmt.put32(TIMER_BASE + 32'h00, 32'h1);
    wait (irq_timer);
    n_timer_irq++;
    mgmt.put32(TIMER_BASE + 32'h14, 32'h0);
    mgmt.get32(TIMER_BASE + 32'h04, t_start);
    check(t_start >= 300, "timer start after compare value");

    // ---- 4. rows of A ----
    mgmt.put32(MD_MBOX, FN_PTR);
    for (int i = 0; i < N; i++) begin
      for (int w = 0; w < NW; w++)
        copy(DRAM_A + 64'(4*i*N), 64'(worker_dspm_addr(w) + A_OFS), 4*N, 1'b1, 1'b0);
      for (int w = 0; w < NW; w++)
        copy(64'(MD_MBOX), 64'(worker_dspm_addr(w)), 4, 1'b0, 1'b0);
      for (int w = 0; w < NW; w++) begin
        do begin
          copy(64'(worker_dspm_addr(w) + 4), 64'(MD_POLL), 4, 1'b0, 1'b0);
          mgmt.get32(MD_POLL, r);
          n_polls++;
        end while (r[0] || r[31:16] != 16'(i + 1));
        copy(64'(worker_dspm_addr(w) + C_OFS), DRAM_C + 64'(4*(i*N + w*BW)), 4*BW, 1'b0, 1'b1);
      end
    end
    mgmt.get32(TIMER_BASE + 32'h04, t_end);
    $display("%s: matmul N=%0d on %0d workers: %0d cycles", NAME, N, NW, t_end - t_start);

    // ---- 5. result ----
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        ref_c = '0;
        for (int k = 0; k < N; k++) ref_c += A[i][k] * B[k][j];
        check(dram.peek(DRAM_C + 64'(4*(i*N + j))) == ref_c, $sformatf("C[%0d][%0d]", i, j));
      end
    for (int w = 0; w < NW; w++) begin
      check(execs[w] == N, $sformatf("worker %0d executed %0d times", w, execs[w]));
      check(bad_f[w] == 0, $sformatf("worker %0d program fetch", w));
      check(bad_t[w] == 0, $sformatf("worker %0d SPM answered within one cycle", w));
      check(ex_min[w] == ex_max[w] && ex_min[w] > 0,
            $sformatf("worker %0d kernel time constant despite DMA traffic (%0d..%0d)", w, ex_min[w], ex_max[w]));
    end
    $display("%s worker 0 kernel time: %0d..%0d cycles", NAME, ex_min[0], ex_max[0]);
    $display("%s mechanisms: dram->spm=%0d spm->dram=%0d spm->spm=%0d polls=%0d dual-port=%0d timer_irq=%0d",
             NAME, n_dram2spm, n_spm2dram, n_spm2spm, n_polls, n_dual, n_timer_irq);
    check(n_dram2spm > 0, "DMA DRAM -> SPM happened");
    check(n_spm2dram > 0, "DMA SPM -> DRAM happened");
    check(n_spm2spm > 0, "DMA SPM -> SPM happened");
    check(n_polls > 0, "status polling happened");
    check(n_dual > 0, "simultaneous worker/DMA access to a D-SPM happened");
    check(n_timer_irq > 0, "timer interrupt happened");
    done = 1'b1;
  end

endmodule
