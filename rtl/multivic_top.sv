// multivic_top: the time-predictable multi-core system without its cores.
//
// The system consists of NUM_WORKERS worker cores, each a RISC-V core with a
// vector co-processor that executes only out of its own instruction and data
// scratchpads, and one management core that moves all data. This module
// holds every part of that system except the processor cores themselves and
// the external DRAM: the scratchpads, the two crossbars, the DMA, the timer
// and the UART. The cores connect through the ports below.
//
//  * Worker i fetches from its I-SPM (wk_instr_*[i]) and loads/stores to its
//    D-SPM (wk_data_*[i]); both are port A of a dual-port SPM and answer in
//    one cycle. A worker can reach nothing else.
//  * The management core fetches from its own I-SPM (mgmt_instr_*) and issues
//    all data accesses as host of the peripheral crossbar (mgmt_tl_*), which
//    reaches its D-SPM, the DMA registers, the timer and the UART.
//  * The DMA is the only host of the main crossbar, whose devices are port B
//    of every SPM (worker and management, instruction and data). It also
//    owns the port to the DRAM memory controller (dram_*).
// Each crossbar thus has exactly one host, so no access ever waits for
// another: a worker's execution time depends only on its own program, and
// data arrival times depend only on the static schedule run by the
// management core (and on the DRAM, whose worst case the schedule assumes).
//
// Defaults are the Octa configuration (8 workers with 128 KiB D-SPM each,
// 16 KiB worker I-SPMs, 64 KiB management I- and D-SPM). The topology and
// sizes are the paper's; address map, bus details and register maps are this
// design's own (see mv_pkg and the individual modules). The worker and
// management cores (Ibex, with Vicuna vector units on the workers) and the
// DDR4 memory with its controller are external IP and are not part of this
// module.
module multivic_top
  import mv_pkg::*;
#(
  parameter int unsigned NUM_WORKERS      = 8,
  parameter int unsigned WORKER_ISPM_SIZE = 16384,
  parameter int unsigned WORKER_DSPM_SIZE = 131072,
  parameter int unsigned MGMT_ISPM_SIZE   = 65536,
  parameter int unsigned MGMT_DSPM_SIZE   = 65536,
  parameter int unsigned UART_DIV         = 868
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // worker cores
  input  core_req_t [NUM_WORKERS-1:0]  wk_instr_req_i,
  output core_rsp_t [NUM_WORKERS-1:0]  wk_instr_rsp_o,
  input  core_req_t [NUM_WORKERS-1:0]  wk_data_req_i,
  output core_rsp_t [NUM_WORKERS-1:0]  wk_data_rsp_o,
  // management core
  input  core_req_t                    mgmt_instr_req_i,
  output core_rsp_t                    mgmt_instr_rsp_o,
  input  tl_h2d_t                      mgmt_tl_i,
  output tl_d2h_t                      mgmt_tl_o,
  output logic                         irq_timer_o,
  output logic                         irq_dma_o,
  output logic                         irq_uart_o,
  // DRAM memory controller
  output dram_req_t                    dram_req_o,
  input  dram_rsp_t                    dram_rsp_i,
  // UART pins
  output logic                         uart_tx_o,
  input  logic                         uart_rx_i
);

  localparam int unsigned NSPM = 2 * NUM_WORKERS + 2;

  // ---------------- main crossbar ----------------
  tl_h2d_t            dma_host_h2d;
  tl_d2h_t            dma_host_d2h;
  tl_h2d_t [NSPM-1:0] spm_h2d;
  tl_d2h_t [NSPM-1:0] spm_d2h;
  logic               main_stall;

  xbar_main #(.NUM_WORKERS (NUM_WORKERS)) u_xbar_main (
    .clk_i, .rst_ni,
    .dma_i   (dma_host_h2d),
    .dma_o   (dma_host_d2h),
    .spm_o   (spm_h2d),
    .spm_i   (spm_d2h),
    .stall_o (main_stall)
  );

  // ---------------- peripheral crossbar ----------------
  tl_h2d_t [3:0] per_h2d;
  tl_d2h_t [3:0] per_d2h;
  logic          per_stall;

  xbar_periph u_xbar_periph (
    .clk_i, .rst_ni,
    .mgmt_i  (mgmt_tl_i),
    .mgmt_o  (mgmt_tl_o),
    .dev_o   (per_h2d),
    .dev_i   (per_d2h),
    .stall_o (per_stall)
  );

  // ---------------- management scratchpads ----------------
  spm #(.SIZE_BYTES (MGMT_ISPM_SIZE), .WIN_BYTES (65536)) u_mgmt_ispm (
    .clk_i, .rst_ni,
    .core_req_i (mgmt_instr_req_i),
    .core_rsp_o (mgmt_instr_rsp_o),
    .tl_i       (spm_h2d[0]),
    .tl_o       (spm_d2h[0])
  );

  // The management core reaches its D-SPM through the peripheral crossbar;
  // a TL-UL front end turns those accesses into port A requests.
  core_req_t   mgmt_dspm_req;
  core_rsp_t   mgmt_dspm_rsp;
  logic        md_re, md_we;
  logic [31:0] md_addr, md_wdata;
  logic [3:0]  md_be;

  tlul_adapter_reg u_mgmt_dspm_front (
    .clk_i, .rst_ni,
    .tl_i    (per_h2d[0]),
    .tl_o    (per_d2h[0]),
    .re_o    (md_re),
    .we_o    (md_we),
    .addr_o  (md_addr),
    .wdata_o (md_wdata),
    .be_o    (md_be),
    .rdata_i (mgmt_dspm_rsp.rdata),
    .err_i   ((md_addr & 32'hFFFF) >= 32'(MGMT_DSPM_SIZE))
  );

  assign mgmt_dspm_req = '{req: md_re || md_we, we: md_we, be: md_be,
                           addr: md_addr, wdata: md_wdata};

  spm #(.SIZE_BYTES (MGMT_DSPM_SIZE), .WIN_BYTES (65536)) u_mgmt_dspm (
    .clk_i, .rst_ni,
    .core_req_i (mgmt_dspm_req),
    .core_rsp_o (mgmt_dspm_rsp),
    .tl_i       (spm_h2d[1]),
    .tl_o       (spm_d2h[1])
  );

  // ---------------- worker scratchpads ----------------
  for (genvar i = 0; i < NUM_WORKERS; i++) begin : g_worker
    spm #(.SIZE_BYTES (WORKER_ISPM_SIZE), .WIN_BYTES (524288)) u_ispm (
      .clk_i, .rst_ni,
      .core_req_i (wk_instr_req_i[i]),
      .core_rsp_o (wk_instr_rsp_o[i]),
      .tl_i       (spm_h2d[2 + 2*i]),
      .tl_o       (spm_d2h[2 + 2*i])
    );
    spm #(.SIZE_BYTES (WORKER_DSPM_SIZE), .WIN_BYTES (524288)) u_dspm (
      .clk_i, .rst_ni,
      .core_req_i (wk_data_req_i[i]),
      .core_rsp_o (wk_data_rsp_o[i]),
      .tl_i       (spm_h2d[3 + 2*i]),
      .tl_o       (spm_d2h[3 + 2*i])
    );
  end

  // ---------------- peripherals ----------------
  logic dma_busy;

  dma u_dma (
    .clk_i, .rst_ni,
    .cfg_tl_i   (per_h2d[1]),
    .cfg_tl_o   (per_d2h[1]),
    .host_tl_o  (dma_host_h2d),
    .host_tl_i  (dma_host_d2h),
    .dram_req_o,
    .dram_rsp_i,
    .irq_o      (irq_dma_o),
    .busy_o     (dma_busy)
  );

  timer u_timer (
    .clk_i, .rst_ni,
    .tl_i  (per_h2d[2]),
    .tl_o  (per_d2h[2]),
    .irq_o (irq_timer_o)
  );

  uart #(.DEFAULT_DIV (UART_DIV)) u_uart (
    .clk_i, .rst_ni,
    .tl_i  (per_h2d[3]),
    .tl_o  (per_d2h[3]),
    .tx_o  (uart_tx_o),
    .rx_i  (uart_rx_i),
    .irq_o (irq_uart_o)
  );

endmodule
