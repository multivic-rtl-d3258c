// xbar_main: the main crossbar of the system.
//
// Its single host is the DMA engine; its devices are port B of every
// scratchpad in the system: the instruction and data SPM of the management
// core and of each of the NUM_WORKERS worker cores. Because the DMA is the
// only host, no two transfers ever compete for a scratchpad port, and the
// worker cores (on port A) are never disturbed. The device order on dev_o /
// dev_i is: 0 management I-SPM, 1 management D-SPM, then for worker i:
// 2+2i its I-SPM, 3+2i its D-SPM. The windows are the global addresses of
// mv_pkg (own choice); the topology is the one of the architecture figure.
module xbar_main
  import mv_pkg::*;
#(
  parameter int unsigned NUM_WORKERS = 8
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  tl_h2d_t                         dma_i,
  output tl_d2h_t                         dma_o,
  output tl_h2d_t [2*NUM_WORKERS+1:0]     spm_o,
  input  tl_d2h_t [2*NUM_WORKERS+1:0]     spm_i,
  output logic                            stall_o
);

  localparam int unsigned N = 2 * NUM_WORKERS + 2;

  function automatic logic [N-1:0][TL_AW-1:0] gen_base();
    logic [N-1:0][TL_AW-1:0] b;
    b[0] = MGMT_ISPM_BASE;
    b[1] = MGMT_DSPM_BASE;
    for (int unsigned i = 0; i < NUM_WORKERS; i++) begin
      b[2 + 2*i] = worker_ispm_addr(i);
      b[3 + 2*i] = worker_dspm_addr(i);
    end
    return b;
  endfunction

  function automatic logic [N-1:0][TL_AW-1:0] gen_mask();
    logic [N-1:0][TL_AW-1:0] m;
    m[0] = MGMT_SPM_MASK;
    m[1] = MGMT_SPM_MASK;
    for (int unsigned i = 2; i < N; i++) m[i] = WORKER_SPM_MASK;
    return m;
  endfunction

  tlul_xbar_1n #(
    .N    (N),
    .BASE (gen_base()),
    .MASK (gen_mask())
  ) u_socket (
    .clk_i, .rst_ni,
    .host_i  (dma_i),
    .host_o  (dma_o),
    .dev_o   (spm_o),
    .dev_i   (spm_i),
    .stall_o
  );

endmodule
