// xbar_periph: the peripheral crossbar of the system.
//
// Its single host is the data port of the management core. Its devices are,
// in dev_o / dev_i order: 0 the management D-SPM (port A of that SPM, seen
// through TL-UL), 1 the DMA configuration registers, 2 the timer, 3 the
// UART. The topology follows the architecture figure; the address windows
// (see mv_pkg) are this design's own.
module xbar_periph
  import mv_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  tl_h2d_t         mgmt_i,
  output tl_d2h_t         mgmt_o,
  output tl_h2d_t [3:0]   dev_o,
  input  tl_d2h_t [3:0]   dev_i,
  output logic            stall_o
);

  tlul_xbar_1n #(
    .N    (4),
    .BASE ({UART_BASE,   TIMER_BASE,  DMA_BASE,    MGMT_DSPM_BASE}),
    .MASK ({PERIPH_MASK, PERIPH_MASK, PERIPH_MASK, MGMT_SPM_MASK})
  ) u_socket (
    .clk_i, .rst_ni,
    .host_i  (mgmt_i),
    .host_o  (mgmt_o),
    .dev_o,
    .dev_i,
    .stall_o
  );

endmodule
