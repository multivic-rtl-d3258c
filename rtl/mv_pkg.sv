// mv_pkg: types and constants shared by the multi-core system.
//
// Two kinds of bus appear in the system:
//  * A reduced TileLink Uncached-Lightweight (TL-UL) bus, used by both
//    crossbars. Channel A carries Get / PutFullData / PutPartialData requests
//    from the single host of a crossbar, channel D carries AccessAck /
//    AccessAckData back. Each channel uses a valid/ready handshake. Field
//    names follow the TileLink specification; the param, sink and user
//    fields are left out because nothing in this system uses them.
//  * A core-side memory port in the style of the Ibex core (req/gnt, then
//    rvalid), used between each core and its local scratchpad.
// The address map is this design's own choice: only the topology (which
// device hangs on which crossbar) comes from the architecture figure.
package mv_pkg;

  localparam int unsigned TL_AW  = 32;
  localparam int unsigned TL_DW  = 32;
  localparam int unsigned TL_DBW = TL_DW / 8;
  localparam int unsigned TL_SZW = 2;
  localparam int unsigned TL_AIW = 8;

  typedef enum logic [2:0] {
    PutFullData    = 3'h0,
    PutPartialData = 3'h1,
    Get            = 3'h4
  } tl_a_op_e;

  typedef enum logic [2:0] {
    AccessAck     = 3'h0,
    AccessAckData = 3'h1
  } tl_d_op_e;

  // Host to device: channel A payload plus d_ready.
  typedef struct packed {
    logic                a_valid;
    tl_a_op_e            a_opcode;
    logic [TL_SZW-1:0]   a_size;
    logic [TL_AIW-1:0]   a_source;
    logic [TL_AW-1:0]    a_address;
    logic [TL_DBW-1:0]   a_mask;
    logic [TL_DW-1:0]    a_data;
    logic                d_ready;
  } tl_h2d_t;

  // Device to host: channel D payload plus a_ready.
  typedef struct packed {
    logic                d_valid;
    tl_d_op_e            d_opcode;
    logic [TL_SZW-1:0]   d_size;
    logic [TL_AIW-1:0]   d_source;
    logic [TL_DW-1:0]    d_data;
    logic                d_error;
    logic                a_ready;
  } tl_d2h_t;

  localparam tl_h2d_t TL_H2D_IDLE = '{a_opcode: Get, default: '0};
  localparam tl_d2h_t TL_D2H_IDLE = '{d_opcode: AccessAck, default: '0};

  // Core-side scratchpad port (Ibex LSU / instruction fetch style).
  typedef struct packed {
    logic                req;
    logic                we;
    logic [3:0]          be;
    logic [31:0]         addr;
    logic [31:0]         wdata;
  } core_req_t;

  typedef struct packed {
    logic                gnt;
    logic                rvalid;
    logic [31:0]         rdata;
    logic                err;
  } core_rsp_t;

  // DMA port towards the DRAM memory controller: 64-bit byte address,
  // req/gnt request phase, rvalid response phase (one response per request,
  // in order, also for writes).
  typedef struct packed {
    logic                req;
    logic                we;
    logic [3:0]          be;
    logic [63:0]         addr;
    logic [31:0]         wdata;
  } dram_req_t;

  typedef struct packed {
    logic                gnt;
    logic                rvalid;
    logic [31:0]         rdata;
    logic                err;
  } dram_rsp_t;

  // ---------------------------------------------------------------------
  // Address map (byte addresses).
  // Global view, main crossbar (host: DMA):
  //   management I-SPM   0x0000_0000 (64 KiB window)
  //   management D-SPM   0x0010_0000 (64 KiB window)
  //   worker i I-SPM     0x1000_0000 + i * 0x0010_0000           (512 KiB window)
  //   worker i D-SPM     0x1000_0000 + i * 0x0010_0000 + 0x8_0000 (512 KiB window)
  // Management core view, peripheral crossbar (host: management core):
  //   management D-SPM   0x0010_0000
  //   DMA registers      0x0200_0000 (4 KiB)
  //   timer              0x0200_1000 (4 KiB)
  //   UART               0x0200_2000 (4 KiB)
  // Worker core view: its I-SPM at WORKER_ISPM_BASE, its D-SPM at
  // WORKER_DSPM_BASE (the same two addresses on every worker).
  // ---------------------------------------------------------------------
  localparam logic [31:0] MGMT_ISPM_BASE   = 32'h0000_0000;
  localparam logic [31:0] MGMT_DSPM_BASE   = 32'h0010_0000;
  localparam logic [31:0] MGMT_SPM_MASK    = 32'h0000_FFFF;
  localparam logic [31:0] WORKER_BASE      = 32'h1000_0000;
  localparam logic [31:0] WORKER_STRIDE    = 32'h0010_0000;
  localparam logic [31:0] WORKER_DSPM_OFS  = 32'h0008_0000;
  localparam logic [31:0] WORKER_SPM_MASK  = 32'h0007_FFFF;
  localparam logic [31:0] DMA_BASE         = 32'h0200_0000;
  localparam logic [31:0] TIMER_BASE       = 32'h0200_1000;
  localparam logic [31:0] UART_BASE        = 32'h0200_2000;
  localparam logic [31:0] PERIPH_MASK      = 32'h0000_0FFF;
  localparam logic [31:0] WORKER_ISPM_BASE = 32'h0000_0000;
  localparam logic [31:0] WORKER_DSPM_BASE = 32'h0008_0000;

  function automatic logic [31:0] worker_ispm_addr(int unsigned i);
    return WORKER_BASE + WORKER_STRIDE * i;
  endfunction

  function automatic logic [31:0] worker_dspm_addr(int unsigned i);
    return WORKER_BASE + WORKER_STRIDE * i + WORKER_DSPM_OFS;
  endfunction

endpackage
