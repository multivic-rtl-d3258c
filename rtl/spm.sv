// spm: dual-port scratchpad memory (SPM), used for every instruction and
// data scratchpad of the system.
//
// The array is written as a plain memory of 32-bit words with byte enables,
// so an FPGA flow maps it to true dual-port block RAM. Port A belongs to the
// local core (Ibex-style req/gnt/rvalid): a request is always granted, and
// read data (or the write acknowledge) arrives with rvalid in the next cycle.
// Port B is a TL-UL device on a crossbar; it also answers every request one
// cycle later. The two ports never wait for each other, which is what makes
// accesses of the management side invisible in the timing of the core: this
// is the property the architecture relies on for freedom from interference.
//
// Following the paper: two independent ports, each responding within one
// cycle; sizes are parameters. Own choices: the word width (32 bits, which
// matches the 4 byte/cycle per-core scratchpad bandwidth of the roofline
// figure), that addresses wrap inside SIZE_BYTES (the crossbar decodes the
// window, WIN_BYTES), and that when both ports write the same word in the same cycle,
// port B's bytes win. Accesses beyond SIZE_BYTES inside the decoded window
// are answered with an error on both ports. Contents are not reset.
module spm
  import mv_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 131072,
  // Size of the address window decoded for this memory (power of two,
  // at least SIZE_BYTES); the offset inside it is the SPM address.
  parameter int unsigned WIN_BYTES  = 524288
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // port A: local core
  input  core_req_t core_req_i,
  output core_rsp_t core_rsp_o,
  // port B: crossbar
  input  tl_h2d_t   tl_i,
  output tl_d2h_t   tl_o
);

  localparam int unsigned Words = SIZE_BYTES / 4;
  localparam int unsigned IdxW  = (Words > 1) ? $clog2(Words) : 1;

  logic [31:0] mem [Words];

  // ---------------- port B front end ----------------
  logic              b_re, b_we;
  logic [TL_AW-1:0]  b_addr;
  logic [TL_DW-1:0]  b_wdata;
  logic [TL_DBW-1:0] b_be;
  logic [31:0]       b_rdata_q;
  logic              b_oob;

  localparam logic [31:0] OfsMask = 32'(WIN_BYTES - 1);

  assign b_oob = (b_addr & OfsMask) >= 32'(SIZE_BYTES);

  tlul_adapter_reg u_adapter (
    .clk_i, .rst_ni, .tl_i, .tl_o,
    .re_o    (b_re),
    .we_o    (b_we),
    .addr_o  (b_addr),
    .wdata_o (b_wdata),
    .be_o    (b_be),
    .rdata_i (b_rdata_q),
    .err_i   (b_oob)
  );

  // ---------------- port A ----------------
  logic        a_oob;
  logic        a_rvalid_q, a_err_q;
  logic [31:0] a_rdata_q;
  logic [IdxW-1:0] a_idx, b_idx;

  assign a_oob = (core_req_i.addr & OfsMask) >= 32'(SIZE_BYTES);
  assign a_idx = IdxW'(core_req_i.addr[31:2]);
  assign b_idx = IdxW'(b_addr[TL_AW-1:2]);

  assign core_rsp_o.gnt    = core_req_i.req;
  assign core_rsp_o.rvalid = a_rvalid_q;
  assign core_rsp_o.rdata  = a_rdata_q;
  assign core_rsp_o.err    = a_err_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_rvalid_q <= 1'b0;
      a_err_q    <= 1'b0;
    end else begin
      a_rvalid_q <= core_req_i.req;
      a_err_q    <= core_req_i.req && a_oob;
    end
  end

  // Memory array: both write ports in one process, port B last.
  always_ff @(posedge clk_i) begin
    if (core_req_i.req && core_req_i.we && !a_oob) begin
      for (int b = 0; b < 4; b++) begin
        if (core_req_i.be[b]) mem[a_idx][8*b +: 8] <= core_req_i.wdata[8*b +: 8];
      end
    end
    if (b_we && !b_oob) begin
      for (int b = 0; b < 4; b++) begin
        if (b_be[b]) mem[b_idx][8*b +: 8] <= b_wdata[8*b +: 8];
      end
    end
  end

  // Read ports (read-before-write).
  always_ff @(posedge clk_i) begin
    if (core_req_i.req && !core_req_i.we) a_rdata_q <= mem[a_idx];
    if (b_re) b_rdata_q <= mem[b_idx];
  end

endmodule
