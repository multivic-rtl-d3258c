// tlul_adapter_reg: TL-UL device front end for a register block or a memory
// port with one cycle of read latency.
//
// A channel A beat that is accepted turns into a single-cycle access strobe
// (re_o or we_o) with address, write data and byte mask. Exactly one cycle
// later the channel D response is presented, carrying rdata_i, which the
// attached block must deliver in that cycle and hold until its next access.
// A new request is accepted while no response is pending or while the
// pending response is being taken, so back-to-back accesses run at one per
// cycle. err_i, sampled with the access, becomes d_error. Which accesses are
// errors is up to the attached block. This adapter is this design's own
// choice of a minimal TL-UL device; the paper only says the interconnect is
// TL-UL.
module tlul_adapter_reg
  import mv_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  input  tl_h2d_t            tl_i,
  output tl_d2h_t            tl_o,
  output logic               re_o,
  output logic               we_o,
  output logic [TL_AW-1:0]   addr_o,
  output logic [TL_DW-1:0]   wdata_o,
  output logic [TL_DBW-1:0]  be_o,
  input  logic [TL_DW-1:0]   rdata_i,
  input  logic               err_i
);

  logic              d_valid_q, d_read_q, d_err_q;
  logic [TL_AIW-1:0] d_source_q;
  logic [TL_SZW-1:0] d_size_q;
  logic              a_ready, acc;

  assign a_ready = !d_valid_q || tl_i.d_ready;
  assign acc     = tl_i.a_valid && a_ready;

  assign re_o    = acc && (tl_i.a_opcode == Get);
  assign we_o    = acc && (tl_i.a_opcode != Get);
  assign addr_o  = tl_i.a_address;
  assign wdata_o = tl_i.a_data;
  assign be_o    = tl_i.a_mask;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      d_valid_q  <= 1'b0;
      d_read_q   <= 1'b0;
      d_err_q    <= 1'b0;
      d_source_q <= '0;
      d_size_q   <= '0;
    end else if (acc) begin
      d_valid_q  <= 1'b1;
      d_read_q   <= (tl_i.a_opcode == Get);
      d_err_q    <= err_i;
      d_source_q <= tl_i.a_source;
      d_size_q   <= tl_i.a_size;
    end else if (tl_i.d_ready) begin
      d_valid_q  <= 1'b0;
    end
  end

  always_comb begin
    tl_o          = TL_D2H_IDLE;
    tl_o.a_ready  = a_ready;
    tl_o.d_valid  = d_valid_q;
    tl_o.d_opcode = d_read_q ? AccessAckData : AccessAck;
    tl_o.d_size   = d_size_q;
    tl_o.d_source = d_source_q;
    tl_o.d_data   = (d_read_q && !d_err_q) ? rdata_i : '0;
    tl_o.d_error  = d_err_q;
  end

endmodule
