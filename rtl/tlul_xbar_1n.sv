// tlul_xbar_1n: one-host, N-device TL-UL crossbar ("socket").
//
// Every crossbar of the system has exactly one host; this is what keeps the
// interconnect free of arbitration and hence of interference. The crossbar
// therefore only has to steer: a channel A request goes to the device whose
// window contains a_address (hit when (a_address & ~MASK[i]) == BASE[i]),
// and channel D responses come back from the device that is currently
// serving. Requests to an unmapped address are answered by an internal error
// responder (d_error = 1, one cycle later).
//
// Responses must return in request order. To guarantee that, the crossbar
// counts outstanding requests (up to MAX_OUT) and lets a new request pass
// only when nothing is outstanding or it targets the same device as the
// outstanding ones; otherwise the request is held (a_ready low) until the
// earlier responses have drained. Channel A and D are combinational paths
// through the crossbar (no added latency).
//
// The TL-UL protocol and the one-host topology follow the paper; the
// decoding scheme, the ordering rule and the error responder are this
// design's own choices (modelled on what TL-UL crossbar generators do).
module tlul_xbar_1n
  import mv_pkg::*;
#(
  parameter int unsigned N       = 2,
  parameter int unsigned MAX_OUT = 4,
  parameter logic [N-1:0][TL_AW-1:0] BASE = '0,
  parameter logic [N-1:0][TL_AW-1:0] MASK = '1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  tl_h2d_t         host_i,
  output tl_d2h_t         host_o,
  output tl_h2d_t [N-1:0] dev_o,
  input  tl_d2h_t [N-1:0] dev_i,
  output logic            stall_o   // request held back for ordering (event)
);

  localparam int unsigned SelW = $clog2(N + 1);
  localparam int unsigned CntW = $clog2(MAX_OUT + 1);
  localparam logic [SelW-1:0] ErrSel = SelW'(N);

  logic [SelW-1:0] a_sel, cur_q;
  logic [CntW-1:0] out_q;
  logic            pass, a_ready_sel, a_hs, d_hs;
  tl_d2h_t         d_src;

  // address decode (lowest index wins when windows overlap)
  always_comb begin
    a_sel = ErrSel;
    for (int i = N - 1; i >= 0; i--) begin
      if ((host_i.a_address & ~MASK[i]) == BASE[i]) a_sel = SelW'(i);
    end
  end

  assign pass = (out_q == '0) || ((a_sel == cur_q) && (out_q < CntW'(MAX_OUT)));

  // error responder: one pending response at a time
  logic            err_valid_q, err_read_q;
  logic [TL_AIW-1:0] err_source_q;
  logic [TL_SZW-1:0] err_size_q;
  tl_d2h_t         err_rsp;

  always_comb begin
    err_rsp          = TL_D2H_IDLE;
    err_rsp.a_ready  = !err_valid_q;
    err_rsp.d_valid  = err_valid_q;
    err_rsp.d_opcode = err_read_q ? AccessAckData : AccessAck;
    err_rsp.d_source = err_source_q;
    err_rsp.d_size   = err_size_q;
    err_rsp.d_error  = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      err_valid_q  <= 1'b0;
      err_read_q   <= 1'b0;
      err_source_q <= '0;
      err_size_q   <= '0;
    end else if (host_i.a_valid && pass && a_sel == ErrSel && !err_valid_q) begin
      err_valid_q  <= 1'b1;
      err_read_q   <= (host_i.a_opcode == Get);
      err_source_q <= host_i.a_source;
      err_size_q   <= host_i.a_size;
    end else if (err_valid_q && host_i.d_ready && cur_q == ErrSel) begin
      err_valid_q  <= 1'b0;
    end
  end

  // channel A steering
  always_comb begin
    for (int i = 0; i < N; i++) begin
      dev_o[i]         = host_i;
      dev_o[i].a_valid = host_i.a_valid && pass && (a_sel == SelW'(i));
      dev_o[i].d_ready = host_i.d_ready && (cur_q == SelW'(i)) && (out_q != '0);
    end
  end

  always_comb begin
    a_ready_sel = err_rsp.a_ready;
    for (int i = 0; i < N; i++) begin
      if (a_sel == SelW'(i)) a_ready_sel = dev_i[i].a_ready;
    end
  end

  // channel D selection
  always_comb begin
    d_src = err_rsp;
    for (int i = 0; i < N; i++) begin
      if (cur_q == SelW'(i)) d_src = dev_i[i];
    end
    host_o         = d_src;
    host_o.d_valid = d_src.d_valid && (out_q != '0);
    host_o.a_ready = pass && a_ready_sel;
  end

  assign a_hs    = host_i.a_valid && host_o.a_ready;
  assign d_hs    = host_o.d_valid && host_i.d_ready;
  assign stall_o = host_i.a_valid && !pass;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q <= '0;
      cur_q <= '0;
    end else begin
      if (a_hs) cur_q <= a_sel;
      case ({a_hs, d_hs})
        2'b10:   out_q <= out_q + 1'b1;
        2'b01:   out_q <= out_q - 1'b1;
        default: ;
      endcase
    end
  end


  // A response may only arrive while a request is outstanding.
  a_d_order: assert property (@(posedge clk_i) disable iff (!rst_ni)
    d_src.d_valid |-> (out_q != '0));


endmodule
