// tl_mem_model: behavioural TL-UL memory for testbenches.
//
// With RANDOM = 0 it behaves like a scratchpad port: always ready, response
// in the next cycle. With RANDOM = 1, a_ready is random and responses are
// delayed by up to three further cycles (one request at a time). Storage is
// sparse; addresses with bits 31:28 equal to 0x3 answer with d_error.
module tl_mem_model
  import mv_pkg::*;
#(
  parameter bit RANDOM = 1'b0
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_i,
  output tl_d2h_t tl_o
);

  logic [31:0] mem [int unsigned];
  logic        busy;
  int          wait_cnt;

  function automatic logic [31:0] peek(logic [31:0] addr);
    return mem.exists(addr >> 2) ? mem[addr >> 2] : 32'h0;
  endfunction

  function automatic void poke(logic [31:0] addr, logic [31:0] data);
    mem[addr >> 2] = data;
  endfunction

  initial begin
    tl_o = TL_D2H_IDLE;
    tl_o.a_ready = 1'b1;
    busy = 1'b0;
  end

  always @(posedge clk_i) begin
    logic [31:0] d;
    if (!rst_ni) begin
      tl_o <= '{a_ready: 1'b1, d_opcode: AccessAck, default: '0};
      busy <= 1'b0;
    end else begin
      if (tl_o.d_valid && tl_i.d_ready) begin
        tl_o.d_valid <= 1'b0;
        busy         <= 1'b0;
        tl_o.a_ready <= RANDOM ? ($urandom_range(1) == 1) : 1'b1;
      end
      if (tl_i.a_valid && tl_o.a_ready) begin
        d = '0;
        if (tl_i.a_address[31:28] != 4'h3) begin
          if (tl_i.a_opcode == Get) d = peek(tl_i.a_address);
          else poke(tl_i.a_address, tl_i.a_data);
        end
        tl_o.d_opcode <= (tl_i.a_opcode == Get) ? AccessAckData : AccessAck;
        tl_o.d_source <= tl_i.a_source;
        tl_o.d_size   <= tl_i.a_size;
        tl_o.d_data   <= d;
        tl_o.d_error  <= (tl_i.a_address[31:28] == 4'h3);
        wait_cnt       = RANDOM ? $urandom_range(3) : 0;
        busy          <= 1'b1;
        tl_o.a_ready  <= 1'b0;
        if (wait_cnt == 0) tl_o.d_valid <= 1'b1;
      end else if (busy && !tl_o.d_valid) begin
        if (wait_cnt <= 1) tl_o.d_valid <= 1'b1;
        wait_cnt--;
      end else if (!busy && !(tl_o.d_valid && tl_i.d_ready)) begin
        tl_o.a_ready <= RANDOM ? ($urandom_range(1) == 1) : 1'b1;
      end
    end
  end

endmodule
