// tl_dev_model: behavioural TL-UL device for crossbar testbenches.
//
// Accepts requests with a random a_ready, keeps up to four of them and
// answers each, in order, after a random delay of one to four cycles.
// A Get returns {ID, address[23:0]} so that the testbench can tell which
// device answered and for which address; a Put returns AccessAck.
// hits counts the accepted requests.
module tl_dev_model
  import mv_pkg::*;
#(
  parameter logic [7:0] ID = 8'h00
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_i,
  output tl_d2h_t tl_o,
  output int      hits
);

  typedef struct {
    logic [7:0]  source;
    logic        read;
    logic [31:0] addr;
    longint      due;
  } pend_t;

  pend_t  q[$];
  longint cyc = 0;

  initial begin
    tl_o = TL_D2H_IDLE;
    hits = 0;
  end

  always @(posedge clk_i) begin
    pend_t p;
    cyc++;
    if (!rst_ni) begin
      q.delete();
      tl_o <= TL_D2H_IDLE;
    end else begin
      if (tl_o.d_valid && tl_i.d_ready) void'(q.pop_front());
      if (tl_i.a_valid && tl_o.a_ready) begin
        p.source = tl_i.a_source;
        p.read   = (tl_i.a_opcode == Get);
        p.addr   = tl_i.a_address;
        p.due    = cyc + longint'($urandom_range(3));
        q.push_back(p);
        hits++;
      end
      tl_o.a_ready <= (q.size() < 4) && ($urandom_range(3) != 0);
      if (q.size() > 0 && q[0].due <= cyc) begin
        tl_o.d_valid  <= 1'b1;
        tl_o.d_opcode <= q[0].read ? AccessAckData : AccessAck;
        tl_o.d_source <= q[0].source;
        tl_o.d_size   <= 2'd2;
        tl_o.d_data   <= q[0].read ? {ID, q[0].addr[23:0]} : 32'h0;
        tl_o.d_error  <= 1'b0;
      end else begin
        tl_o.d_valid  <= 1'b0;
      end
    end
  end

endmodule
