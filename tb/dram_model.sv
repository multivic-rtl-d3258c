// dram_model: behavioural model of the DDR4 main memory behind its memory
// controller, as seen from the DMA port.
//
// Requests are granted with a random delay; each granted request is
// answered in order, after LAT_MIN..LAT_MAX cycles, with one rvalid pulse
// (read data, or the acknowledge of a write). The random latency stands for
// the varying access time of a real DRAM (refresh, row misses); a static
// schedule has to budget LAT_MAX. Storage is sparse (an associative array of
// 32-bit words); words never written read as 0. peek/poke give testbenches
// direct access. Addresses at or above 2**ERR_ABOVE_BIT bytes answer with err.
module dram_model
  import mv_pkg::*;
#(
  parameter int unsigned LAT_MIN       = 4,
  parameter int unsigned LAT_MAX       = 12,
  parameter int unsigned ERR_ABOVE_BIT = 40
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  dram_req_t req_i,
  output dram_rsp_t rsp_o,
  output int        accesses
);

  logic [31:0] mem [longint unsigned];

  typedef struct {
    logic [31:0] data;
    logic        err;
    longint      due;
  } rsp_t;

  rsp_t   q[$];
  longint cyc = 0;
  logic   gnt_q;

  function automatic logic [31:0] peek(longint unsigned addr);
    return mem.exists(addr >> 2) ? mem[addr >> 2] : 32'h0;
  endfunction

  function automatic void poke(longint unsigned addr, logic [31:0] data);
    mem[addr >> 2] = data;
  endfunction

  initial begin
    rsp_o    = '0;
    gnt_q    = 1'b0;
    accesses = 0;
  end

  assign rsp_o.gnt = gnt_q && req_i.req;

  always @(posedge clk_i) begin
    rsp_t r;
    logic [31:0] old;
    cyc++;
    if (!rst_ni) begin
      q.delete();
      rsp_o.rvalid <= 1'b0;
      gnt_q        <= 1'b0;
    end else begin
      if (req_i.req && gnt_q) begin
        accesses++;
        r.err = (req_i.addr >> ERR_ABOVE_BIT) != 0;
        r.due = cyc + longint'($urandom_range(LAT_MAX - 1, LAT_MIN - 1));
        if (q.size() > 0 && r.due < q[q.size()-1].due) r.due = q[q.size()-1].due + 1;
        r.data = '0;
        if (!r.err) begin
          if (req_i.we) begin
            old = peek(req_i.addr);
            for (int b = 0; b < 4; b++) if (req_i.be[b]) old[8*b +: 8] = req_i.wdata[8*b +: 8];
            poke(req_i.addr, old);
          end else begin
            r.data = peek(req_i.addr);
          end
        end
        q.push_back(r);
      end
      gnt_q <= ($urandom_range(2) != 0);
      if (q.size() > 0 && q[0].due <= cyc) begin
        r = q.pop_front();
        rsp_o.rvalid <= 1'b1;
        rsp_o.rdata  <= r.data;
        rsp_o.err    <= r.err;
      end else begin
        rsp_o.rvalid <= 1'b0;
      end
    end
  end

endmodule
