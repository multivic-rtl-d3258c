// tl_host_bfm: TL-UL host bus-functional model for testbenches.
//
// Issues one request at a time: channel A is driven at a falling clock edge
// and held until accepted, then the response is awaited with d_ready high.
// put32/get32 return d_error and the number of clock cycles from the
// accepting edge of channel A to the edge where channel D is taken
// (1 for a device that answers in the next cycle).
module tl_host_bfm
  import mv_pkg::*;
(
  input  logic    clk_i,
  output tl_h2d_t tl_o,
  input  tl_d2h_t tl_i
);

  initial tl_o = '{a_opcode: Get, d_ready: 1'b1, default: '0};

  task automatic access(input logic write, input logic [31:0] addr,
                        input logic [31:0] wdata, input logic [3:0] mask,
                        output logic [31:0] rdata, output logic err,
                        output int lat);
    @(negedge clk_i);
    tl_o.a_valid   = 1'b1;
    tl_o.a_opcode  = write ? ((mask == 4'hF) ? PutFullData : PutPartialData) : Get;
    tl_o.a_size    = 2'd2;
    tl_o.a_address = addr;
    tl_o.a_mask    = mask;
    tl_o.a_data    = wdata;
    tl_o.a_source  = tl_o.a_source + 8'd1;
    tl_o.d_ready   = 1'b1;
    while (!tl_i.a_ready) @(negedge clk_i);
    @(negedge clk_i);
    tl_o.a_valid = 1'b0;
    lat = 1;
    while (!tl_i.d_valid) begin
      @(negedge clk_i);
      lat++;
    end
    rdata = tl_i.d_data;
    err   = tl_i.d_error;
    @(posedge clk_i);
  endtask

  task automatic put32(input logic [31:0] addr, input logic [31:0] data,
                       input logic [3:0] mask = 4'hF);
    logic [31:0] r; logic e; int l;
    access(1'b1, addr, data, mask, r, e, l);
  endtask

  task automatic get32(input logic [31:0] addr, output logic [31:0] data);
    logic e; int l;
    access(1'b0, addr, '0, 4'hF, data, e, l);
  endtask

endmodule
