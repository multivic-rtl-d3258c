// spm_tb: self-checking test of the dual-port scratchpad.
//
// Checks, against a reference array kept in the testbench: port A and port B
// reads and writes with byte enables, the one-cycle response of both ports,
// simultaneous accesses on both ports in the same cycle (neither may be
// delayed), the rule that port B wins a same-word write, and the error
// response beyond SIZE_BYTES inside the decoded window.
module spm_tb;
  import mv_pkg::*;

  localparam int unsigned SIZE = 1024;
  localparam int unsigned WIN  = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  core_req_t creq;
  core_rsp_t crsp;
  tl_h2d_t   tl_h2d;
  tl_d2h_t   tl_d2h;

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [SIZE/4];

  spm #(.SIZE_BYTES (SIZE), .WIN_BYTES (WIN)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_req_i (creq), .core_rsp_o (crsp),
    .tl_i (tl_h2d), .tl_o (tl_d2h)
  );

  tl_host_bfm bfm (.clk_i (clk), .tl_o (tl_h2d), .tl_i (tl_d2h));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  // port A access: request at a falling edge, response expected exactly one
  // cycle later
  task automatic core_access(input logic we, input logic [31:0] addr,
                             input logic [31:0] wdata, input logic [3:0] be,
                             output logic [31:0] rdata, output logic err);
    @(negedge clk);
    creq = '{req: 1'b1, we: we, be: be, addr: addr, wdata: wdata};
    #1;
    check(crsp.gnt, "port A grant in request cycle");
    @(negedge clk);
    creq.req = 1'b0;
    check(crsp.rvalid, "port A rvalid one cycle after request");
    rdata = crsp.rdata;
    err   = crsp.err;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, w, a; logic e; int lat;
    logic [3:0] be;
    creq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // fill through port A
    for (int i = 0; i < SIZE/4; i++) begin
      w = $urandom;
      ref_mem[i] = w;
      core_access(1'b1, 32'h8_0000 + 4*i, w, 4'hF, r, e);
    end
    // read back through port B with the one-cycle latency check
    for (int i = 0; i < SIZE/4; i += 7) begin
      bfm.access(1'b0, 32'h1000_0000 + 4*i, '0, 4'hF, r, e, lat);
      check(r == ref_mem[i] && !e, $sformatf("port B read %0d", i));
      check(lat == 1, $sformatf("port B latency %0d", lat));
    end
    // random partial writes on both ports, read back on the other port
    for (int n = 0; n < 200; n++) begin
      a  = $urandom_range(SIZE/4 - 1);
      w  = $urandom;
      be = 4'($urandom);
      if (n % 2 == 0) begin
        bfm.access(1'b1, 4*a, w, be, r, e, lat);
        check(lat == 1 && !e, "port B write latency");
      end else begin
        core_access(1'b1, 4*a, w, be, r, e);
      end
      ref_mem[a] = merge(ref_mem[a], w, be);
      if (n % 2 == 0) core_access(1'b0, 4*a, '0, 4'hF, r, e);
      else            bfm.access(1'b0, 4*a, '0, 4'hF, r, e, lat);
      check(r == ref_mem[a], $sformatf("read back word %0d", a));
    end
    // simultaneous accesses: port A reads word 3 while port B writes word 5,
    // both in the same cycle; neither may be delayed
    fork
      bfm.access(1'b1, 4*5, 32'hCAFE_0005, 4'hF, r, e, lat);
      begin
        logic [31:0] ra; logic ea;
        core_access(1'b0, 4*3, '0, 4'hF, ra, ea);
        check(ra == ref_mem[3], "port A read during port B write");
      end
    join
    check(lat == 1, "port B not delayed by port A");
    ref_mem[5] = 32'hCAFE_0005;
    // same-word write on both ports: port B wins
    fork
      bfm.access(1'b1, 4*9, 32'hBBBB_BBBB, 4'hF, r, e, lat);
      begin
        @(negedge clk);
        creq = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 4*9, wdata: 32'hAAAA_AAAA};
        @(negedge clk);
        creq.req = 1'b0;
      end
    join
    core_access(1'b0, 4*9, '0, 4'hF, r, e);
    check(r == 32'hBBBB_BBBB, "port B wins same-word write");
    core_access(1'b0, 4*5, '0, 4'hF, r, e);
    check(r == 32'hCAFE_0005, "simultaneous write landed");
    // out of range inside the window
    bfm.access(1'b0, SIZE + 8, '0, 4'hF, r, e, lat);
    check(e, "port B error beyond size");
    core_access(1'b0, SIZE + 8, '0, 4'hF, r, e);
    check(e, "port A error beyond size");
    bfm.access(1'b0, 8, '0, 4'hF, r, e, lat);
    check(!e, "no error inside size");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
