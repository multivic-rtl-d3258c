// worker_model: behavioural stand-in for one worker core (RISC-V core with
// vector unit) running the worker runtime, for system testbenches.
//
// It only uses the two core ports, exactly like a real core would: it
// fetches from its I-SPM and loads/stores to its D-SPM, one access at a
// time, each answered in the next cycle. The runtime polls the command word
// of the status area at the start of the D-SPM. A non-zero command is a
// function pointer: the runtime sets the BUSY bit of the status word, clears
// the command word, "jumps" there (it fetches the first PROG_WORDS
// instruction words at the pointer and checks them against the expected
// program image), runs the function, and writes the status word back with
// BUSY clear and the execution counter incremented.
//
// The only function is the matrix-multiplication kernel of the benchmark:
// one row a of A (N words at A_OFS) times the resident column block of B
// (N rows of BW words at B_OFS, row-major) gives BW words of a row of C
// (written at C_OFS). Arithmetic is 32-bit integer, wrapping; the real
// kernel would use the vector unit, which does not change the data flow.
//
// exec_min/exec_max record the shortest and longest run of the function in
// cycles; with interference-free scratchpads they must be equal.
//
// Status word: bit 0 BUSY, bits 31:16 number of finished executions.
// The runtime starts when start_i is high, which stands for the release of
// the core after its program and status area have been loaded.
module worker_model
  import mv_pkg::*;
#(
  parameter int unsigned ID         = 0,
  parameter int unsigned N          = 32,
  parameter int unsigned BW         = 4,
  parameter int unsigned PROG_WORDS = 8,
  parameter logic [31:0] A_OFS      = 32'h100,
  parameter logic [31:0] C_OFS      = 32'h800,
  parameter logic [31:0] B_OFS      = 32'h1000
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      start_i,     // core released (program and status area loaded)
  output core_req_t instr_req_o,
  input  core_rsp_t instr_rsp_i,
  output core_req_t data_req_o,
  input  core_rsp_t data_rsp_i,
  output int        executions,
  output int        bad_fetches,
  output int        bad_timing,
  output longint    exec_min,    // shortest and longest kernel run, in cycles
  output longint    exec_max
);

  localparam logic [31:0] CMD    = WORKER_DSPM_BASE + 32'h0;
  localparam logic [31:0] STATUS = WORKER_DSPM_BASE + 32'h4;

  initial begin
    instr_req_o = '0;
    data_req_o  = '0;
    executions  = 0;
    bad_fetches = 0;
    bad_timing  = 0;
    exec_min    = 0;
    exec_max    = 0;
  end

  longint cyc = 0;
  always @(posedge clk_i) cyc++;

  // Expected program word k of the worker image (same binary on all workers).
  function automatic logic [31:0] prog_word(int unsigned k);
    return 32'h0000_0013 | (32'(k) << 20) | 32'h0700_0000;
  endfunction

  task automatic dacc(input logic we, input logic [31:0] addr, input logic [31:0] wdata,
                      output logic [31:0] rdata);
    @(negedge clk_i);
    data_req_o = '{req: 1'b1, we: we, be: 4'hF, addr: addr, wdata: wdata};
    @(negedge clk_i);
    data_req_o.req = 1'b0;
    if (!data_rsp_i.rvalid || data_rsp_i.err) bad_timing++;
    rdata = data_rsp_i.rdata;
  endtask

  task automatic fetch(input logic [31:0] addr, output logic [31:0] rdata);
    @(negedge clk_i);
    instr_req_o = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: addr, wdata: '0};
    @(negedge clk_i);
    instr_req_o.req = 1'b0;
    if (!instr_rsp_i.rvalid || instr_rsp_i.err) bad_timing++;
    rdata = instr_rsp_i.rdata;
  endtask

  initial begin
    logic [31:0] cmd, d, a, b, acc;
    longint t0, dt;
    wait (rst_ni && start_i);
    forever begin
      dacc(1'b0, CMD, '0, cmd);
      if (cmd != 0) begin
        dacc(1'b1, STATUS, {16'(executions), 15'd0, 1'b1}, d);
        dacc(1'b1, CMD, 32'h0, d);
        t0 = cyc;
        for (int unsigned k = 0; k < PROG_WORDS; k++) begin
          fetch(cmd + 4*k, d);
          if (d != prog_word(k)) bad_fetches++;
        end
        for (int unsigned j = 0; j < BW; j++) begin
          acc = '0;
          for (int unsigned k = 0; k < N; k++) begin
            dacc(1'b0, WORKER_DSPM_BASE + A_OFS + 4*k, '0, a);
            dacc(1'b0, WORKER_DSPM_BASE + B_OFS + 4*(k*BW + j), '0, b);
            acc += a * b;
          end
          dacc(1'b1, WORKER_DSPM_BASE + C_OFS + 4*j, acc, d);
        end
        dt = cyc - t0;
        if (executions == 0 || dt < exec_min) exec_min = dt;
        if (executions == 0 || dt > exec_max) exec_max = dt;
        executions++;
        dacc(1'b1, STATUS, {16'(executions), 16'd0}, d);
      end
    end
  end

endmodule
