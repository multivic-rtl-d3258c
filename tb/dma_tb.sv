// dma_tb: self-checking test of the DMA engine.
//
// The DMA's host port drives a behavioural TL-UL memory and its DRAM port a
// behavioural DRAM with random latency; its registers are written through a
// TL-UL host model. Checked: copies in all four directions (scratchpad space
// to scratchpad space, DRAM to scratchpad space, scratchpad space to DRAM,
// DRAM to DRAM) word by word against the source data, register read-back,
// BUSY/DONE/ERROR and the interrupt, the rate of 4 cycles per word against
// one-cycle memories, a zero-size transfer, a misaligned transfer and a
// transfer that hits a bus error. A second pass repeats the copies with a
// memory model that stalls at random.
module dma_tb;
  import mv_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tl_h2d_t   cfg_h2d, host_h2d, host_h2d_r;
  tl_d2h_t   cfg_d2h, host_d2h, host_d2h_f, host_d2h_r;
  dram_req_t dram_req;
  dram_rsp_t dram_rsp;
  logic      irq, busy, use_random = 1'b0;
  int        dram_acc;

  int checks = 0, failures = 0;

  dma dut (
    .clk_i (clk), .rst_ni (rst_n),
    .cfg_tl_i (cfg_h2d), .cfg_tl_o (cfg_d2h),
    .host_tl_o (host_h2d), .host_tl_i (host_d2h),
    .dram_req_o (dram_req), .dram_rsp_i (dram_rsp),
    .irq_o (irq), .busy_o (busy)
  );

  tl_host_bfm cfg (.clk_i (clk), .tl_o (cfg_h2d), .tl_i (cfg_d2h));

  // two memories on the host port: a fast one and a randomly stalling one
  tl_h2d_t host_h2d_f;
  always_comb begin
    host_h2d_f = host_h2d;
    host_h2d_r = host_h2d;
    host_h2d_f.a_valid = host_h2d.a_valid && !use_random;
    host_h2d_r.a_valid = host_h2d.a_valid && use_random;
    host_d2h = use_random ? host_d2h_r : host_d2h_f;
  end

  tl_mem_model #(.RANDOM (1'b0)) mem_f (.clk_i (clk), .rst_ni (rst_n), .tl_i (host_h2d_f), .tl_o (host_d2h_f));
  tl_mem_model #(.RANDOM (1'b1)) mem_r (.clk_i (clk), .rst_ni (rst_n), .tl_i (host_h2d_r), .tl_o (host_d2h_r));
  dram_model   dram (.clk_i (clk), .rst_ni (rst_n), .req_i (dram_req), .rsp_o (dram_rsp), .accesses (dram_acc));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [31:0] mem_peek(logic [31:0] a);
    return use_random ? mem_r.peek(a) : mem_f.peek(a);
  endfunction

  function automatic void mem_poke(logic [31:0] a, logic [31:0] d);
    if (use_random) mem_r.poke(a, d); else mem_f.poke(a, d);
  endfunction

  localparam logic [31:0] R_SRC_LO = DMA_BASE + 32'h00, R_SRC_HI = DMA_BASE + 32'h04,
                          R_DST_LO = DMA_BASE + 32'h08, R_DST_HI = DMA_BASE + 32'h0C,
                          R_SIZE   = DMA_BASE + 32'h10, R_CTRL   = DMA_BASE + 32'h14,
                          R_STATUS = DMA_BASE + 32'h18;

  // program and run one transfer; returns the cycles from GO to DONE
  task automatic run(input logic [63:0] src, input logic [63:0] dst, input int bytes,
                     input logic sdram, input logic ddram, output int cycles,
                     output logic [31:0] status);
    logic [31:0] r;
    cfg.put32(R_SRC_LO, src[31:0]);
    cfg.put32(R_SRC_HI, src[63:32]);
    cfg.put32(R_DST_LO, dst[31:0]);
    cfg.put32(R_DST_HI, dst[63:32]);
    cfg.put32(R_SIZE, 32'(bytes));
    cfg.put32(R_CTRL, {28'd0, 1'b1, ddram, sdram, 1'b0});  // IRQ_EN, no GO
    cfg.get32(R_CTRL, r);
    check(r == {28'd0, 1'b1, ddram, sdram, 1'b0}, "CTRL read-back");
    cfg.get32(R_SIZE, r);
    check(r == 32'(bytes), "SIZE read-back");
    cfg.put32(R_CTRL, {28'd0, 1'b1, ddram, sdram, 1'b1});  // GO
    cycles = 0;
    while (!irq) begin
      @(posedge clk);
      cycles++;
      if (cycles > 200000) break;
    end
    check(irq, "interrupt at end of transfer");
    cfg.get32(R_STATUS, status);
    check(status[0] == 1'b0, "not busy after DONE");
    check(status[1] == 1'b1, "DONE set");
    cfg.put32(R_STATUS, 32'h6);                          // clear DONE and ERROR
    @(negedge clk);
    check(!irq, "interrupt cleared");
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, n;
    logic [31:0] st, w;
    logic [63:0] dbase;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int pass = 0; pass < 2; pass++) begin
      use_random = (pass == 1);
      dbase = 64'h1_2000_0000 + 64'(pass) * 64'h10000;   // above 4 GiB
      // scratchpad space -> scratchpad space
      n = 64;
      for (int i = 0; i < n; i++) mem_poke(32'h1008_0000 + 4*i, 32'hA000_0000 + 32'(i) + 32'(pass << 16));
      run(64'h1008_0000, 64'h1018_0000, 4*n, 1'b0, 1'b0, cyc, st);
      check(st[2] == 1'b0, "no error spm->spm");
      for (int i = 0; i < n; i++)
        check(mem_peek(32'h1018_0000 + 4*i) == 32'hA000_0000 + 32'(i) + 32'(pass << 16), $sformatf("spm->spm word %0d", i));
      if (pass == 0) begin
        // rate: 4 cycles per word, plus the GO write's own cycle and the
        // interrupt sampling edge
        $display("spm->spm %0d words in %0d cycles", n, cyc);
        check(cyc >= 4*n && cyc <= 4*n + 3, $sformatf("rate: %0d cycles for %0d words", cyc, n));
      end
      // DRAM -> scratchpad space
      n = 40;
      for (int i = 0; i < n; i++) dram.poke(dbase + 64'(4*i), $urandom);
      run(dbase, 64'h1000_0100, 4*n, 1'b1, 1'b0, cyc, st);
      check(st[2] == 1'b0, "no error dram->spm");
      for (int i = 0; i < n; i++)
        check(mem_peek(32'h1000_0100 + 4*i) == dram.peek(dbase + 64'(4*i)), $sformatf("dram->spm word %0d", i));
      check(cyc >= 4*n + 3*n, "DRAM latency is visible in the transfer time");
      // scratchpad space -> DRAM
      run(64'h1000_0100, dbase + 64'h8000, 4*n, 1'b0, 1'b1, cyc, st);
      for (int i = 0; i < n; i++)
        check(dram.peek(dbase + 64'h8000 + 64'(4*i)) == mem_peek(32'h1000_0100 + 4*i), $sformatf("spm->dram word %0d", i));
      // DRAM -> DRAM
      run(dbase, dbase + 64'hC000, 4*n, 1'b1, 1'b1, cyc, st);
      for (int i = 0; i < n; i++)
        check(dram.peek(dbase + 64'hC000 + 64'(4*i)) == dram.peek(dbase + 64'(4*i)), $sformatf("dram->dram word %0d", i));
    end
    use_random = 1'b0;
    // zero size: done at once, nothing moved
    n = dram_acc;
    run(64'h1000_0000, 64'h0, 0, 1'b1, 1'b1, cyc, st);
    check(dram_acc == n && st[2] == 1'b0, "zero-size transfer");
    // misaligned size
    run(64'h1000_0000, 64'h1000_1000, 6, 1'b0, 1'b0, cyc, st);
    check(st[2] == 1'b1, "misaligned transfer flagged");
    // bus error on the read side stops the copy
    mem_poke(32'h1000_2000, 32'h1234_5678);
    run(64'h3000_0000, 64'h1000_2000, 16, 1'b0, 1'b0, cyc, st);
    check(st[2] == 1'b1, "bus error flagged");
    check(mem_peek(32'h1000_2000) == 32'h1234_5678, "nothing written after read error");
    // DRAM error on the write side
    run(64'h1000_0000, 64'h100_0000_0000, 8, 1'b0, 1'b1, cyc, st);
    check(st[2] == 1'b1, "DRAM error flagged");
    // register writes are ignored while busy
    cfg.put32(R_SRC_LO, 32'h1008_0000);
    cfg.put32(R_DST_LO, 32'h1010_0000);
    cfg.put32(R_DST_HI, 32'h0);
    cfg.put32(R_SRC_HI, 32'h0);
    cfg.put32(R_SIZE, 32'd256);
    cfg.put32(R_CTRL, 32'h9);
    cfg.put32(R_SIZE, 32'd4);
    cfg.get32(R_STATUS, w);
    check(w[0] == 1'b1, "BUSY while running");
    cfg.get32(R_SIZE, w);
    check(w == 32'd256, "SIZE write ignored while busy");
    wait (irq);
    cfg.put32(R_STATUS, 32'h6);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
