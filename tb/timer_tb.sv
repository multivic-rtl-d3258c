// timer_tb: self-checking test of the timer.
//
// Checks that MTIME counts exactly one per clock cycle while enabled and
// stands still while disabled, that MTIME can be written (including the
// carry into the upper word), that the upper word read after the lower word
// belongs to the same 64-bit value, and that the compare interrupt fires at
// the programmed cycle, obeys INTR_EN and is cleared by writing 1.
module timer_tb;
  import mv_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tl_h2d_t h2d;
  tl_d2h_t d2h;
  logic    irq;
  longint  cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;

  timer dut (.clk_i (clk), .rst_ni (rst_n), .tl_i (h2d), .tl_o (d2h), .irq_o (irq));
  tl_host_bfm bfm (.clk_i (clk), .tl_o (h2d), .tl_i (d2h));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  localparam logic [31:0] CTRL = TIMER_BASE + 32'h00, MT_LO = TIMER_BASE + 32'h04,
                          MT_HI = TIMER_BASE + 32'h08, CMP_LO = TIMER_BASE + 32'h0C,
                          CMP_HI = TIMER_BASE + 32'h10, IEN = TIMER_BASE + 32'h14,
                          ISTATE = TIMER_BASE + 32'h18;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, b, hi;
    longint c0, c1, t_fire;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    bfm.get32(MT_LO, a);
    check(a == 0, "disabled after reset");
    repeat (10) @(posedge clk);
    bfm.get32(MT_LO, a);
    check(a == 0, "does not count while disabled");

    bfm.put32(CTRL, 32'h1);
    // two reads: the count difference must equal the cycle difference
    for (int k = 0; k < 5; k++) begin
      bfm.get32(MT_LO, a); c0 = cyc;
      repeat ($urandom_range(40)) @(posedge clk);
      bfm.get32(MT_LO, b); c1 = cyc;
      check(longint'(b - a) == c1 - c0, $sformatf("count rate: %0d vs %0d cycles", b - a, c1 - c0));
    end
    // carry into the upper word and coherent 64-bit read
    bfm.put32(CTRL, 32'h0);
    bfm.put32(MT_HI, 32'h0000_0007);
    bfm.put32(MT_LO, 32'hFFFF_FFF0);
    bfm.put32(CTRL, 32'h1);
    repeat (30) @(posedge clk);
    bfm.get32(MT_LO, a);
    bfm.get32(MT_HI, hi);
    check(hi == 32'h8, $sformatf("carry into upper word (%h)", hi));
    check(a > 32'd10 && a < 32'd100, $sformatf("lower word after wrap (%h)", a));
    bfm.put32(CTRL, 32'h0);
    bfm.put32(MT_HI, 32'h0000_0001);
    bfm.put32(MT_LO, 32'hFFFF_FFFE);
    bfm.put32(CTRL, 32'h1);
    bfm.get32(MT_LO, a);
    repeat (5) @(posedge clk);
    bfm.get32(MT_HI, hi);
    check(a != 32'hFFFF_FFFE && hi == (a < 32'h8000_0000 ? 32'd2 : 32'd1), "upper word shadowed at lower read");

    // compare interrupt
    bfm.put32(CTRL, 32'h0);
    bfm.put32(MT_HI, 32'h0);
    bfm.put32(MT_LO, 32'h0);
    bfm.put32(CMP_HI, 32'h0);
    bfm.put32(CMP_LO, 32'd500);
    bfm.put32(IEN, 32'h1);
    bfm.put32(ISTATE, 32'h1);
    check(!irq, "no interrupt before start");
    bfm.put32(CTRL, 32'h1);
    c0 = cyc;
    wait (irq);
    t_fire = cyc - c0;
    check(t_fire >= 499 && t_fire <= 503, $sformatf("interrupt after %0d cycles (compare 500)", t_fire));
    bfm.put32(IEN, 32'h0);
    @(negedge clk);
    check(!irq, "INTR_EN masks interrupt");
    bfm.get32(ISTATE, a);
    check(a == 1, "INTR_STATE set");
    bfm.put32(CMP_LO, 32'hFFFF_FFFF);
    bfm.put32(CMP_HI, 32'hFFFF_FFFF);
    bfm.put32(ISTATE, 32'h1);
    bfm.get32(ISTATE, a);
    check(a == 0, "INTR_STATE cleared");
    bfm.get32(CMP_LO, a);
    check(a == 32'hFFFF_FFFF, "CMP read-back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
