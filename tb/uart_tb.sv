// uart_tb: self-checking test of the UART.
//
// The transmitter output is decoded by a serial receiver model written in
// this file (sampling in the middle of each bit at the programmed divisor),
// and the receiver input is driven by a serial transmitter model. Checked:
// transmitted bytes and the bit time, received bytes, RX_VALID and the
// interrupt, overrun and frame-error flags.
module uart_tb;
  import mv_pkg::*;

  localparam int DIV = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tl_h2d_t h2d;
  tl_d2h_t d2h;
  logic    tx, rx = 1'b1, irq;

  int checks = 0, failures = 0;

  uart #(.DEFAULT_DIV (868)) dut (
    .clk_i (clk), .rst_ni (rst_n), .tl_i (h2d), .tl_o (d2h),
    .tx_o (tx), .rx_i (rx), .irq_o (irq)
  );
  tl_host_bfm bfm (.clk_i (clk), .tl_o (h2d), .tl_i (d2h));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  localparam logic [31:0] CTRL = UART_BASE + 32'h0, STATUS = UART_BASE + 32'h4,
                          WDATA = UART_BASE + 32'h8, RDATA = UART_BASE + 32'hC;

  // serial receiver model on tx
  logic [7:0] txq[$];
  int         bit_time = 0;
  initial begin
    logic [7:0] b;
    int t0;
    forever begin
      @(negedge tx);
      t0 = 0;
      repeat (DIV / 2) @(posedge clk);
      if (tx !== 1'b0) continue;
      for (int i = 0; i < 8; i++) begin
        repeat (DIV) @(posedge clk);
        b[i] = tx;
      end
      repeat (DIV) @(posedge clk);
      check(tx == 1'b1, "stop bit on tx");
      txq.push_back(b);
    end
  end

  // measure one bit time on tx: the start bit of the first byte (0x55,
  // whose bit 0 is 1)
  initial begin
    @(negedge tx);
    @(negedge clk);
    while (tx == 1'b0 && bit_time < 10 * DIV) begin
      bit_time++;
      @(negedge clk);
    end
  end

  task automatic send_serial(input logic [7:0] b, input logic stop);
    rx = 1'b0;
    repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rx = b[i];
      repeat (DIV) @(posedge clk);
    end
    rx = stop;
    repeat (DIV) @(posedge clk);
    rx = 1'b1;
    repeat (2 * DIV) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    logic [7:0]  bytes [5] = '{8'h55, 8'hA3, 8'h00, 8'hFF, 8'h3C};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    bfm.get32(CTRL, r);
    check(r[15:0] == 16'd868, "reset divisor");
    bfm.put32(CTRL, 32'(DIV) | 32'h1_0000);

    // transmit
    foreach (bytes[i]) begin
      bfm.put32(WDATA, {24'd0, bytes[i]});
      bfm.get32(STATUS, r);
      check(r[0] == 1'b1, "TX_BUSY while sending");
      do bfm.get32(STATUS, r); while (r[0]);
    end
    repeat (2 * DIV) @(posedge clk);
    check(txq.size() == 5, $sformatf("5 bytes sent (%0d)", txq.size()));
    foreach (bytes[i]) if (txq.size() > 0) check(txq.pop_front() == bytes[i], "tx byte");
    check(bit_time == DIV, $sformatf("bit time %0d cycles", bit_time));

    // receive
    foreach (bytes[i]) begin
      send_serial(bytes[i], 1'b1);
      check(irq, "rx interrupt");
      bfm.get32(STATUS, r);
      check(r[1] == 1'b1, "RX_VALID");
      bfm.get32(RDATA, r);
      check(r[7:0] == bytes[i], $sformatf("rx byte %h vs %h", r[7:0], bytes[i]));
      bfm.get32(STATUS, r);
      check(r[1] == 1'b0 && !irq, "RX_VALID cleared by read");
    end
    // overrun
    send_serial(8'h11, 1'b1);
    send_serial(8'h22, 1'b1);
    bfm.get32(STATUS, r);
    check(r[2] == 1'b1, "overrun flagged");
    bfm.get32(RDATA, r);
    check(r[7:0] == 8'h22, "newest byte kept");
    bfm.put32(STATUS, 32'h4);
    // frame error
    send_serial(8'h5A, 1'b0);
    bfm.get32(STATUS, r);
    check(r[3] == 1'b1 && r[1] == 1'b0, "frame error flagged, no data");
    bfm.put32(STATUS, 32'h8);
    bfm.get32(STATUS, r);
    check(r[3:2] == 2'b00, "error flags cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
