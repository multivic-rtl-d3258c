// xbar_periph_tb: self-checking test of the peripheral crossbar.
//
// A pipelined host issues random Get/Put requests, with several in flight,
// to the D-SPM, DMA, timer and UART windows and to unmapped addresses,
// and takes responses with a random d_ready. The expected device for each
// address is worked out from the address map written out in this file, not
// from the crossbar. Every response is checked for order (d_source), the
// device that produced it (the device model returns its ID in d_data), the
// opcode and d_error. The test also requires the ordering stall (a request
// to another device held back while responses are pending) to have happened.
module xbar_periph_tb;
  import mv_pkg::*;

  localparam int unsigned ND = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tl_h2d_t          h2d;
  tl_d2h_t          d2h;
  tl_h2d_t [ND-1:0] dev_h2d;
  tl_d2h_t [ND-1:0] dev_d2h;
  logic             stall;
  int               hits [ND];

  int checks = 0, failures = 0;

  xbar_periph dut (
    .clk_i (clk), .rst_ni (rst_n),
    .mgmt_i (h2d), .mgmt_o (d2h),
    .dev_o (dev_h2d), .dev_i (dev_d2h),
    .stall_o (stall)
  );

  for (genvar i = 0; i < ND; i++) begin : g_dev
    tl_dev_model #(.ID (8'(i + 1))) u_dev (
      .clk_i (clk), .rst_ni (rst_n),
      .tl_i (dev_h2d[i]), .tl_o (dev_d2h[i]), .hits (hits[i])
    );
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Independent statement of the address map: device index or -1.
  function automatic int expected_dev(logic [31:0] a);
    if (a[31:16] == 16'h0010) return 0;
    if (a[31:12] == 20'h02000) return 1;
    if (a[31:12] == 20'h02001) return 2;
    if (a[31:12] == 20'h02002) return 3;
    return -1;
  endfunction

  function automatic logic [31:0] random_addr();
    int unsigned k = $urandom_range(5);
    logic [31:0] ofs = {$urandom} & 32'h0000_0FFC;
    case (k)
      0: return 32'h0010_0000 | ({$urandom} & 32'h0000_FFFC);
      1: return 32'h0200_0000 | ofs;
      2: return 32'h0200_1000 | ofs;
      3: return 32'h0200_2000 | ofs;
      4: return 32'h0200_3000 | ofs;      // unmapped
      default: return 32'h0000_0000 | ofs; // management I-SPM: not reachable here
    endcase
  endfunction

  typedef struct {
    logic [7:0]  source;
    logic        read;
    logic [31:0] addr;
  } exp_t;

  exp_t exp_q[$];
  int   sent = 0, received = 0, stalls = 0, errors_seen = 0;
  localparam int NREQ = 3000;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    exp_t e;
    int   dv;
    if (rst_n) begin
      if (h2d.a_valid && stall) stalls++;
      if (d2h.d_valid && h2d.d_ready) begin
        check(exp_q.size() > 0, "response without request");
        if (exp_q.size() > 0) begin
          e  = exp_q.pop_front();
          dv = expected_dev(e.addr);
          check(d2h.d_source == e.source, $sformatf("order: source %0d vs %0d", d2h.d_source, e.source));
          check(d2h.d_opcode == (e.read ? AccessAckData : AccessAck), "opcode");
          if (dv < 0) begin
            check(d2h.d_error, $sformatf("error for unmapped %h", e.addr));
            errors_seen++;
          end else begin
            check(!d2h.d_error, $sformatf("no error for %h", e.addr));
            if (e.read)
              check(d2h.d_data == {8'(dv + 1), e.addr[23:0]},
                    $sformatf("data %h for %h (dev %0d)", d2h.d_data, e.addr, dv));
          end
          received++;
        end
      end
      if (h2d.a_valid && d2h.a_ready) begin
        exp_q.push_back('{source: h2d.a_source, read: (h2d.a_opcode == Get), addr: h2d.a_address});
        sent++;
        if (sent < NREQ && $urandom_range(4) != 0) begin
          h2d.a_valid   <= 1'b1;
          h2d.a_address <= random_addr();
          h2d.a_opcode  <= $urandom_range(1) ? Get : PutFullData;
          h2d.a_source  <= h2d.a_source + 8'd1;
          h2d.a_data    <= $urandom;
        end else begin
          h2d.a_valid <= 1'b0;
        end
      end else if (!h2d.a_valid && sent < NREQ && $urandom_range(1) == 0) begin
        h2d.a_valid   <= 1'b1;
        h2d.a_address <= random_addr();
        h2d.a_opcode  <= $urandom_range(1) ? Get : PutFullData;
        h2d.a_source  <= h2d.a_source + 8'd1;
        h2d.a_data    <= $urandom;
      end
      h2d.d_ready <= ($urandom_range(3) != 0);
    end
  end

  initial begin
    h2d = '{a_opcode: Get, a_size: 2'd2, a_mask: 4'hF, default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (sent == NREQ && received == NREQ);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all responses received");
    check(stalls > 0, $sformatf("ordering stall happened (%0d)", stalls));
    check(errors_seen > 0, "unmapped addresses answered with errors");
    for (int i = 0; i < ND; i++) check(hits[i] > 0, $sformatf("device %0d reached", i));
    $display("stalls=%0d errors=%0d", stalls, errors_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
