// multivic_configs_tb: the matrix multiplication benchmark on the three
// evaluated configurations other than the default: Dual (2 workers, 512 KiB
// data scratchpads), Quad (4 workers, 256 KiB) and Hexadeca (16 workers,
// 64 KiB, 34 scratchpads on the main crossbar). The three systems run side by
// side; the matrix size is kept small (N = 16 or 32) so the run stays short.
// The default Octa configuration is covered by multivic_top_tb.
module multivic_configs_tb;

  logic done [3];
  int   chk [3], fail [3];

  matmul_config_run #(.NW (2),  .DSPM_SIZE (524288), .N (16), .NAME ("Dual"))
    u_dual (.done (done[0]), .checks (chk[0]), .failures (fail[0]));
  matmul_config_run #(.NW (4),  .DSPM_SIZE (262144), .N (16), .NAME ("Quad"))
    u_quad (.done (done[1]), .checks (chk[1]), .failures (fail[1]));
  matmul_config_run #(.NW (16), .DSPM_SIZE (65536),  .N (32), .NAME ("Hexadeca"))
    u_hexa (.done (done[2]), .checks (chk[2]), .failures (fail[2]));

  initial begin : watchdog
    repeat (2_000_000) @(posedge u_hexa.clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2],
             fail[0] + fail[1] + fail[2] + 1);
    $finish;
  end

  initial begin
    wait (done[0] && done[1] && done[2]);
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2],
             fail[0] + fail[1] + fail[2]);
    $finish;
  end

endmodule
