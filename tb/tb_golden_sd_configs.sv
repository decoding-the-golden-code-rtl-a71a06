// tb_golden_sd_configs: the decoder in other static configurations.
//   * N=8, W=12, 4-/16-QAM only: the 16-QAM parametrizable build with the
//     12-bit datapath of the width study;
//   * N=8, W=14, up to 64-QAM: the 14-bit flexible build;
//   * N=12, W=16, up to 16-QAM: a deeper tree, as for a larger code;
//   * N=6, W=16, up to 64-QAM: a depth that is not a power of two.
// Each configuration is checked against exact ML by gc_cfg_runner.
module tb_golden_sd_configs;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int c [4], f [4];
  logic fin [4];

  gc_cfg_runner #(.N(8),  .W(12), .LOG2Q_MAX(2)) run_a (.clk, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  gc_cfg_runner #(.N(8),  .W(14), .LOG2Q_MAX(3)) run_b (.clk, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  gc_cfg_runner #(.N(12), .W(16), .LOG2Q_MAX(2)) run_c (.clk, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  gc_cfg_runner #(.N(6),  .W(16), .LOG2Q_MAX(3)) run_d (.clk, .checks(c[3]), .failures(f[3]), .finished(fin[3]));

  int checks, failures;

  initial begin
    fork
      begin
        wait (fin[0] && fin[1] && fin[2] && fin[3]);
      end
      begin
        repeat (2000000) @(posedge clk);
        $display("watchdog expired");
        failures = 1;
      end
    join_any
    checks = c[0] + c[1] + c[2] + c[3];
    failures += f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
