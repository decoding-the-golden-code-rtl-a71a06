// tb_gc_metric_compute: checks T_out = T_in + psi^2 against 64-bit
// arithmetic, including the most negative psi and saturation of the sum.
module tb_gc_metric_compute;

  localparam int N = 8, W = 16, MW = 2 * W + 3;

  logic        [MW-1:0] t_in, t_out;
  logic signed [W-1:0]  psi_l;

  gc_metric_compute #(.N(N), .W(W)) dut (.t_in, .psi_l, .t_out);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input longint t, input int p);
    longint e, maxv;
    maxv = (longint'(1) << MW) - 1;
    t_in  = MW'(t);
    psi_l = W'(p);
    #1;
    e = t + longint'(p) * longint'(p);
    if (e > maxv) e = maxv;
    checks++;
    if (longint'(t_out) != e) begin
      failures++;
      $display("FAIL t=%0d psi=%0d: got %0d expected %0d", t, p, t_out, e);
    end
  endtask

  initial begin
    one(0, 0);
    one(0, -32768);
    one(0, 32767);
    one(5, -3);
    one((longint'(1) << MW) - 10, 100);
    one((longint'(1) << MW) - 1, 0);
    repeat (5000) begin
      longint t;
      t = longint'($urandom()) * 4 + longint'($urandom_range(3, 0));
      one(t, $signed($urandom_range(65535, 0)) - 32768);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
