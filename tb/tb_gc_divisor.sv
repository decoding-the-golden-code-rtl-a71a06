// tb_gc_divisor: checks the PAM slicer against a real-number reference.
//
// For random dividends and positive divisors, and for 2-, 4- and 8-PAM, the
// reference is the odd integer nearest to dividend/divisor,
// 2*floor(x/2)+1, clipped to +-(Q-1); delta_pos must be set exactly when
// that point lies above x.  Exact boundaries (x an even integer) round up,
// which the reference reproduces.  Directed cases cover the outer
// saturation and the boundaries.
module tb_gc_divisor;

  localparam int W = 16;
  localparam int SW = 4;

  logic signed [W-1:0]  dividend, divisor;
  logic        [1:0]    log2q;
  logic signed [SW-1:0] s;
  logic                 delta_pos;

  gc_divisor #(.W(W), .LOG2Q_MAX(3)) dut (.dividend, .divisor, .log2q, .s, .delta_pos);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int a, input int b, input int lq);
    int q, s_ref;
    real x;
    bit dp_ref;
    q = 1 << lq;
    dividend = W'(a);
    divisor  = W'(b);
    log2q    = 2'(lq);
    #1;
    x = real'(a) / real'(b);
    s_ref = 2 * int'($floor(x / 2.0)) + 1;
    if (s_ref > q - 1)    s_ref = q - 1;
    if (s_ref < -(q - 1)) s_ref = -(q - 1);
    dp_ref = (longint'(s_ref) * b > a);
    checks++;
    if (int'(s) != s_ref || delta_pos != dp_ref) begin
      failures++;
      $display("FAIL a=%0d b=%0d Q=%0d: s=%0d dpos=%0d, expected %0d %0d",
               a, b, q, s, delta_pos, s_ref, dp_ref);
    end
  endtask

  initial begin
    // directed: boundaries and saturation, divisor 100
    for (int lq = 1; lq <= 3; lq++) begin
      for (int a = -1000; a <= 1000; a += 50) one(a, 100, lq);
      one(32767, 1, lq);
      one(-32768, 1, lq);
      one(0, 32767, lq);
    end
    repeat (20000) begin
      int b, a, lq;
      lq = $urandom_range(3, 1);
      b  = $urandom_range(3000, 1);
      a  = $signed($urandom_range(65535, 0)) - 32768;
      if ($urandom_range(1, 0) == 1) a = a % (b * 10);
      one(a, b, lq);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
