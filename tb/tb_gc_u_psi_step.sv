// tb_gc_u_psi_step: checks the alternative-node unit by running complete
// zig-zag enumerations.  For a random point x = psi/R the first point is
// the nearest odd PAM point and Delta's sign is taken from the true
// x; the unit is then applied Q-1 times, feeding each output point and
// index back.  The visited sequence must contain every point of the
// constellation exactly once, every point must be valid, and the distances
// |s - x| must never decrease (Schnorr-Euchner order).  On each step
// psi_out must equal psi_in - r_col * s (saturated), and the skip flag is
// counted to make sure the mapping constraint was exercised.
module tb_gc_u_psi_step;

  localparam int N = 8, W = 16, SW = 4, KW = 5;

  logic signed [W-1:0]  psi_in [N], r_col [N], psi_out [N];
  logic signed [SW-1:0] s_prev, s_m;
  logic        [KW-1:0] kz, kz_next;
  logic                 delta_pos, skipped, valid;
  logic        [1:0]    log2q;

  gc_u_psi_step #(.N(N), .W(W), .LOG2Q_MAX(3)) dut (
    .psi_in, .r_col, .s_prev, .kz, .delta_pos, .log2q, .s_m, .kz_next,
    .skipped, .valid, .psi_out);

  int checks = 0, failures = 0, n_skip = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2000) begin
      int lq, q, s1, cur, seen;
      real x, dprev, dcur;
      longint d;
      lq = $urandom_range(3, 1);
      q  = 1 << lq;
      x  = (real'($urandom_range(40000, 0)) - 20000.0) / 1000.0 + 0.0001;
      s1 = 2 * int'($floor(x / 2.0)) + 1;
      if (s1 > q - 1)    s1 = q - 1;
      if (s1 < -(q - 1)) s1 = -(q - 1);
      seen  = 1 << ((s1 + q - 1) / 2);
      dprev = (real'(s1) - x) * (real'(s1) - x);
      cur   = s1;
      s_prev    = SW'(s1);
      kz        = KW'(1);
      delta_pos = real'(s1) > x;
      log2q     = 2'(lq);
      for (int k = 2; k <= q; k++) begin
        for (int i = 0; i < N; i++) begin
          psi_in[i] = W'($signed($urandom_range(65535, 0)) - 32768);
          r_col[i]  = W'($signed($urandom_range(8000, 0)) - 4000);
        end
        #1;
        cur = int'(s_m);
        check(valid && cur <= q - 1 && cur >= -(q - 1) && (cur % 2 != 0),
              $sformatf("Q=%0d x=%f step %0d: invalid point %0d", q, x, k, cur));
        if (cur <= q - 1 && cur >= -(q - 1)) begin
          check((seen & (1 << ((cur + q - 1) / 2))) == 0,
                $sformatf("Q=%0d x=%f: point %0d visited twice", q, x, cur));
          seen |= 1 << ((cur + q - 1) / 2);
        end
        dcur = (real'(cur) - x) * (real'(cur) - x);
        check(dcur >= dprev, $sformatf("Q=%0d x=%f: %0d out of distance order", q, x, cur));
        dprev = dcur;
        if (skipped) n_skip++;
        for (int i = 0; i < N; i++) begin
          d = longint'(psi_in[i]) - longint'(r_col[i]) * cur;
          if (d > 32767) d = 32767;
          if (d < -32768) d = -32768;
          check(longint'(psi_out[i]) == d, $sformatf("psi_out[%0d]=%0d expected %0d", i, psi_out[i], d));
        end
        s_prev = s_m;
        kz     = kz_next;
      end
      check(seen == (1 << q) - 1, $sformatf("Q=%0d x=%f: visited set %b", q, x, seen));
    end
    check(n_skip > 0, "mapping constraint never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
