// tb_gc_u_psi: checks the son unit.  For random psi vectors, diagonal
// entries and columns, s_l must be the nearest odd PAM point to
// psi_l/R_ll (clipped), delta_pos its side, and every psi_out[i] must equal
// psi_in[i] - r_col[i]*s_l saturated to 16 bits.
module tb_gc_u_psi;

  localparam int N = 8, W = 16, SW = 4;

  logic signed [W-1:0]  psi_in [N], r_col [N], psi_out [N];
  logic signed [W-1:0]  psi_l, r_ll;
  logic        [1:0]    log2q;
  logic signed [SW-1:0] s_l;
  logic                 delta_pos;

  gc_u_psi #(.N(N), .W(W), .LOG2Q_MAX(3)) dut (
    .psi_in, .psi_l, .r_ll, .r_col, .log2q, .s_l, .delta_pos, .psi_out);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) begin
      int lq, q, l, s_ref;
      longint d;
      real x;
      lq = $urandom_range(3, 1);
      q  = 1 << lq;
      l  = $urandom_range(N - 1, 0);
      for (int i = 0; i < N; i++) begin
        psi_in[i] = W'($signed($urandom_range(65535, 0)) - 32768);
        r_col[i]  = W'($signed($urandom_range(8000, 0)) - 4000);
      end
      r_col[l] = W'($urandom_range(4000, 1));
      if ($urandom_range(1, 0) == 1) psi_in[l] = W'(int'(psi_in[l]) % (int'(r_col[l]) * q));
      psi_l = psi_in[l];
      r_ll  = r_col[l];
      log2q = 2'(lq);
      #1;
      x = real'(psi_l) / real'(r_ll);
      s_ref = 2 * int'($floor(x / 2.0)) + 1;
      if (s_ref > q - 1)    s_ref = q - 1;
      if (s_ref < -(q - 1)) s_ref = -(q - 1);
      checks++;
      if (int'(s_l) != s_ref || delta_pos != (longint'(s_ref) * r_ll > psi_l)) begin
        failures++;
        $display("FAIL slicer: psi=%0d R=%0d Q=%0d got s=%0d expected %0d", psi_l, r_ll, q, s_l, s_ref);
      end
      for (int i = 0; i < N; i++) begin
        d = longint'(psi_in[i]) - longint'(r_col[i]) * s_ref;
        if (d > 32767) d = 32767;
        if (d < -32768) d = -32768;
        checks++;
        if (longint'(psi_out[i]) != d) begin
          failures++;
          $display("FAIL psi_out[%0d]=%0d expected %0d", i, psi_out[i], d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
