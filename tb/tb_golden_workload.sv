// tb_golden_workload: Golden code transmissions over a Rayleigh 2x2 channel
// at 20 dB SNR, decoded by the core at its default size, for 4-, 16- and
// 64-QAM; then uncoded 16-QAM over a Rayleigh 4x4 channel, which gives the
// same 8-level real tree (four complex symbols per channel use).
//
// For each codeword the testbench draws four QAM symbols a, b, c, d, builds
// the Golden codeword
//     X = 1/sqrt(5) [ alpha(a + b theta)         alpha(c + d theta)        ]
//                   [ i sigma(alpha)(c + d sigma(theta))  sigma(alpha)(a + b sigma(theta)) ]
// with theta = (1+sqrt5)/2, sigma(theta) = 1 - theta, alpha = 1 + i sigma(theta),
// sigma(alpha) = 1 + i theta, sends it through a 2x2 channel H with
// CN(0,1) entries and adds white Gaussian noise.  The 8x8 real lattice
// generator M = HG is obtained column by column by encoding unit symbol
// vectors; M = QR is factored by modified Gram-Schmidt (positive diagonal)
// and y~ = Q^T y.  R and y~ are rounded to 16-bit fixed point (8 fraction
// bits, 7 for 64-QAM) and given to the decoder.
//
// Checks per codeword: the decoder's metric equals the exact ML metric of
// the quantised problem (found by a separate depth-first search in natural
// order, with the transmitted vector's metric as the starting bound), the
// reported metric matches s_hat, and latency is node_count + 2 cycles.
// Reported: average nodes and cycles per codeword, the throughput this
// implies at the 217 MHz clock of the flexible implementation, and the
// symbol error rate against the transmitted symbols (not checked: it is a
// property of the channel, not of the RTL).
// SNR here is the mean received signal power per receive antenna over the
// complex noise variance N0.  The uncoded 16-QAM case is repeated at 25 and
// 30 dB to show how the average search effort falls with SNR.
module tb_golden_workload;

  localparam int N  = 8;
  localparam int W  = 16;
  localparam int SW = 4;
  localparam int MW = 2 * W + 3;
  localparam real SNR_DB = 20.0;
  localparam real FCLK_MHZ = 217.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [1:0] log2q = 2'd2;
  logic signed [W-1:0] r_in [N][N];
  logic signed [W-1:0] y_in [N];
  logic busy, done, found;
  logic signed [SW-1:0] s_hat [N];
  logic [MW-1:0] metric_hat;
  logic [31:0] node_count;
  logic ev_descend, ev_prune, ev_leaf, ev_skip, ev_climb;

  golden_sd_top dut (
    .clk, .rst_n, .start, .log2q, .r_in, .y_in, .busy, .done, .s_hat,
    .metric_hat, .found, .node_count, .ev_descend, .ev_prune, .ev_leaf,
    .ev_skip, .ev_climb
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000000) @(posedge clk);
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

  // ---------------------------------------------------------------- maths
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom()) + 1.0) / 4294967297.0;
    u2 = real'($urandom()) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  real hr [2][2], hi [2][2];   // 2x2 channel (Golden code)
  real gr [4][4], gi [4][4];   // 4x4 channel (uncoded)

  // Uncoded 4x4 MIMO: four complex symbols (Re, Im pairs of s) on four
  // antennas in one channel use; v = (Re, Im) of the four received samples.
  function automatic void uncoded_rx(input real s [N], output real v [N]);
    real wr, wi;
    for (int r = 0; r < 4; r++) begin
      wr = 0.0; wi = 0.0;
      for (int t = 0; t < 4; t++) begin
        wr += gr[r][t] * s[2 * t] - gi[r][t] * s[2 * t + 1];
        wi += gr[r][t] * s[2 * t + 1] + gi[r][t] * s[2 * t];
      end
      v[2 * r]     = wr;
      v[2 * r + 1] = wi;
    end
  endfunction

  // Golden codeword for real symbol vector s = (Re a, Im a, Re b, ..., Im d),
  // through the channel, vectorised as (Re, Im) of Y11, Y21, Y12, Y22.
  function automatic void encode_rx(input real s [N], output real v [N]);
    real th, sth, ar, ai, sar, sai, k;
    real xr [2][2], xi [2][2];
    real ur, ui, wr, wi;
    th  = (1.0 + $sqrt(5.0)) / 2.0;
    sth = 1.0 - th;
    ar = 1.0; ai = sth;          // alpha = 1 + i sigma(theta)
    sar = 1.0; sai = th;         // sigma(alpha) = 1 + i theta
    k = 1.0 / $sqrt(5.0);
    // X11 = alpha (a + b theta)
    ur = s[0] + s[2] * th;  ui = s[1] + s[3] * th;
    xr[0][0] = k * (ar * ur - ai * ui);  xi[0][0] = k * (ar * ui + ai * ur);
    // X12 = alpha (c + d theta)
    ur = s[4] + s[6] * th;  ui = s[5] + s[7] * th;
    xr[0][1] = k * (ar * ur - ai * ui);  xi[0][1] = k * (ar * ui + ai * ur);
    // X21 = i sigma(alpha) (c + d sigma(theta))
    ur = s[4] + s[6] * sth; ui = s[5] + s[7] * sth;
    wr = sar * ur - sai * ui; wi = sar * ui + sai * ur;
    xr[1][0] = -k * wi;  xi[1][0] = k * wr;
    // X22 = sigma(alpha) (a + b sigma(theta))
    ur = s[0] + s[2] * sth; ui = s[1] + s[3] * sth;
    xr[1][1] = k * (sar * ur - sai * ui);  xi[1][1] = k * (sar * ui + sai * ur);
    // Y = H X, column by column
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < 2; r++) begin
        wr = 0.0; wi = 0.0;
        for (int t = 0; t < 2; t++) begin
          wr += hr[r][t] * xr[t][c] - hi[r][t] * xi[t][c];
          wi += hr[r][t] * xi[t][c] + hi[r][t] * xr[t][c];
        end
        v[4 * c + 2 * r]     = wr;
        v[4 * c + 2 * r + 1] = wi;
      end
  endfunction

  longint rr [N][N];
  longint yy [N];

  function automatic longint full_metric(input int s [N]);
    longint t = 0, d;
    for (int i = 0; i < N; i++) begin
      d = yy[i];
      for (int j = i; j < N; j++) d -= rr[i][j] * s[j];
      t += d * d;
    end
    return t;
  endfunction

  // Exact ML on the quantised problem: natural-order depth-first search
  // pruned by the best metric so far, starting from bound + 1.
  function automatic longint ml_search(input int q, input longint bound);
    int     s [N];
    longint part [N+1];
    longint best;
    longint d;
    int     lvl;
    best = bound + 1;
    for (int i = 0; i < N; i++) s[i] = -(q - 1);
    part[N] = 0;
    lvl = N - 1;
    forever begin
      d = yy[lvl];
      for (int j = lvl; j < N; j++) d -= rr[lvl][j] * s[j];
      part[lvl] = part[lvl+1] + d * d;
      if (part[lvl] < best && lvl > 0) begin
        lvl--;
        s[lvl] = -(q - 1);
        continue;
      end
      if (part[lvl] < best && lvl == 0) best = part[0];
      while (lvl < N && s[lvl] == q - 1) lvl++;
      if (lvl == N) break;
      s[lvl] += 2;
    end
    return best;
  endfunction

  function automatic longint quant(input real v, input int frac);
    longint x;
    x = longint'(v * real'(1 << frac) + (v >= 0.0 ? 0.5 : -0.5));
    if (x > 32767) x = 32767;
    if (x < -32768) x = -32768;
    return x;
  endfunction

  task automatic run_mod(input bit golden, input int lq, input int ncw, input real snr_db);
    int q, frac, s_true [N], s_dec [N];
    real sv [N], ev [N], m [N][N], qm [N][N], rm [N][N], y [N], yt [N], nrm, n0, sig;
    longint nodes = 0, cycles = 0, t0, lat, ref_metric, dec_metric, tx_metric;
    int sym_err = 0;
    q    = 1 << lq;
    frac = (lq == 3) ? 7 : 8;
    // mean |x|^2 per complex entry = 2 (Q^2-1)/3; two or four transmit antennas
    n0  = (golden ? 2.0 : 4.0) * (2.0 * real'(q * q - 1) / 3.0) / $pow(10.0, snr_db / 10.0);
    sig = $sqrt(n0 / 2.0);
    for (int cw = 0; cw < ncw; cw++) begin
      for (int r = 0; r < 2; r++)
        for (int t = 0; t < 2; t++) begin
          hr[r][t] = gauss() * 0.7071067811865476;
          hi[r][t] = gauss() * 0.7071067811865476;
        end
      for (int r = 0; r < 4; r++)
        for (int t = 0; t < 4; t++) begin
          gr[r][t] = gauss() * 0.7071067811865476;
          gi[r][t] = gauss() * 0.7071067811865476;
        end
      for (int k = 0; k < N; k++) begin
        for (int j = 0; j < N; j++) sv[j] = (j == k) ? 1.0 : 0.0;
        if (golden) encode_rx(sv, ev); else uncoded_rx(sv, ev);
        for (int i = 0; i < N; i++) m[i][k] = ev[i];
      end
      for (int j = 0; j < N; j++) begin
        s_true[j] = 2 * $urandom_range(q - 1, 0) - (q - 1);
        sv[j] = real'(s_true[j]);
      end
      if (golden) encode_rx(sv, ev); else uncoded_rx(sv, ev);
      for (int i = 0; i < N; i++) y[i] = ev[i] + sig * gauss();
      // modified Gram-Schmidt
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        qm[i][j] = m[i][j];
        rm[i][j] = 0.0;
      end
      for (int k = 0; k < N; k++) begin
        nrm = 0.0;
        for (int i = 0; i < N; i++) nrm += qm[i][k] * qm[i][k];
        rm[k][k] = $sqrt(nrm);
        for (int i = 0; i < N; i++) qm[i][k] /= rm[k][k];
        for (int j = k + 1; j < N; j++) begin
          rm[k][j] = 0.0;
          for (int i = 0; i < N; i++) rm[k][j] += qm[i][k] * qm[i][j];
          for (int i = 0; i < N; i++) qm[i][j] -= rm[k][j] * qm[i][k];
        end
      end
      for (int k = 0; k < N; k++) begin
        yt[k] = 0.0;
        for (int i = 0; i < N; i++) yt[k] += qm[i][k] * y[i];
      end
      for (int i = 0; i < N; i++) begin
        yy[i] = quant(yt[i], frac);
        for (int j = 0; j < N; j++) rr[i][j] = (j < i) ? 0 : quant(rm[i][j], frac);
        if (rr[i][i] < 1) rr[i][i] = 1;
        y_in[i] = W'(yy[i]);
        for (int j = 0; j < N; j++) r_in[i][j] = W'(rr[i][j]);
      end
      tx_metric  = full_metric(s_true);
      ref_metric = ml_search(q, tx_metric);

      log2q <= 2'(lq);
      start <= 1'b1;
      @(posedge clk);
      t0 = cyc;
      start <= 1'b0;
      while (!done) @(posedge clk);
      lat = cyc - t0;

      for (int i = 0; i < N; i++) s_dec[i] = int'(s_hat[i]);
      dec_metric = full_metric(s_dec);
      check(found && longint'(metric_hat) == ref_metric,
            $sformatf("%0d-QAM cw %0d: metric %0d, ML %0d", q * q, cw, metric_hat, ref_metric));
      check(dec_metric == longint'(metric_hat), "s_hat does not give the reported metric");
      check(lat == longint'(node_count) + 2, $sformatf("latency %0d for %0d nodes", lat, node_count));
      for (int i = 0; i < N; i += 2)
        if (s_dec[i] != s_true[i] || s_dec[i+1] != s_true[i+1]) sym_err++;
      nodes  += longint'(node_count);
      cycles += longint'(node_count) + 3;
      @(posedge clk);
    end
    $display("%s %0d-QAM @ %0.0f dB: %0d codewords, %0.2f nodes/codeword, %0.2f cycles/codeword, %0.1f Mbit/s at %0.0f MHz, QAM symbol error rate %0.4f",
             golden ? "Golden 2x2" : "uncoded 4x4", q * q, snr_db, ncw, real'(nodes) / ncw, real'(cycles) / ncw,
             FCLK_MHZ * real'(8 * lq) * ncw / real'(cycles), FCLK_MHZ,
             real'(sym_err) / (4.0 * ncw));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      y_in[i] = '0;
      for (int j = 0; j < N; j++) r_in[i][j] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_mod(1'b1, 2, 300, SNR_DB);   // Golden code, 16-QAM
    run_mod(1'b1, 1, 200, SNR_DB);   // Golden code, 4-QAM
    run_mod(1'b1, 3, 200, SNR_DB);   // Golden code, 64-QAM
    run_mod(1'b0, 2, 300, SNR_DB);   // uncoded 4x4, 16-QAM: the throughput configuration
    // the same at higher SNR, to show how strongly the search effort depends
    // on the SNR definition
    run_mod(1'b0, 2, 200, SNR_DB + 5.0);
    run_mod(1'b0, 2, 200, SNR_DB + 10.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
