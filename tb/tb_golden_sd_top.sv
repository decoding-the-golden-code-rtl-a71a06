// tb_golden_sd_top: end-to-end check of the Golden code sphere decoder at
// its default size (N = 8, 16-bit datapath, up to 64-QAM).
//
// For every codeword the testbench draws an upper-triangular R with a
// positive diagonal and a received vector y~ = R s + noise, bounded so that
// no psi value can leave the 16-bit range, runs the decoder and compares it
// with an exact maximum-likelihood search of its own: a depth-first
// enumeration of all PAM vectors in natural order with pruning on the best
// metric so far, using 64-bit integer metrics.  Checks: the decoder's
// metric equals the ML metric, the metric recomputed from s_hat equals the
// reported one, every symbol is an odd point of the selected constellation,
// and start-to-done latency is node_count + 2 cycles (one node per cycle).
// Modulations 4-, 16- and 64-QAM are interleaved, with low and high noise,
// so that descents, prunings, leaves, mapping-constraint skips,
// multi-level climbs and modulation switches all occur; each is counted
// and one that never happens is a failure.
module tb_golden_sd_top;

  localparam int N  = 8;
  localparam int W  = 16;
  localparam int SW = 4;
  localparam int MW = 2 * W + 3;
  localparam int NCW = 60;   // codewords

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
  int n_descend = 0, n_prune = 0, n_leaf = 0, n_skip = 0, n_climb = 0, n_switch = 0;
  longint total_nodes [4];
  int     n_cw [4];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_descend) n_descend++;
    if (ev_prune)   n_prune++;
    if (ev_leaf)    n_leaf++;
    if (ev_skip)    n_skip++;
    if (ev_climb)   n_climb++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
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

  // Exact ML: depth-first over all points in natural order, pruned by the
  // best metric found so far (no greedy choice, no zig-zag).
  function automatic longint ml_search(input int q);
    int     s [N];
    longint part [N+1];
    longint best = 64'h7fff_ffff_ffff_ffff;
    longint d;
    int     lvl;
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
      // next point at this level, climbing when a level is finished
      while (lvl < N && s[lvl] == q - 1) lvl++;
      if (lvl == N) break;
      s[lvl] += 2;
    end
    return best;
  endfunction

  initial begin
    int q, lq, rmax, noise, s_true [N], s_dec [N];
    longint ref_metric, dec_metric, t0, lat;
    int prev_lq = 0;
    for (int k = 0; k < 4; k++) begin total_nodes[k] = 0; n_cw[k] = 0; end
    for (int i = 0; i < N; i++) begin
      y_in[i] = '0;
      for (int j = 0; j < N; j++) r_in[i][j] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int cw = 0; cw < NCW; cw++) begin
      lq    = 1 + (cw % 3);
      if (cw >= 30) lq = 3 - ((cw / 5) % 3);
      q     = 1 << lq;
      rmax  = 1800 / (q - 1);
      noise = (cw % 4 == 3) ? rmax * (q - 1) : rmax / 3;  // some codewords far off
      for (int i = 0; i < N; i++) begin
        s_true[i] = 2 * $urandom_range(q - 1, 0) - (q - 1);
        for (int j = 0; j < N; j++) begin
          if (j < i)       rr[i][j] = 0;
          else if (j == i) rr[i][j] = $urandom_range(rmax, rmax / 4 + 1);
          else             rr[i][j] = $signed($urandom_range(2 * rmax, 0)) - rmax;
        end
      end
      for (int i = 0; i < N; i++) begin
        yy[i] = $signed($urandom_range(2 * noise, 0)) - noise;
        for (int j = i; j < N; j++) yy[i] += rr[i][j] * s_true[j];
      end
      for (int i = 0; i < N; i++) begin
        y_in[i] = W'(yy[i]);
        for (int j = 0; j < N; j++) r_in[i][j] = W'(rr[i][j]);
      end
      ref_metric = ml_search(q);
      if (prev_lq != 0 && prev_lq != lq) n_switch++;
      prev_lq = lq;

      log2q <= 2'(lq);
      start <= 1'b1;
      @(posedge clk);
      t0 = cyc;
      start <= 1'b0;
      while (!done) @(posedge clk);
      lat = cyc - t0;

      for (int i = 0; i < N; i++) s_dec[i] = int'(s_hat[i]);
      dec_metric = full_metric(s_dec);
      check(found, $sformatf("cw %0d: no leaf found", cw));
      check(longint'(metric_hat) == ref_metric,
            $sformatf("cw %0d q=%0d: metric %0d, ML metric %0d", cw, q, metric_hat, ref_metric));
      check(dec_metric == longint'(metric_hat),
            $sformatf("cw %0d: s_hat metric %0d, reported %0d", cw, dec_metric, metric_hat));
      for (int i = 0; i < N; i++)
        check((s_dec[i] % 2 != 0) && s_dec[i] <= q - 1 && s_dec[i] >= -(q - 1),
              $sformatf("cw %0d: s_hat[%0d]=%0d outside %0d-PAM", cw, i, s_dec[i], q));
      check(lat == longint'(node_count) + 2,
            $sformatf("cw %0d: latency %0d, nodes %0d", cw, lat, node_count));
      if (noise < rmax) begin
        total_nodes[lq] += longint'(node_count);
        n_cw[lq]++;
      end
      @(posedge clk);
    end
    for (int k = 1; k < 4; k++)
      if (n_cw[k] > 0)
        $display("log2Q=%0d: %0d low-noise codewords, %0.1f nodes/codeword", k, n_cw[k],
                 real'(total_nodes[k]) / n_cw[k]);
    $display("events: descend=%0d prune=%0d leaf=%0d skip=%0d climb=%0d mod_switch=%0d",
             n_descend, n_prune, n_leaf, n_skip, n_climb, n_switch);
    check(n_descend > 0, "no descent");
    check(n_prune > 0,   "no pruning");
    check(n_leaf > 1,    "no radius update after the first leaf");
    check(n_skip > 0,    "mapping constraint never skipped a point");
    check(n_climb > 0,   "never climbed more than one level");
    check(n_switch > 0,  "no modulation switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
