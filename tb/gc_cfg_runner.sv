// gc_cfg_runner: testbench helper that decodes random problems with one
// static configuration of golden_sd_top (tree depth N, datapath width W,
// largest PAM 2^LOG2Q_MAX) and checks each result against an exact ML
// search of its own (natural-order depth-first search, bounded by the
// metric of the transmitted vector).  R and y~ are drawn so that no psi
// value can leave the W-bit range.  Checks per problem: the decoder's
// metric equals the ML metric, s_hat reproduces it, symbols are valid
// points, and start-to-done takes node_count + 2 cycles.  Results are
// reported through the checks / failures / finished outputs.
module gc_cfg_runner #(
  parameter int N         = 8,
  parameter int W         = 16,
  parameter int LOG2Q_MAX = 3,
  parameter int NPROB     = 40
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);

  localparam int SW = LOG2Q_MAX + 1;
  localparam int MW = 2 * W + $clog2(N);

  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [1:0] log2q = 2'd1;
  logic signed [W-1:0] r_in [N][N];
  logic signed [W-1:0] y_in [N];
  logic busy, done, found;
  logic signed [SW-1:0] s_hat [N];
  logic [MW-1:0] metric_hat;
  logic [31:0] node_count;
  logic ev_descend, ev_prune, ev_leaf, ev_skip, ev_climb;

  golden_sd_top #(.N(N), .W(W), .LOG2Q_MAX(LOG2Q_MAX)) dut (
    .clk, .rst_n, .start, .log2q, .r_in, .y_in, .busy, .done, .s_hat,
    .metric_hat, .found, .node_count, .ev_descend, .ev_prune, .ev_leaf,
    .ev_skip, .ev_climb
  );

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint rr [N][N];
  longint yy [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL N=%0d W=%0d: %s", N, W, what);
    end
  endtask

  function automatic longint full_metric(input int s [N]);
    longint t = 0, d;
    for (int i = 0; i < N; i++) begin
      d = yy[i];
      for (int j = i; j < N; j++) d -= rr[i][j] * s[j];
      t += d * d;
    end
    return t;
  endfunction

  function automatic longint ml_search(input int q, input longint bound);
    int     s [N];
    longint part [N+1];
    longint best, d;
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

  initial begin
    int q, lq, rmax, noise, s_true [N], s_dec [N];
    longint ref_metric, t0, lat;
    checks = 0;
    failures = 0;
    finished = 1'b0;
    for (int i = 0; i < N; i++) begin
      y_in[i] = '0;
      for (int j = 0; j < N; j++) r_in[i][j] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int p = 0; p < NPROB; p++) begin
      lq    = 1 + (p % LOG2Q_MAX);
      q     = 1 << lq;
      rmax  = ((1 << (W - 1)) - 1) / ((2 * N + 2) * (q - 1) + 1);
      noise = (p % 3 == 2) ? rmax * (q - 1) : rmax / 3;
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
        y_in[i] = W'(yy[i]);
        for (int j = 0; j < N; j++) r_in[i][j] = W'(rr[i][j]);
      end
      ref_metric = ml_search(q, full_metric(s_true));
      log2q <= 2'(lq);
      start <= 1'b1;
      @(posedge clk);
      t0 = cyc;
      start <= 1'b0;
      while (!done) @(posedge clk);
      lat = cyc - t0;
      for (int i = 0; i < N; i++) s_dec[i] = int'(s_hat[i]);
      check(found && longint'(metric_hat) == ref_metric,
            $sformatf("problem %0d Q=%0d: metric %0d, ML %0d", p, q, metric_hat, ref_metric));
      check(full_metric(s_dec) == longint'(metric_hat), "s_hat does not give the reported metric");
      for (int i = 0; i < N; i++)
        check((s_dec[i] % 2 != 0) && s_dec[i] <= q - 1 && s_dec[i] >= -(q - 1), "symbol outside constellation");
      check(lat == longint'(node_count) + 2, $sformatf("latency %0d differs from node_count %0d + 2", lat, node_count));
      @(posedge clk);
    end
    $display("N=%0d W=%0d LOG2Q_MAX=%0d: %0d problems, %0d checks, %0d failures",
             N, W, LOG2Q_MAX, NPROB, checks, failures);
    finished = 1'b1;
  end

endmodule
