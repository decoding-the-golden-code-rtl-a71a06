// golden_sd_top: maximum-likelihood tree-search decoder for the Golden code.
//
// The Golden code sends four QAM symbols in a 2x2 complex codeword over two
// channel uses of a 2x2 MIMO link.  Split into real and imaginary parts,
// decoding is a closest-point search in an N = 8 dimensional real lattice:
// find the PAM vector s minimising ||y~ - R s||^2, where R (upper
// triangular, positive diagonal) and y~ = Q^T y come from a QR
// decomposition done before this core.  This core performs that search
// with a depth-first Schnorr-Euchner sphere decoder that evaluates one tree
// node per clock cycle:
//
//   psi_cur / t_par   current node: psi vector psi^(l) and father metric
//   gc_metric_compute T = t_par + psi_l^2            (node metric)
//   gc_u_psi          best son at level l-1 and its psi vector (divider)
//   gc_u_psi_step     next sibling at the alternative level m > l and its
//                     psi vector (zig-zag, eq. 11), from the psi memory
//   gc_control_unit   prune / descend / leaf decision, mux select,
//                     per-level enumeration state, radius, best path
//   gc_psi_memory     father psi vectors of the path (N x N words)
//   gc_metric_memory  father metrics of the path
//
// The son and the alternative are computed while the current node's
// metric is evaluated, and the control unit's select picks which of the two
// becomes the next current node, so a node is expanded every cycle even
// after a pruning.  This organisation (two candidate units, muxes driven by
// the C.U., psi and metric memories) follows the publication's block
// diagram.  The metric unit takes psi_l^(l) = psi_l^(l+1) - R_ll s_l
// straight from the selected psi vector instead of a separate R_ll s_l
// path; the input/output registers and handshake are this design's own.
//
// Modulation is chosen per codeword at run time by log2q (1: 4-QAM,
// 2: 16-QAM, 3: 64-QAM), up to LOG2Q_MAX.  Fixing log2q gives the
// parametrizable variant for one modulation.  Data are W-bit two's
// complement numbers; the binary point can be anywhere as long as R and
// y~ use the same one, since symbols are integers (the publication's
// 14-bit 64-QAM format is 6 integer and 8 fraction bits).
//
// Timing: with start high in idle, r_in, y_in and log2q are registered.
// One cycle expands the root, then every cycle evaluates one node.  done
// is high for one cycle after the last node; s_hat (odd integers,
// -(Q-1)..Q-1, index i = real dimension i), metric_hat and node_count
// (nodes evaluated) stay valid until the next start.  A codeword takes
// node_count + 3 cycles from start to done.
module golden_sd_top #(
  parameter int unsigned N         = gc_pkg::N_DIM,
  parameter int unsigned W         = gc_pkg::DP_W,
  parameter int unsigned LOG2Q_MAX = gc_pkg::LOG2Q_MAX,
  parameter int unsigned SW        = LOG2Q_MAX + 1,
  parameter int unsigned KW        = LOG2Q_MAX + 2,
  parameter int unsigned MW        = 2 * W + $clog2(N),
  parameter int unsigned CW        = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [1:0]           log2q,
  input  logic signed [W-1:0]  r_in [N][N],   // r_in[row][col], upper triangular
  input  logic signed [W-1:0]  y_in [N],      // y~ = Q^T y
  output logic                 busy,
  output logic                 done,
  output logic signed [SW-1:0] s_hat [N],
  output logic [MW-1:0]        metric_hat,
  output logic                 found,
  output logic [CW-1:0]        node_count,
  output logic                 ev_descend,
  output logic                 ev_prune,
  output logic                 ev_leaf,
  output logic                 ev_skip,
  output logic                 ev_climb
);

  import gc_pkg::*;

  localparam int unsigned AW = $clog2(N);
  localparam int unsigned LW = $clog2(N + 1);

  cu_state_e            state;
  logic [1:0]           q_cur;
  logic [LW-1:0]        cur_lvl;
  logic [AW-1:0]        alt_lvl, mem_waddr, cur_idx, son_idx;
  logic                 advance, sel_alt, mem_we;
  logic signed [SW-1:0] alt_s_prev, son_s, alt_s;
  logic [KW-1:0]        alt_kz_prev, alt_kz;
  logic                 alt_dpos, son_dpos, alt_skipped, alt_pt_valid;

  logic signed [W-1:0]  r_reg   [N][N];
  logic signed [W-1:0]  psi_cur [N];
  logic [MW-1:0]        t_par, t_metric, t_node, mm_rdata;
  logic signed [W-1:0]  son_psi [N];
  logic signed [W-1:0]  alt_psi [N];
  logic signed [W-1:0]  pm_rdata [N];
  logic signed [W-1:0]  son_rcol [N];
  logic signed [W-1:0]  alt_rcol [N];

  assign cur_idx = AW'(cur_lvl);
  assign son_idx = AW'(cur_lvl - LW'(1));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      son_rcol[i] = r_reg[i][son_idx];
      alt_rcol[i] = r_reg[i][alt_lvl];
    end
  end

  // Node metric; the root has metric 0.
  gc_metric_compute #(.N(N), .W(W), .MW(MW)) u_metric (
    .t_in (t_par),
    .psi_l(psi_cur[cur_idx]),
    .t_out(t_metric)
  );
  assign t_node = (state == CU_ROOT) ? '0 : t_metric;

  gc_u_psi #(.N(N), .W(W), .LOG2Q_MAX(LOG2Q_MAX), .SW(SW)) u_psi (
    .psi_in   (psi_cur),
    .psi_l    (psi_cur[son_idx]),
    .r_ll     (r_reg[son_idx][son_idx]),
    .r_col    (son_rcol),
    .log2q    (q_cur),
    .s_l      (son_s),
    .delta_pos(son_dpos),
    .psi_out  (son_psi)
  );

  gc_u_psi_step #(.N(N), .W(W), .LOG2Q_MAX(LOG2Q_MAX), .SW(SW), .KW(KW)) u_psi_step (
    .psi_in   (pm_rdata),
    .r_col    (alt_rcol),
    .s_prev   (alt_s_prev),
    .kz       (alt_kz_prev),
    .delta_pos(alt_dpos),
    .log2q    (q_cur),
    .s_m      (alt_s),
    .kz_next  (alt_kz),
    .skipped  (alt_skipped),
    .valid    (alt_pt_valid),
    .psi_out  (alt_psi)
  );

  gc_psi_memory #(.N(N), .W(W)) u_psi_mem (
    .clk  (clk),
    .we   (mem_we),
    .waddr(mem_waddr),
    .wdata(psi_cur),
    .raddr(alt_lvl),
    .rdata(pm_rdata)
  );

  gc_metric_memory #(.N(N), .MW(MW)) u_metric_mem (
    .clk  (clk),
    .we   (mem_we),
    .waddr(mem_waddr),
    .wdata(t_node),
    .raddr(alt_lvl),
    .rdata(mm_rdata)
  );

  gc_control_unit #(.N(N), .LOG2Q_MAX(LOG2Q_MAX), .SW(SW), .KW(KW), .MW(MW),
                    .CW(CW)) u_cu (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start),
    .log2q_in    (log2q),
    .t_cur       (t_node),
    .son_s       (son_s),
    .son_dpos    (son_dpos),
    .alt_s       (alt_s),
    .alt_kz      (alt_kz),
    .alt_skipped (alt_skipped),
    .alt_pt_valid(alt_pt_valid),
    .state       (state),
    .log2q       (q_cur),
    .cur_lvl     (cur_lvl),
    .alt_lvl     (alt_lvl),
    .alt_avail   (),
    .alt_s_prev  (alt_s_prev),
    .alt_kz_prev (alt_kz_prev),
    .alt_dpos    (alt_dpos),
    .advance     (advance),
    .sel_alt     (sel_alt),
    .mem_we      (mem_we),
    .mem_waddr   (mem_waddr),
    .busy        (busy),
    .done        (done),
    .s_hat       (s_hat),
    .metric_hat  (metric_hat),
    .found       (found),
    .node_count  (node_count),
    .ev_descend  (ev_descend),
    .ev_prune    (ev_prune),
    .ev_leaf     (ev_leaf),
    .ev_skip     (ev_skip),
    .ev_climb    (ev_climb)
  );

  // Input registers and the current-node pipeline registers (the two
  // multiplexers of the block diagram select what is loaded here).
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t_par <= '0;
      for (int i = 0; i < N; i++) begin
        psi_cur[i] <= '0;
        for (int j = 0; j < N; j++) r_reg[i][j] <= '0;
      end
    end else if (state == CU_IDLE && start) begin
      r_reg   <= r_in;
      psi_cur <= y_in;
      t_par   <= '0;
    end else if (advance) begin
      psi_cur <= sel_alt ? alt_psi  : son_psi;
      t_par   <= sel_alt ? mm_rdata : t_node;
    end
  end

endmodule
