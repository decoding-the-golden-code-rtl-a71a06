// gc_control_unit: control unit (C.U.) of the depth-first sphere decoder.
//
// The search is Schnorr-Euchner: no initial radius (the radius starts at
// "infinity", all ones), children are visited nearest-first, and the radius
// shrinks to the metric of every leaf that is reached.  One tree node is
// evaluated per clock cycle.  In the cycle a node at level l is current,
// the datapath computes, side by side, its metric T, its best son at level
// l-1 (son unit) and the next sibling of the nearest higher level that still
// has unvisited points (alternative unit).  At the end of the cycle this
// unit decides:
//   * T < radius and l > 0: descend to the son (mux select 0), and store
//     the node's psi vector and metric as the son's father data;
//   * T < radius and l = 0: a leaf inside the sphere; record the path as
//     the new best solution, shrink the radius to T, then take the
//     alternative node;
//   * T >= radius: prune; take the alternative node (mux select 1).
//     Later siblings at level l are farther, so they are pruned too.
// When no level above l has an unvisited point left, the search ends and
// the best path is output.
//
// Per level the unit keeps the point now held (s), its zig-zag index (kz),
// the sign of Delta from the divider, and how many points were visited
// (cnt).  A level with cnt = Q is exhausted; this count is how the
// mapping constraint -- only Q points per level -- steers the search for
// the run-time selected modulation.  The alternative level is the lowest
// level above l that is not exhausted (a priority search), so moving up
// several levels costs no extra cycle.
//
// The publication gives the unit's duties (pruning test, dispatching data,
// the mapping constraint); the per-level state, the priority search for the
// alternative level, the strict "<" test, the infinite starting radius and
// the start/done handshake are this design's choices.
//
// Interface: start is sampled in CU_IDLE together with log2q.  The cycle
// after, the root is expanded (CU_ROOT), then one node per cycle
// (CU_SEARCH).  done is high for one cycle (CU_DONE) with s_hat, metric_hat
// and node_count valid; they hold until the next start.  node_count is a
// CW-bit diagnostic count that saturates.  Synchronous active-low reset.
module gc_control_unit #(
  parameter int unsigned N         = gc_pkg::N_DIM,
  parameter int unsigned LOG2Q_MAX = gc_pkg::LOG2Q_MAX,
  parameter int unsigned SW        = LOG2Q_MAX + 1,
  parameter int unsigned KW        = LOG2Q_MAX + 2,
  parameter int unsigned MW        = 2 * gc_pkg::DP_W + $clog2(N),
  parameter int unsigned AW        = $clog2(N),
  parameter int unsigned LW        = $clog2(N + 1),
  parameter int unsigned CW        = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [1:0]           log2q_in,
  // from the datapath
  input  logic [MW-1:0]        t_cur,        // metric of the current node
  input  logic signed [SW-1:0] son_s,        // best son (son unit)
  input  logic                 son_dpos,
  input  logic signed [SW-1:0] alt_s,        // next point at alt_lvl
  input  logic [KW-1:0]        alt_kz,
  input  logic                 alt_skipped,
  input  logic                 alt_pt_valid,
  // to the datapath
  output gc_pkg::cu_state_e    state,
  output logic [1:0]           log2q,        // modulation of this search
  output logic [LW-1:0]        cur_lvl,      // level of the current node (N = root)
  output logic [AW-1:0]        alt_lvl,      // level of the alternative node
  output logic                 alt_avail,
  output logic signed [SW-1:0] alt_s_prev,
  output logic [KW-1:0]        alt_kz_prev,
  output logic                 alt_dpos,
  output logic                 advance,      // load the next node
  output logic                 sel_alt,      // 0: son, 1: alternative
  output logic                 mem_we,       // store father data for the son
  output logic [AW-1:0]        mem_waddr,
  // result
  output logic                 busy,
  output logic                 done,
  output logic signed [SW-1:0] s_hat [N],
  output logic [MW-1:0]        metric_hat,
  output logic                 found,
  output logic [CW-1:0]        node_count,
  // one-cycle event flags
  output logic                 ev_descend,
  output logic                 ev_prune,
  output logic                 ev_leaf,
  output logic                 ev_skip,
  output logic                 ev_climb      // alternative more than one level up
);

  import gc_pkg::*;

  logic signed [SW-1:0] lv_s    [N];
  logic [KW-1:0]        lv_kz   [N];
  logic                 lv_dpos [N];
  logic [KW-1:0]        lv_cnt  [N];
  logic [MW-1:0]        radius;

  logic [KW-1:0]        qsize;
  logic                 accept, is_leaf, descend, finish;

  assign qsize   = KW'(1) << log2q;
  assign is_leaf = (cur_lvl == '0);
  assign accept  = t_cur < radius;
  assign busy    = (state == CU_ROOT) || (state == CU_SEARCH);
  assign done    = (state == CU_DONE);

  // Lowest non-exhausted level above the current one.
  always_comb begin
    alt_avail = 1'b0;
    alt_lvl   = '0;
    for (int j = N - 1; j >= 0; j--) begin
      if (j > int'(cur_lvl) && lv_cnt[j] < qsize) begin
        alt_avail = 1'b1;
        alt_lvl   = AW'(j);
      end
    end
    alt_s_prev  = lv_s[alt_lvl];
    alt_kz_prev = lv_kz[alt_lvl];
    alt_dpos    = lv_dpos[alt_lvl];
  end

  always_comb begin
    descend = 1'b0;
    finish  = 1'b0;
    if (state == CU_ROOT) begin
      descend = 1'b1;
    end else if (state == CU_SEARCH) begin
      descend = accept && !is_leaf;
      finish  = !descend && !alt_avail;
    end
    sel_alt   = (state == CU_SEARCH) && !descend;
    advance   = (state == CU_ROOT) || ((state == CU_SEARCH) && !finish);
    mem_we    = descend;
    mem_waddr = AW'(cur_lvl - LW'(1));

    ev_descend = (state == CU_SEARCH) && descend;
    ev_prune   = (state == CU_SEARCH) && !accept;
    ev_leaf    = (state == CU_SEARCH) && accept && is_leaf;
    ev_skip    = (state == CU_SEARCH) && sel_alt && alt_avail && alt_skipped;
    ev_climb   = (state == CU_SEARCH) && sel_alt && alt_avail &&
                 (int'(alt_lvl) > int'(cur_lvl) + 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= CU_IDLE;
      log2q      <= 2'd2;
      cur_lvl    <= LW'(N);
      radius     <= '1;
      metric_hat <= '1;
      found      <= 1'b0;
      node_count <= '0;
      for (int j = 0; j < N; j++) begin
        lv_s[j]    <= '0;
        lv_kz[j]   <= '0;
        lv_dpos[j] <= 1'b0;
        lv_cnt[j]  <= '0;
        s_hat[j]   <= '0;
      end
    end else begin
      unique case (state)
        CU_IDLE: begin
          if (start) begin
            state      <= CU_ROOT;
            log2q      <= log2q_in;
            cur_lvl    <= LW'(N);
            radius     <= '1;
            metric_hat <= '1;
            found      <= 1'b0;
            node_count <= '0;
          end
        end
        CU_ROOT: begin
          state              <= CU_SEARCH;
          cur_lvl            <= LW'(N - 1);
          lv_s[N-1]          <= son_s;
          lv_kz[N-1]         <= KW'(1);
          lv_dpos[N-1]       <= son_dpos;
          lv_cnt[N-1]        <= KW'(1);
        end
        CU_SEARCH: begin
          if (node_count != '1) node_count <= node_count + CW'(1);
          if (accept && is_leaf) begin
            radius     <= t_cur;
            metric_hat <= t_cur;
            found      <= 1'b1;
            s_hat      <= lv_s;
          end
          if (descend) begin
            cur_lvl               <= cur_lvl - LW'(1);
            lv_s[mem_waddr]       <= son_s;
            lv_kz[mem_waddr]      <= KW'(1);
            lv_dpos[mem_waddr]    <= son_dpos;
            lv_cnt[mem_waddr]     <= KW'(1);
          end else if (alt_avail) begin
            cur_lvl           <= LW'(alt_lvl);
            lv_s[alt_lvl]     <= alt_s;
            lv_kz[alt_lvl]    <= alt_kz;
            lv_cnt[alt_lvl]   <= lv_cnt[alt_lvl] + KW'(1);
          end else begin
            state <= CU_DONE;
          end
        end
        CU_DONE: state <= CU_IDLE;
        default: state <= CU_IDLE;
      endcase
    end
  end

  // The enumeration must never leave the constellation while a level still
  // has unvisited points.
  always_ff @(posedge clk) begin
    if (rst_n && state == CU_SEARCH && sel_alt && alt_avail)
      assert (alt_pt_valid)
        else $error("alternative point outside the constellation");
  end

endmodule
