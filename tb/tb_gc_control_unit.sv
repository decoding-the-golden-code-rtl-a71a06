// tb_gc_control_unit: directed test of the search control on two-level
// trees (N = 2), where the testbench plays the datapath.
//
// The first two scenarios use the QPSK tree (2-PAM per level, four
// leaves): the search descends greedily to the first leaf, shrinks the
// radius to its metric, moves to the other branch at the top level and
// either prunes it (scenario A) or finds a better leaf there (scenario B).
// Scenario C uses 4-PAM and runs the top level through all four of its
// points, with prunings at both levels, to check that a level is
// exhausted after exactly Q points.  Every cycle the expected current
// level, alternative level and its stored state, mux select, memory write
// and advance are worked out by hand; at the end the result, metric and
// node count.
module tb_gc_control_unit;

  localparam int N = 2, SW = 4, KW = 5, MW = 16, AW = 1, LW = 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [1:0] log2q_in = 2'd1;
  logic [MW-1:0] t_cur = '0;
  logic signed [SW-1:0] son_s = '0, alt_s = '0;
  logic son_dpos = 1'b0, alt_skipped = 1'b0, alt_pt_valid = 1'b1;
  logic [KW-1:0] alt_kz = '0;
  gc_pkg::cu_state_e state;
  logic [1:0] log2q;
  logic [LW-1:0] cur_lvl;
  logic [AW-1:0] alt_lvl, mem_waddr;
  logic alt_avail, alt_dpos, advance, sel_alt, mem_we, busy, done, found;
  logic signed [SW-1:0] alt_s_prev;
  logic [KW-1:0] alt_kz_prev;
  logic signed [SW-1:0] s_hat [N];
  logic [MW-1:0] metric_hat;
  logic [31:0] node_count;
  logic ev_descend, ev_prune, ev_leaf, ev_skip, ev_climb;

  gc_control_unit #(.N(N), .LOG2Q_MAX(3), .MW(MW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (t=%0t): %s", $time, what);
    end
  endtask

  task automatic begin_search(input int lq, input int s_top, input bit dpos_top);
    @(negedge clk);
    log2q_in = 2'(lq);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    son_s = SW'(s_top);
    son_dpos = dpos_top;
    #1;
    check(state == gc_pkg::CU_ROOT && busy, "root state");
    check(advance && !sel_alt && mem_we && mem_waddr == 1'b1, "root expands into level 1");
  endtask

  // One node: datapath answers t, son and alternative; expectations follow.
  task automatic node(input int t, input int sson, input bit dson,
                      input int salt, input int kalt,
                      input int e_lvl, input bit e_alt, input int e_alt_sprev,
                      input int e_alt_kz, input bit e_sel, input bit e_adv);
    @(negedge clk);
    t_cur = MW'(t);
    son_s = SW'(sson);
    son_dpos = dson;
    alt_s = SW'(salt);
    alt_kz = KW'(kalt);
    #1;
    check(state == gc_pkg::CU_SEARCH, "searching");
    check(int'(cur_lvl) == e_lvl, $sformatf("level %0d expected %0d", cur_lvl, e_lvl));
    check(alt_avail == e_alt, $sformatf("alt_avail %0d expected %0d", alt_avail, e_alt));
    if (e_alt) begin
      check(alt_lvl == 1'b1, "alternative at level 1");
      check(int'(alt_s_prev) == e_alt_sprev && int'(alt_kz_prev) == e_alt_kz,
            $sformatf("alt state s=%0d kz=%0d expected %0d %0d", alt_s_prev, alt_kz_prev,
                      e_alt_sprev, e_alt_kz));
    end
    check(sel_alt == e_sel, $sformatf("sel_alt %0d expected %0d", sel_alt, e_sel));
    check(advance == e_adv, $sformatf("advance %0d expected %0d", advance, e_adv));
    check(mem_we == !e_sel && (!mem_we || int'(mem_waddr) == e_lvl - 1), "memory write");
  endtask

  task automatic finish_search(input int s0, input int s1, input int m, input int nodes);
    @(negedge clk);
    check(done && !busy, "done");
    check(found, "found");
    check(int'(s_hat[0]) == s0 && int'(s_hat[1]) == s1,
          $sformatf("s_hat = (%0d,%0d) expected (%0d,%0d)", s_hat[0], s_hat[1], s0, s1));
    check(int'(metric_hat) == m, $sformatf("metric %0d expected %0d", metric_hat, m));
    check(int'(node_count) == nodes, $sformatf("nodes %0d expected %0d", node_count, nodes));
    @(negedge clk);
    check(state == gc_pkg::CU_IDLE, "back to idle");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // A: s2 = +1 first; leaf (s1=-1) metric 9; branch s2 = -1 pruned (12 >= 9)
    begin_search(1, 1, 1'b1);
    node(5,  -1, 1'b0,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);
    node(9,   0, 1'b0, -1, 2,   0, 1'b1, 1, 1,   1'b1, 1'b1);
    node(12,  0, 1'b0,  0, 0,   1, 1'b0, 0, 0,   1'b1, 1'b0);
    finish_search(-1, 1, 9, 3);

    // B: same start, but branch s2 = -1 is better: leaf (s1=+1) metric 4
    begin_search(1, 1, 1'b1);
    node(5,  -1, 1'b0,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);
    node(9,   0, 1'b0, -1, 2,   0, 1'b1, 1, 1,   1'b1, 1'b1);
    node(3,   1, 1'b1,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);
    node(4,   0, 1'b0,  0, 0,   0, 1'b0, 0, 0,   1'b1, 1'b0);
    finish_search(1, -1, 4, 4);

    // C: 4-PAM; top level visits +1, -1, +3, -3, each inside the sphere
    begin_search(2, 1, 1'b1);
    node(1,  -3, 1'b0,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);  // s2=+1
    node(9,   0, 1'b0, -1, 2,   0, 1'b1, 1, 1,   1'b1, 1'b1);  // leaf, radius 9
    node(2,   3, 1'b1,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);  // s2=-1
    node(5,   0, 1'b0,  3, 3,   0, 1'b1, -1, 2,  1'b1, 1'b1);  // leaf, radius 5
    node(3,   1, 1'b1,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);  // s2=+3
    node(7,   0, 1'b0, -3, 4,   0, 1'b1, 3, 3,   1'b1, 1'b1);  // leaf pruned (7 >= 5)
    node(4,  -1, 1'b0,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);  // s2=-3
    node(4,   0, 1'b0,  0, 0,   0, 1'b0, 0, 0,   1'b1, 1'b0);  // leaf, radius 4; level 1 exhausted
    finish_search(-1, -3, 4, 8);

    // D: pruning at the top level ends the search at once
    begin_search(2, -1, 1'b0);
    node(1,   1, 1'b1,  0, 0,   1, 1'b0, 0, 0,   1'b0, 1'b1);  // s2=-1
    node(6,   0, 1'b0,  1, 2,   0, 1'b1, -1, 1,  1'b1, 1'b1);  // leaf, radius 6
    node(6,   0, 1'b0,  0, 0,   1, 1'b0, 0, 0,   1'b1, 1'b0);  // s2=+1 pruned (6 >= 6)
    finish_search(1, -1, 6, 3);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
