// gc_u_psi_step: alternative-node unit (U_psi_step).
//
// While the current node is being evaluated, this unit prepares the node the
// search moves to if the current one is pruned (or is a leaf): the next
// sibling, in Schnorr-Euchner zig-zag order, at a higher level m.  The next
// point s_m is derived from the previous one and the sign of Delta recorded
// when the level was first entered (gc_pam_next, eq. 11 of the method), so no
// division is needed.  The psi vector of that node,
// psi^(m) = psi^(m+1) - R_m s_m, is then computed with the same multiplier
// and subtractor rows as in the son unit, from the father vector psi^(m+1)
// read from the psi memory.
//
// Structure as in the publication (eq. 11 block, multipliers,
// subtractors).  Combinational.
module gc_u_psi_step #(
  parameter int unsigned N         = gc_pkg::N_DIM,
  parameter int unsigned W         = gc_pkg::DP_W,
  parameter int unsigned LOG2Q_MAX = gc_pkg::LOG2Q_MAX,
  parameter int unsigned SW        = LOG2Q_MAX + 1,
  parameter int unsigned KW        = LOG2Q_MAX + 2
) (
  input  logic signed [W-1:0]  psi_in  [N],  // psi^(m+1), father vector
  input  logic signed [W-1:0]  r_col   [N],  // column m of R
  input  logic signed [SW-1:0] s_prev,       // point now held at level m
  input  logic        [KW-1:0] kz,           // its zig-zag index
  input  logic                 delta_pos,    // sign of Delta at level m
  input  logic        [1:0]    log2q,
  output logic signed [SW-1:0] s_m,          // next point at level m
  output logic        [KW-1:0] kz_next,
  output logic                 skipped,      // mapping constraint skipped a point
  output logic                 valid,
  output logic signed [W-1:0]  psi_out [N]   // psi^(m)
);

  gc_pam_next #(.LOG2Q_MAX(LOG2Q_MAX), .SW(SW), .KW(KW)) u_eq11 (
    .s_prev   (s_prev),
    .kz       (kz),
    .delta_pos(delta_pos),
    .log2q    (log2q),
    .s_next   (s_m),
    .kz_next  (kz_next),
    .skipped  (skipped),
    .valid    (valid)
  );

  gc_psi_update #(.N(N), .W(W), .SW(SW)) u_upd (
    .psi_in (psi_in),
    .r_col  (r_col),
    .s      (s_m),
    .psi_out(psi_out)
  );

endmodule
