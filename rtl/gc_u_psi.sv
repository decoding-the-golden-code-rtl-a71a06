// gc_u_psi: son-node unit (U_psi).
//
// Given the psi vector of the current node, psi^(l+1), and the diagonal
// entry R_ll, it selects the best son s_l -- the PAM point nearest to
// psi_l^(l+1) / R_ll -- with the log2(Q)-step divider, and then computes the
// psi vector of that son, psi^(l) = psi^(l+1) - R_l * s_l, for all entries
// in parallel.  Entry l of the result, psi_l^(l) = psi_l^(l+1) - R_ll s_l,
// is the term whose square the metric unit adds.  delta_pos (the sign of
// Delta = s_l - psi_l/R_ll) is passed to the alternative-node unit, which
// uses it to enumerate the next points in zig-zag order.
//
// Structure as in the publication: divider, row of multipliers, row of
// subtractors.  Combinational; the caller registers the result.
module gc_u_psi #(
  parameter int unsigned N         = gc_pkg::N_DIM,
  parameter int unsigned W         = gc_pkg::DP_W,
  parameter int unsigned LOG2Q_MAX = gc_pkg::LOG2Q_MAX,
  parameter int unsigned SW        = LOG2Q_MAX + 1
) (
  input  logic signed [W-1:0]  psi_in  [N],  // psi^(l+1)
  input  logic signed [W-1:0]  psi_l,        // psi_l^(l+1), entry l of psi_in
  input  logic signed [W-1:0]  r_ll,         // R_ll > 0
  input  logic signed [W-1:0]  r_col   [N],  // column l of R
  input  logic        [1:0]    log2q,
  output logic signed [SW-1:0] s_l,
  output logic                 delta_pos,
  output logic signed [W-1:0]  psi_out [N]   // psi^(l)
);

  gc_divisor #(.W(W), .LOG2Q_MAX(LOG2Q_MAX), .SW(SW)) u_div (
    .dividend (psi_l),
    .divisor  (r_ll),
    .log2q    (log2q),
    .s        (s_l),
    .delta_pos(delta_pos)
  );

  gc_psi_update #(.N(N), .W(W), .SW(SW)) u_upd (
    .psi_in (psi_in),
    .r_col  (r_col),
    .s      (s_l),
    .psi_out(psi_out)
  );

endmodule
