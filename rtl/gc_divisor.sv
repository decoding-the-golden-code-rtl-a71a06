// gc_divisor: slicer that rounds psi / R to the nearest Q-PAM point.
//
// The tree search needs, at each level, the PAM symbol s in
// {-(Q-1), ..., -1, +1, ..., Q-1} closest to psi/R, where R > 0 is a
// diagonal entry of the triangular channel factor.  A full divider is not
// needed: only log2(Q) quotient bits matter.  The dividend is first offset
// by Q*R, which maps the constellation range onto [0, 2Q*R); then log2(Q)
// steps of a restoring successive-subtraction divider compare the remainder
// with the divisor 2R shifted left by log2(Q)-1 down to 0, producing the
// point index j one bit per step, most significant bit first (the sign of
// each difference is the quotient bit).  The result is s = 2j + 1 - Q.
// Values beyond the outer points saturate to the outer points by
// construction, so the output always satisfies the mapping constraint.
// A last comparison of the remainder with R tells whether the rounding went
// up or down: delta_pos = 1 when s > psi/R, i.e. Delta = s - psi/R > 0.
//
// The steps follow the shift-and-subtract divider of the publication; the
// run-time log2q input sets how many steps are used (flexible version).
// The steps are unrolled into one combinational path so that a node can be
// expanded every clock cycle; the feedback multiplexer of the single-stage
// drawing becomes the chain of stages.  Restoring (keep the old remainder
// when the difference is negative), the Q*R offset and the Delta comparison
// are this design's choices.
//
// Interface: purely combinational.  dividend and divisor are two's
// complement W-bit numbers with the same binary point; divisor must be > 0.
// log2q in 1..LOG2Q_MAX.
module gc_divisor #(
  parameter int unsigned W         = gc_pkg::DP_W,
  parameter int unsigned LOG2Q_MAX = gc_pkg::LOG2Q_MAX,
  parameter int unsigned SW        = LOG2Q_MAX + 1
) (
  input  logic signed [W-1:0]  dividend,   // psi_l^(l+1)
  input  logic signed [W-1:0]  divisor,    // R_ll, positive
  input  logic        [1:0]    log2q,      // log2 of the PAM size
  output logic signed [SW-1:0] s,          // nearest PAM point
  output logic                 delta_pos   // 1: s > dividend/divisor
);

  localparam int unsigned IW = W + LOG2Q_MAX + 3;

  logic signed [IW-1:0] r_ext;
  logic signed [IW-1:0] rem [LOG2Q_MAX+1];
  logic signed [IW-1:0] diff [LOG2Q_MAX];
  logic        [LOG2Q_MAX-1:0] j;

  always_comb begin
    r_ext  = IW'(divisor);
    rem[0] = IW'(dividend) + (r_ext <<< log2q);
    for (int k = 0; k < LOG2Q_MAX; k++) begin
      // stage k handles quotient bit LOG2Q_MAX-1-k; shift = bit + 1 (divisor 2R)
      diff[k] = rem[k] - (r_ext <<< (LOG2Q_MAX - k));
      if ((LOG2Q_MAX - 1 - k) < int'(log2q) && !diff[k][IW-1]) begin
        j[LOG2Q_MAX-1-k] = 1'b1;
        rem[k+1]         = diff[k];
      end else begin
        j[LOG2Q_MAX-1-k] = 1'b0;
        rem[k+1]         = rem[k];
      end
    end
    s         = SW'({j, 1'b1}) - (SW'(1) << log2q);
    delta_pos = rem[LOG2Q_MAX] < r_ext;
  end

endmodule
