// gc_pam_next: next point of the Schnorr-Euchner zig-zag enumeration.
//
// With s_(1) the point nearest to psi/R and Delta = s_(1) - psi/R, the
// k-th point is s_(k) = s_(k-1) - (-1)^k sign(Delta) (k-1) A, with A = 2 the
// spacing of the odd-integer PAM points: the search alternates sides of
// psi/R with growing distance.  Given the current point s_prev = s_(kz) it
// returns s_(kz+1).  The mapping constraint (|s| <= Q-1) is applied here:
// when s_(kz+1) lies outside the constellation that side is used up, and
// the next point on the other side, s_(kz+2), is returned instead
// (skipped = 1).  The caller counts the points already visited and does not
// ask for a next point once all Q have been visited.
//
// The recurrence is the publication's; folding the out-of-range skip into
// the same cycle is this design's way of applying the mapping constraint.
// Combinational.
module gc_pam_next #(
  parameter int unsigned LOG2Q_MAX = gc_pkg::LOG2Q_MAX,
  parameter int unsigned SW        = LOG2Q_MAX + 1,
  parameter int unsigned KW        = LOG2Q_MAX + 2
) (
  input  logic signed [SW-1:0] s_prev,    // s_(kz)
  input  logic        [KW-1:0] kz,        // zig-zag index of s_prev, >= 1
  input  logic                 delta_pos, // sign(Delta) = +1 when set
  input  logic        [1:0]    log2q,
  output logic signed [SW-1:0] s_next,
  output logic        [KW-1:0] kz_next,
  output logic                 skipped,   // one out-of-range point skipped
  output logic                 valid      // s_next is inside the constellation
);

  localparam int unsigned EW = KW + 4;

  logic signed [EW-1:0] qmax, t1, t2, step1, step2;
  logic                 ok1, ok2;

  always_comb begin
    qmax  = (EW'(1) <<< log2q) - EW'(1);
    // k = kz+1:  s_(k) = s_(k-1) - (-1)^k sgn (k-1) A
    step1 = EW'(kz) <<< 1;
    if (kz[0] ^ delta_pos) t1 = EW'(s_prev) + step1;  // kz odd & Delta<0, or kz even & Delta>0
    else                   t1 = EW'(s_prev) - step1;
    step2 = EW'(kz + KW'(1)) <<< 1;
    if (kz[0] ^ delta_pos) t2 = t1 - step2;
    else                   t2 = t1 + step2;
    ok1 = (t1 <= qmax) && (t1 >= -qmax);
    ok2 = (t2 <= qmax) && (t2 >= -qmax);
    skipped = !ok1;
    if (ok1) begin
      s_next  = t1[SW-1:0];
      kz_next = kz + KW'(1);
      valid   = 1'b1;
    end else begin
      s_next  = t2[SW-1:0];
      kz_next = kz + KW'(2);
      valid   = ok2;
    end
  end

endmodule
