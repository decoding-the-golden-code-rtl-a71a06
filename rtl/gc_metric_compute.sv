// gc_metric_compute: partial Euclidean distance of a tree node (Metric_compute).
//
// T^(l) = T^(l+1) + |psi_l^(l)|^2, where psi_l^(l) = psi_l^(l+1) - R_ll s_l
// is entry l of the node's psi vector.  One squarer and one adder, as in
// the publication.  The square is kept at full precision (2W bits, twice
// the fractional bits of psi) and the metric has MW = 2W + clog2(N) bits,
// enough for the sum of N squares, so metrics are exact; the sum still
// saturates at all-ones, which the control unit treats as an infinite
// radius.  The metric width is this design's choice.  Combinational.
module gc_metric_compute #(
  parameter int unsigned N  = gc_pkg::N_DIM,
  parameter int unsigned W  = gc_pkg::DP_W,
  parameter int unsigned MW = 2 * W + $clog2(N)
) (
  input  logic        [MW-1:0] t_in,   // T^(l+1), father metric
  input  logic signed [W-1:0]  psi_l,  // psi_l^(l)
  output logic        [MW-1:0] t_out   // T^(l)
);

  logic signed [2*W-1:0] sq;
  logic        [MW:0]    sum;

  always_comb begin
    sq  = psi_l * psi_l;
    sum = {1'b0, t_in} + (MW+1)'(unsigned'(sq));
    t_out = sum[MW] ? '1 : sum[MW-1:0];
  end

endmodule
