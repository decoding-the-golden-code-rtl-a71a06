// gc_psi_update: interference cancellation of one tree level on the whole
// psi vector, psi_out[i] = psi_in[i] - r_col[i] * s, for all N entries at
// once (N general-purpose multipliers and N subtractors).
//
// This is the multiplier row and subtractor row shared by the son unit and
// the alternative-node unit.  s is an integer PAM symbol, so the product is
// exact; the difference is saturated to W bits (saturation instead of
// wrap-around is this design's choice; the publication only fixes the
// datapath width).  Combinational.
module gc_psi_update #(
  parameter int unsigned N  = gc_pkg::N_DIM,
  parameter int unsigned W  = gc_pkg::DP_W,
  parameter int unsigned SW = gc_pkg::LOG2Q_MAX + 1
) (
  input  logic signed [W-1:0]  psi_in  [N],  // psi^(l+1)
  input  logic signed [W-1:0]  r_col   [N],  // column l of R
  input  logic signed [SW-1:0] s,            // symbol chosen at level l
  output logic signed [W-1:0]  psi_out [N]   // psi^(l)
);

  localparam int unsigned PW = W + SW + 1;
  localparam logic signed [PW-1:0] MAXV = PW'((1 << (W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(1 << (W - 1));

  logic signed [PW-1:0] d [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      d[i] = PW'(psi_in[i]) - PW'(r_col[i]) * PW'(s);
      if (d[i] > MAXV)      psi_out[i] = MAXV[W-1:0];
      else if (d[i] < MINV) psi_out[i] = MINV[W-1:0];
      else                  psi_out[i] = d[i][W-1:0];
    end
  end

endmodule
