// gc_psi_memory: Psi memory, the psi vectors of the current search path.
//
// Row l holds psi^(l+1), the vector of the father of the node at tree level
// l (levels numbered 0..N-1 from the leaves; row N-1 holds the received
// vector y~ = Q^T y).  A row is written when the search descends from level
// l+1 to level l, and read when the search moves to the next sibling at
// level l, whose psi vector is recomputed from it.  N rows of N words of W
// bits: the N^2 growth the publication gives for this memory.
//
// Register file, one synchronous write port, one asynchronous read port
// (read-during-write returns the old row).  Row contents are not reset:
// every row is written before it is read.  The port arrangement is this
// design's choice.
module gc_psi_memory #(
  parameter int unsigned N  = gc_pkg::N_DIM,
  parameter int unsigned W  = gc_pkg::DP_W,
  parameter int unsigned AW = $clog2(N)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata [N],
  input  logic [AW-1:0]       raddr,
  output logic signed [W-1:0] rdata [N]
);

  logic signed [W-1:0] mem [N][N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
