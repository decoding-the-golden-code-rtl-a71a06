// gc_metric_memory: Metric memory, the father metrics of the current path.
//
// Row l holds T^(l+1), the partial metric of the father of the node at tree
// level l (row N-1 holds 0, the metric of the root).  Written when the
// search descends from level l+1 to level l, read when it moves to the
// next sibling at level l, whose metric is that father metric plus its own
// term.  The publication names this memory in its block diagram; width,
// depth and ports are this design's choices.
//
// Register file, one synchronous write port, one asynchronous read port.
module gc_metric_memory #(
  parameter int unsigned N  = gc_pkg::N_DIM,
  parameter int unsigned MW = 2 * gc_pkg::DP_W + $clog2(N),
  parameter int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [MW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [MW-1:0] rdata
);

  logic [MW-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
