// tb_gc_psi_memory: random writes and reads of the psi register file
// against a shadow copy; checks that a write lands in its row only, that a
// read during a write returns the old row, and that rows hold when we = 0.
module tb_gc_psi_memory;

  localparam int N = 8, W = 16, AW = 3;

  logic clk = 1'b0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic signed [W-1:0] wdata [N], rdata [N];
  logic signed [W-1:0] shadow [N][N];

  gc_psi_memory #(.N(N), .W(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; raddr = '0;
    for (int i = 0; i < N; i++) wdata[i] = '0;
    // fill every row
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(r);
      for (int i = 0; i < N; i++) begin
        wdata[i] = W'($urandom());
        shadow[r][i] = wdata[i];
      end
    end
    @(negedge clk);
    we = 1'b0;
    repeat (3000) begin
      @(negedge clk);
      we    = $urandom_range(1, 0) == 1;
      waddr = AW'($urandom_range(N - 1, 0));
      raddr = AW'($urandom_range(N - 1, 0));
      for (int i = 0; i < N; i++) wdata[i] = W'($urandom());
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (rdata[i] !== shadow[raddr][i]) begin
          failures++;
          $display("FAIL row %0d word %0d: %h expected %h", raddr, i, rdata[i], shadow[raddr][i]);
        end
      end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
