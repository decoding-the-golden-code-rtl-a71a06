// tb_gc_metric_memory: random writes and reads of the metric register file
// against a shadow copy, with read-during-write returning the old value.
module tb_gc_metric_memory;

  localparam int N = 8, MW = 35, AW = 3;

  logic clk = 1'b0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [MW-1:0] wdata, rdata;
  logic [MW-1:0] shadow [N];

  gc_metric_memory #(.N(N), .MW(MW)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

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
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(r);
      wdata = {$urandom(), $urandom()};
      shadow[r] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    repeat (3000) begin
      @(negedge clk);
      we    = $urandom_range(1, 0) == 1;
      waddr = AW'($urandom_range(N - 1, 0));
      raddr = AW'($urandom_range(N - 1, 0));
      wdata = {$urandom(), $urandom()};
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin
        failures++;
        $display("FAIL row %0d: %h expected %h", raddr, rdata, shadow[raddr]);
      end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
