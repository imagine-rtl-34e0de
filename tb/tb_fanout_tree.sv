// tb_fanout_tree: self-checking test of the pipelined fanout tree.
//
// Uses the tile's configuration (2 levels, fanout 4) with 24 leaves: every
// leaf must equal the input word of exactly LEVELS cycles earlier.
module tb_fanout_tree;
  localparam int W = 12, N = 24, L = 2, F = 4;
  logic clk = 1'b0;
  logic [W-1:0] din;
  logic [W-1:0] dout [N];
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fanout_tree #(.W(W), .N_OUT(N), .LEVELS(L), .FANOUT(F)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      din = W'($urandom);
      hist.push_front(din);
      @(posedge clk); #1;
      if (k >= L) begin
        for (int i = 0; i < N; i++) begin
          checks++;
          if (dout[i] != hist[L-1]) begin failures++; $display("FAIL leaf %0d", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
