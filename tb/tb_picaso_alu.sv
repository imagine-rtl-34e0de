// tb_picaso_alu: self-checking test of the bit-serial PE ALUs.
//
// Drives random N-bit additions, subtractions and Booth passes through the
// 16 PE ALUs one bit per cycle (LSB first) and compares the collected result
// bits with integer arithmetic done in the testbench.
module tb_picaso_alu;
  import imagine_pkg::*;

  localparam int W = PE_PER_BLOCK;
  logic clk = 1'b0, rst = 1'b1;
  logic op_en, first, booth_clr;
  alu_op_e alu_op;
  logic [W-1:0] op_a, op_b, result;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  picaso_alu #(.WIDTH(W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one N-bit operation on all PEs; a, b hold the operands per PE
  task automatic run_op(input alu_op_e op, input int n, input logic [15:0] a [W],
                        input logic [15:0] b [W], output logic [15:0] r [W]);
    for (int p = 0; p < W; p++) r[p] = '0;
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      op_en = 1'b1; first = (t == 0); alu_op = op;
      for (int p = 0; p < W; p++) begin
        op_a[p] = a[p][t];
        op_b[p] = b[p][t];
      end
      @(posedge clk); #1;
      for (int p = 0; p < W; p++) r[p][t] = result[p];
    end
    @(negedge clk); op_en = 1'b0;
  endtask

  task automatic bload(input logic [W-1:0] bits);
    @(negedge clk);
    op_en = 1'b1; alu_op = ALU_BLOAD; op_b = bits; first = 1'b0;
    @(negedge clk); op_en = 1'b0;
  endtask

  logic [15:0] a [W], b [W], r [W];
  logic [15:0] exp16;
  logic [W-1:0] cur, prev;

  initial begin
    op_en = 0; first = 0; booth_clr = 0; alu_op = ALU_ADD; op_a = '0; op_b = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int it = 0; it < 40; it++) begin
      int n;
      alu_op_e op;
      n  = 1 + ($urandom % 16);
      op = (it % 2) ? ALU_SUB : ALU_ADD;
      for (int p = 0; p < W; p++) begin a[p] = 16'($urandom); b[p] = 16'($urandom); end
      run_op(op, n, a, b, r);
      for (int p = 0; p < W; p++) begin
        exp16 = (op == ALU_SUB) ? a[p] - b[p] : a[p] + b[p];
        checks++;
        if ((17'(r[p] ^ exp16) & ((17'h1 << n) - 17'h1)) != 17'h0) begin
          failures++;
          $display("FAIL op=%0d n=%0d pe=%0d a=%h b=%h got=%h exp=%h", op, n, p, a[p], b[p], r[p], exp16);
        end
      end
    end
    // Booth passes: pair (cur,prev) decides +B, -B or pass A
    for (int it = 0; it < 20; it++) begin
      @(negedge clk); booth_clr = 1'b1; @(negedge clk); booth_clr = 1'b0;
      prev = W'($urandom); cur = W'($urandom);
      bload(prev);
      bload(cur);
      for (int p = 0; p < W; p++) begin a[p] = 16'($urandom); b[p] = 16'($urandom); end
      run_op(ALU_BOOTH, 16, a, b, r);
      for (int p = 0; p < W; p++) begin
        unique case ({cur[p], prev[p]})
          2'b01:   exp16 = a[p] + b[p];
          2'b10:   exp16 = a[p] - b[p];
          default: exp16 = a[p];
        endcase
        checks++;
        if (r[p] != exp16) begin
          failures++;
          $display("FAIL booth pe=%0d pair=%b a=%h b=%h got=%h exp=%h", p, {cur[p], prev[p]}, a[p], b[p], r[p], exp16);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
