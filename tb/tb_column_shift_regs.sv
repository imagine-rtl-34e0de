// tb_column_shift_regs: self-checking test of the read-out column.
//
// Streams random words, bit-serially LSB first, into the west ports of 3
// block rows (48 entries), once with the full 32 bits and once with 20 bits
// (which must come out sign-extended). Checks that FIFO-out then delivers all
// 48 words in PE-row order on 48 consecutive cycles.
module tb_column_shift_regs;
  import imagine_pkg::*;
  localparam int BR = 3, ACC = 32, E = BR * PE_PER_BLOCK;

  logic clk = 1'b0, rst = 1'b1;
  net_t west [BR];
  logic fifo_out_valid, busy;
  logic [ACC-1:0] fifo_out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  column_shift_regs #(.BLOCK_ROWS(BR), .ACC_W(ACC), .OUT_STAGES(2)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ACC-1:0] words [E];

  task automatic stream(input int n);
    int got, first_cyc, last_cyc, cyc;
    logic [ACC-1:0] exp;
    for (int i = 0; i < E; i++) words[i] = $urandom;
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      for (int r = 0; r < BR; r++) begin
        west[r].valid = 1'b1;
        for (int p = 0; p < PE_PER_BLOCK; p++) west[r].data[p] = words[r*PE_PER_BLOCK + p][t];
      end
    end
    @(negedge clk);
    for (int r = 0; r < BR; r++) west[r] = '0;
    got = 0; cyc = 0; first_cyc = 0; last_cyc = 0;
    while (got < E && cyc < 200) begin
      @(posedge clk); #1; cyc++;
      if (fifo_out_valid) begin
        exp = (n == ACC) ? words[got] : ACC'($signed(words[got][19:0]));
        checks++;
        if (fifo_out_data != exp) begin
          failures++; $display("FAIL n=%0d word %0d got %h exp %h", n, got, fifo_out_data, exp);
        end
        if (got == 0) first_cyc = cyc;
        last_cyc = cyc;
        got++;
      end
    end
    checks++;
    if (got != E || last_cyc - first_cyc != E - 1) begin
      failures++; $display("FAIL n=%0d got %0d words over %0d cycles", n, got, last_cyc - first_cyc + 1);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (fifo_out_valid || busy) begin failures++; $display("FAIL extra output"); end
  endtask

  initial begin
    for (int r = 0; r < BR; r++) west[r] = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    stream(32);
    stream(20);
    stream(32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
