// tb_input_regs: self-checking test of the input registers.
//
// Offers a random instruction stream on FIFO-in with random gaps; a model of
// the tiles answers each multicycle instruction with mc_done after a random
// delay. Checks that instructions come out in order, one cycle after they are
// taken, that nothing is taken while a multicycle instruction is outstanding,
// and that the stall really happens.
module tb_input_regs;
  import imagine_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic fifo_in_valid, fifo_in_ready, mc_done, instr_valid;
  instr_t fifo_in_data, instr;
  instr_t sent [$];
  int checks = 0, failures = 0, stalls = 0, outstanding = 0, got = 0;

  always #5 clk = ~clk;

  input_regs dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tiles model: mc_done some cycles after a multicycle instruction leaves
  initial begin
    mc_done = 1'b0;
    forever begin
      @(posedge clk); #1;
      if (instr_valid && instr[INSTR_W-1]) begin
        repeat (1 + $urandom % 8) @(posedge clk);
        #1 mc_done = 1'b1;
        @(posedge clk); #1 mc_done = 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (fifo_in_valid && fifo_in_ready) begin
        sent.push_back(fifo_in_data);
        checks++;
        if (outstanding != 0) begin failures++; $display("FAIL taken while waiting"); end
        if (fifo_in_data[INSTR_W-1]) outstanding = 1;
      end
      if (fifo_in_valid && !fifo_in_ready) stalls++;
      if (mc_done) outstanding = 0;
    end
  end

  always @(posedge clk) begin
    #2;
    if (instr_valid) begin
      checks++;
      if (sent.size() == 0 || instr != sent[0]) begin failures++; $display("FAIL order"); end
      else void'(sent.pop_front());
      got++;
    end
  end

  initial begin
    fifo_in_valid = 0; fifo_in_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    for (int k = 0; k < 400; k++) begin
      fifo_in_valid = ($urandom % 4) != 0;
      if (fifo_in_valid) fifo_in_data = INSTR_W'($urandom);
      do @(negedge clk); while (fifo_in_valid && !fifo_in_ready_at_edge);
    end
    fifo_in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (stalls == 0 || got < 100) begin failures++; $display("FAIL stalls=%0d got=%0d", stalls, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic fifo_in_ready_at_edge;
  always @(posedge clk) fifo_in_ready_at_edge <= fifo_in_ready;
endmodule
