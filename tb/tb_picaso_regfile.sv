// tb_picaso_regfile: self-checking test of the PIM block register file.
//
// Writes random rows, reads them back on both ports (data one cycle after the
// address) and checks read-before-write behaviour against a testbench copy.
module tb_picaso_regfile;
  localparam int DEPTH = 1024, W = 16;
  logic clk = 1'b0;
  logic [9:0] addr_a, addr_b, wr_addr;
  logic [W-1:0] rd_a, rd_b, wr_data;
  logic we;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  picaso_regfile #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr_a = 0; addr_b = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; wr_addr = 10'(i); wr_data = W'($urandom); model[i] = wr_data;
    end
    for (int k = 0; k < 3000; k++) begin
      logic [9:0] ea, eb;
      @(negedge clk);
      addr_a = 10'($urandom); addr_b = 10'($urandom);
      ea = addr_a; eb = addr_b;
      we = ($urandom % 2) == 1; wr_addr = (k % 3 == 0) ? addr_a : 10'($urandom);
      wr_data = W'($urandom);
      @(posedge clk); #1;
      checks += 2;
      if (rd_a != model[ea]) begin failures++; $display("FAIL port A @%0d", ea); end
      if (rd_b != model[eb]) begin failures++; $display("FAIL port B @%0d", eb); end
      if (we) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
