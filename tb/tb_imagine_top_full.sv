// tb_imagine_top_full: one complete GEMV through IMAGine at its default size:
// 12 x 14 tiles of 12 x 2 blocks (2304 outputs, 28 matrix columns, 64,512 PEs);
// weights are loaded per block column. See imagine_top_tb_body.svh.
module tb_imagine_top_full;
  import imagine_pkg::*;

  localparam int TILE_ROWS = 12, TILE_COLS = 14, ROWS = 12, COLS = 2, K = 1, PER_BLOCK = 0;

  logic clk = 1'b0, rst = 1'b1;
  logic fifo_in_valid, fifo_in_ready, fifo_out_valid, busy;
  logic [INSTR_W-1:0] fifo_in_data;
  logic [31:0] fifo_out_data;

  always #5 clk = ~clk;

  imagine_top dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "imagine_top_tb_body.svh"

endmodule
