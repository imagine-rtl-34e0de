// tb_imagine_top: end-to-end GEMV through the IMAGine top level at a reduced
// size: 2 x 3 tiles of 2 x 2 blocks (64 outputs, 12 matrix columns), every
// block loaded with its own weights. See imagine_top_tb_body.svh.
module tb_imagine_top;
  import imagine_pkg::*;

  localparam int TILE_ROWS = 2, TILE_COLS = 3, ROWS = 2, COLS = 2, K = 2, PER_BLOCK = 1;

  logic clk = 1'b0, rst = 1'b1;
  logic fifo_in_valid, fifo_in_ready, fifo_out_valid, busy;
  logic [INSTR_W-1:0] fifo_in_data;
  logic [31:0] fifo_out_data;

  always #5 clk = ~clk;

  imagine_top #(.TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .ROWS(ROWS), .COLS(COLS),
                .TOP_FO_LEVELS(2), .TOP_FANOUT(2)) dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "imagine_top_tb_body.svh"

endmodule
