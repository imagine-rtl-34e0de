// gemv_tile: one GEMV tile (Fig. 2(b)): tile controller, fanout tree and a
// ROWS x COLS array of PiCaSO-IM blocks.
//
// The controller decodes each instruction into per-cycle control words; a
// pipelined fanout tree (FO_LEVELS levels, FANOUT per register; the paper's
// final choice is 2 and 4) copies every word to all blocks; the blocks execute
// it in lock-step. The array's west_out/east_in rows let tiles cascade east to
// west. row_base/col_base place the tile's blocks in the engine-wide ID space
// used by SELECT. The 12 x 2 array is the paper's tile size.
//
// Timing: a control word reaches the blocks FO_LEVELS cycles after it leaves
// the controller; see tile_controller for the controller's own latency.
module gemv_tile
  import imagine_pkg::*;
#(
  parameter int unsigned ROWS      = 12,
  parameter int unsigned COLS      = 2,
  parameter int unsigned DEPTH     = RF_DEPTH,
  parameter int unsigned FO_LEVELS = 2,
  parameter int unsigned FANOUT    = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               instr_valid,
  input  logic [INSTR_W-1:0] instr,
  input  logic [ROW_IDW-1:0] row_base,
  input  logic [COL_IDW-1:0] col_base,
  input  net_t               east_in  [ROWS],
  output net_t               west_out [ROWS],
  output logic               mc_busy,
  output logic               mc_done
);

  ctrl_t             ctrl_root;
  logic [CTRL_W-1:0] ctrl_leaf [ROWS*COLS];
  ctrl_t             ctrl_blk  [ROWS*COLS];

  tile_controller u_ctrl (
    .clk        (clk),
    .rst        (rst),
    .instr_valid(instr_valid),
    .instr      (instr),
    .ctrl       (ctrl_root),
    .mc_busy    (mc_busy),
    .mc_done    (mc_done)
  );

  fanout_tree #(.W(CTRL_W), .N_OUT(ROWS*COLS), .LEVELS(FO_LEVELS), .FANOUT(FANOUT)) u_fo (
    .clk (clk),
    .din (ctrl_root),
    .dout(ctrl_leaf)
  );

  for (genvar i = 0; i < ROWS*COLS; i++) begin : g_cast
    assign ctrl_blk[i] = ctrl_t'(ctrl_leaf[i]);
  end

  pim_array #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_arr (
    .clk     (clk),
    .rst     (rst),
    .row_base(row_base),
    .col_base(col_base),
    .ctrl    (ctrl_blk),
    .east_in (east_in),
    .west_out(west_out)
  );

endmodule
