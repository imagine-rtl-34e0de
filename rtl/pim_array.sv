// pim_array: the 2D PIM array of one GEMV tile (Fig. 2(b), item 2).
//
// ROWS x COLS PiCaSO-IM blocks (12 x 2 in the paper's tile). Inside a row the
// blocks are chained west to east: a block's east_in is the west_out of its
// eastern neighbour; the easternmost block takes the tile's east_in and the
// westernmost drives the tile's west_out, so tiles cascade on either side and
// partial results move from east to west. Each block gets its own copy of the
// control word (from the fanout tree) and a unique ID: its row is
// row_base + r and its column col_base + c, where the bases give the tile's
// position in the whole engine.
//
// Timing: none of its own; see picaso_im_block.
module pim_array
  import imagine_pkg::*;
#(
  parameter int unsigned ROWS  = 12,
  parameter int unsigned COLS  = 2,
  parameter int unsigned DEPTH = RF_DEPTH
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [ROW_IDW-1:0] row_base,
  input  logic [COL_IDW-1:0] col_base,
  input  ctrl_t              ctrl [ROWS*COLS],
  input  net_t               east_in  [ROWS],
  output net_t               west_out [ROWS]
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      net_t w_out;   // this block's west side
      net_t e_in;    // this block's east side
      if (c == COLS - 1) begin : g_east_edge
        assign e_in = east_in[r];
      end else begin : g_east_link
        assign e_in = g_col[c+1].w_out;
      end
      if (c == 0) begin : g_west_edge
        assign west_out[r] = w_out;
      end
      picaso_im_block #(.DEPTH(DEPTH)) u_blk (
        .clk     (clk),
        .rst     (rst),
        .row_id  (row_base + ROW_IDW'(r)),
        .col_id  (col_base + COL_IDW'(c)),
        .ctrl    (ctrl[r*COLS + c]),
        .east_in (e_in),
        .west_out(w_out)
      );
    end
  end

endmodule
