// tile_array: the 2D array of GEMV tiles (Fig. 2(a), item 1).
//
// TILE_ROWS x TILE_COLS tiles, each fed its copy of the instruction stream by
// the top-level fanout tree. Tiles in a row are cascaded east to west: each
// tile row's PIM rows continue into the tile on its west, and the westernmost
// tiles drive west_out, which feeds the column shift registers. The
// easternmost tiles see an idle east_in. Each tile is told its position so that
// block IDs are unique engine-wide: block rows tr*ROWS.., columns tc*COLS...
// mc_done/mc_busy come from tile (0,0); all tiles run in lock-step.
module tile_array
  import imagine_pkg::*;
#(
  parameter int unsigned TILE_ROWS = 12,
  parameter int unsigned TILE_COLS = 14,
  parameter int unsigned ROWS      = 12,   // PIM rows per tile
  parameter int unsigned COLS      = 2,    // PIM columns per tile
  parameter int unsigned DEPTH     = RF_DEPTH,
  localparam int unsigned NT       = TILE_ROWS * TILE_COLS
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [INSTR_W:0]   tile_in [NT],   // {valid, instruction} per tile
  output net_t               west_out [TILE_ROWS*ROWS],
  output logic               mc_busy,
  output logic               mc_done
);

  logic busy_t [NT];
  logic done_t [NT];

  for (genvar tr = 0; tr < TILE_ROWS; tr++) begin : g_tr
    for (genvar tc = 0; tc < TILE_COLS; tc++) begin : g_tc
      net_t w_out [ROWS];   // this tile's west side
      net_t e_in  [ROWS];   // this tile's east side
      if (tc == TILE_COLS - 1) begin : g_east_edge
        for (genvar r = 0; r < ROWS; r++) begin : g_z
          assign e_in[r] = '0;
        end
      end else begin : g_east_link
        assign e_in = g_tc[tc+1].w_out;
      end
      if (tc == 0) begin : g_west_edge
        for (genvar r = 0; r < ROWS; r++) begin : g_o
          assign west_out[tr*ROWS + r] = w_out[r];
        end
      end
      gemv_tile #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_tile (
        .clk        (clk),
        .rst        (rst),
        .instr_valid(tile_in[tr*TILE_COLS + tc][INSTR_W]),
        .instr      (tile_in[tr*TILE_COLS + tc][INSTR_W-1:0]),
        .row_base   (ROW_IDW'(tr * ROWS)),
        .col_base   (COL_IDW'(tc * COLS)),
        .east_in    (e_in),
        .west_out   (w_out),
        .mc_busy    (busy_t[tr*TILE_COLS + tc]),
        .mc_done    (done_t[tr*TILE_COLS + tc])
      );
    end
  end

  assign mc_busy = busy_t[0];
  assign mc_done = done_t[0];

endmodule
