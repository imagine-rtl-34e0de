// imagine_top: the IMAGine GEMV engine (Fig. 2(a)).
//
// FIFO-in -> input registers -> top-level fanout tree -> 2D array of GEMV tiles
// -> column shift registers -> FIFO-out. The front-end processor (outside this
// design) pushes 30-bit instructions into FIFO-in; every tile decodes the same
// stream and drives its own PIM blocks; partial results move east to west and
// end in the westernmost PIM column, from where a READOUT instruction moves
// them into the column shift registers, which send one result per cycle to
// FIFO-out. Instruction encoding: see imagine_pkg.
//
// Default size: 12 x 14 tiles of 12 x 2 blocks of 16 PEs = 4032 blocks (one per
// BRAM18 pair half, 2016 BRAM36) and 64,512 PEs, the paper's U55 build. The
// split of the 168 tiles into rows and columns and the depth of the top-level
// fanout tree are not given by the paper and are this design's choice.
module imagine_top
  import imagine_pkg::*;
#(
  parameter int unsigned TILE_ROWS     = 12,
  parameter int unsigned TILE_COLS     = 14,
  parameter int unsigned ROWS          = 12,
  parameter int unsigned COLS          = 2,
  parameter int unsigned DEPTH         = RF_DEPTH,
  parameter int unsigned TOP_FO_LEVELS = 4,
  parameter int unsigned TOP_FANOUT    = 4,
  parameter int unsigned ACC_W         = 32,
  parameter int unsigned OUT_STAGES    = 2
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               fifo_in_valid,
  input  logic [INSTR_W-1:0] fifo_in_data,
  output logic               fifo_in_ready,
  output logic               fifo_out_valid,
  output logic [ACC_W-1:0]   fifo_out_data,
  output logic               busy
);

  localparam int unsigned NT = TILE_ROWS * TILE_COLS;
  localparam int unsigned BR = TILE_ROWS * ROWS;

  logic               iv;
  logic [INSTR_W-1:0] ins;
  logic [INSTR_W:0]   tile_in [NT];
  net_t               west [BR];
  logic               mc_busy, mc_done, csr_busy;

  input_regs u_in (
    .clk          (clk),
    .rst          (rst),
    .fifo_in_valid(fifo_in_valid),
    .fifo_in_data (fifo_in_data),
    .fifo_in_ready(fifo_in_ready),
    .mc_done      (mc_done),
    .instr_valid  (iv),
    .instr        (ins)
  );

  fanout_tree #(.W(INSTR_W+1), .N_OUT(NT), .LEVELS(TOP_FO_LEVELS), .FANOUT(TOP_FANOUT)) u_fo (
    .clk (clk),
    .din ({iv, ins}),
    .dout(tile_in)
  );

  tile_array #(.TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .ROWS(ROWS), .COLS(COLS),
               .DEPTH(DEPTH)) u_tiles (
    .clk     (clk),
    .rst     (rst),
    .tile_in (tile_in),
    .west_out(west),
    .mc_busy (mc_busy),
    .mc_done (mc_done)
  );

  column_shift_regs #(.BLOCK_ROWS(BR), .ACC_W(ACC_W), .OUT_STAGES(OUT_STAGES)) u_csr (
    .clk           (clk),
    .rst           (rst),
    .west          (west),
    .fifo_out_valid(fifo_out_valid),
    .fifo_out_data (fifo_out_data),
    .busy          (csr_busy)
  );

  assign busy = mc_busy || csr_busy || !fifo_in_ready;

endmodule
