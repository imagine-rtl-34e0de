// picaso_im_block: one PiCaSO-IM processing-in-memory block (Fig. 3(b)).
//
// A block is a register file (one FPGA BRAM in the paper) whose bit-lines are
// each served by a bit-serial PE. The datapath is the pipelined PiCaSO-F
// arrangement: register-file read -> OpMux -> ALU -> write back, with a register
// after each of the three. Around it sit the three additions the paper makes
// for IMAGine (red in Fig. 3(b)):
//   * Network node: a register that sends the word read on port A west
//     (west_out) while the block transmits; the east neighbour's word enters
//     the OpMux from east_in. This replaces PiCaSO's NEWS network by a plain
//     east-to-west link.
//   * Pointer register: a third address. While is_tx is set, port A is
//     addressed by the pointer instead of addr_a, and the pointer advances by
//     one row per cycle, so a block can transmit one operand while it reads
//     and writes two others.
//   * Select: compares the block's (row, column) ID with the last SELECT
//     instruction; only selected blocks write their register file.
//
// Timing, counted from the cycle a control word arrives on ctrl:
//   +1 register-file data; +2 west_out and OpMux output; +3 ALU result;
//   the result is written at the end of cycle +3 to ctrl.wr_addr (delayed).
// A neighbour's east_in lines up with this block's port-B data when this block
// reads one cycle after the neighbour transmitted; the tile controller issues
// ACCUM that way. WRITE_ROW, SET_PTR and SELECT act at the end of cycle 0.
// Row/column IDs, the selection rule (match row and/or column) and the reset
// values (all blocks selected, pointer 0) are this design's own choices.
module picaso_im_block
  import imagine_pkg::*;
#(
  parameter int unsigned DEPTH = RF_DEPTH
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [ROW_IDW-1:0] row_id,
  input  logic [COL_IDW-1:0] col_id,
  input  ctrl_t              ctrl,
  input  net_t               east_in,
  output net_t               west_out
);

  localparam int unsigned W = PE_PER_BLOCK;

  // ---------------------------------------------------------------- stage 0
  logic [ADDR_W-1:0]  ptr;
  logic               sel_mrow, sel_mcol;
  logic [ROW_IDW-1:0] sel_row;
  logic [COL_IDW-1:0] sel_col;
  logic               selected;

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr      <= '0;
      sel_mrow <= 1'b0;
      sel_mcol <= 1'b0;
      sel_row  <= '0;
      sel_col  <= '0;
    end else begin
      if (ctrl.ptr_load)   ptr <= ctrl.addr_a;
      else if (ctrl.is_tx) ptr <= ptr + 1'b1;
      if (ctrl.sel_load) begin
        sel_mrow <= ctrl.match_row;
        sel_mcol <= ctrl.match_col;
        sel_row  <= ctrl.sel_row;
        sel_col  <= ctrl.sel_col;
      end
    end
  end

  assign selected = (!sel_mrow || sel_row == row_id) && (!sel_mcol || sel_col == col_id);

  logic [ADDR_W-1:0] rf_addr_a;
  assign rf_addr_a = ctrl.is_tx ? ptr : ctrl.addr_a;

  // pipeline copies of the operation fields
  typedef struct packed {
    logic              op_en;
    logic              first;
    alu_op_e           alu_op;
    opa_sel_e          opa_sel;
    opb_sel_e          opb_sel;
    logic              booth_clr;
    logic              is_tx;
    logic              net_valid;
    logic [ADDR_W-1:0] wr_addr;
  } pipe_t;

  pipe_t s1, s2, s3;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1 <= '0;
      s2 <= '0;
      s3 <= '0;
    end else begin
      s1 <= '{op_en: ctrl.op_en, first: ctrl.first, alu_op: ctrl.alu_op,
             opa_sel: ctrl.opa_sel, opb_sel: ctrl.opb_sel, booth_clr: ctrl.booth_clr,
             is_tx: ctrl.is_tx, net_valid: ctrl.net_valid, wr_addr: ctrl.wr_addr};
      s2 <= s1;
      s3 <= s2;
    end
  end

  // ---------------------------------------------------------- register file
  logic [W-1:0] rd_a, rd_b, result;
  logic         rf_we, pipe_we, row_we;
  logic [ADDR_W-1:0] rf_waddr;
  logic [W-1:0] rf_wdata;

  assign row_we  = ctrl.wr_row && selected;
  assign pipe_we = s3.op_en && s3.alu_op != ALU_BLOAD && selected;
  assign rf_we    = row_we || pipe_we;
  assign rf_waddr = row_we ? ctrl.addr_a : s3.wr_addr;
  assign rf_wdata = row_we ? ctrl.wdata  : result;

  picaso_regfile #(.DEPTH(DEPTH), .WIDTH(W)) u_rf (
    .clk    (clk),
    .addr_a (rf_addr_a[$clog2(DEPTH)-1:0]),
    .addr_b (ctrl.addr_b[$clog2(DEPTH)-1:0]),
    .rd_a   (rd_a),
    .rd_b   (rd_b),
    .we     (rf_we),
    .wr_addr(rf_waddr[$clog2(DEPTH)-1:0]),
    .wr_data(rf_wdata)
  );

  // ------------------------------------------------- stage 1: network node
  always_ff @(posedge clk) begin
    if (rst) west_out <= '0;
    else begin
      west_out.valid <= s1.is_tx && s1.net_valid;
      west_out.data  <= s1.is_tx ? rd_a : '0;
    end
  end

  // ------------------------------------------------------- stage 1: OpMux
  logic [W-1:0] op_a, op_b;

  picaso_opmux #(.WIDTH(W)) u_opmux (
    .clk    (clk),
    .opa_sel(s1.opa_sel),
    .opb_sel(s1.opb_sel),
    .rd_a   (rd_a),
    .rd_b   (rd_b),
    .east   (east_in.data),
    .op_a   (op_a),
    .op_b   (op_b)
  );

  // --------------------------------------------------------- stage 2: ALU
  picaso_alu #(.WIDTH(W)) u_alu (
    .clk      (clk),
    .rst      (rst),
    .op_en    (s2.op_en),
    .first    (s2.first),
    .alu_op   (s2.alu_op),
    .booth_clr(s2.booth_clr),
    .op_a     (op_a),
    .op_b     (op_b),
    .result   (result)
  );

  // A single-cycle row write never meets a pipelined write-back: the
  // controller drains the pipeline before it lets the next instruction in.
  a_no_wr_collision: assert property (@(posedge clk) disable iff (rst)
    !(ctrl.wr_row && s3.op_en && s3.alu_op != ALU_BLOAD));

endmodule
