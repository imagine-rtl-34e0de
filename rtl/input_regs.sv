// input_regs: the input registers between FIFO-in and the GEMV tiles (Fig. 2(a), item 2).
//
// The front-end processor pushes 30-bit instructions into FIFO-in; this block
// pops one per cycle into a register that feeds the top-level fanout tree.
// Tile controllers have no back-pressure of their own, so after passing on a
// multicycle instruction (opcode bit 3 set) the block stops popping until the
// tiles report mc_done. All tiles run the same instruction stream in
// lock-step, so one tile's done stands for all. The paper names the input
// registers; the wait-for-done flow control is this design's own.
//
// Interface: FIFO-in is a valid/ready pop port (an instruction moves when
// fifo_in_valid && fifo_in_ready). instr_valid/instr are registered.
module input_regs
  import imagine_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               fifo_in_valid,
  input  logic [INSTR_W-1:0] fifo_in_data,
  output logic               fifo_in_ready,
  input  logic               mc_done,
  output logic               instr_valid,
  output logic [INSTR_W-1:0] instr
);

  typedef enum logic {S_ISSUE, S_WAIT} state_e;
  state_e state;

  assign fifo_in_ready = state == S_ISSUE;

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_ISSUE;
      instr_valid <= 1'b0;
      instr       <= '0;
    end else begin
      instr_valid <= fifo_in_valid && fifo_in_ready;
      if (fifo_in_valid && fifo_in_ready) begin
        instr <= fifo_in_data;
        if (fifo_in_data[INSTR_W-1]) state <= S_WAIT;
      end else if (state == S_WAIT && mc_done) begin
        state <= S_ISSUE;
      end
    end
  end

endmodule
