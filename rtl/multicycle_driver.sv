// multicycle_driver: the multicycle driver FSM of the tile controller (Fig. 3(a)).
//
// Expands one multicycle instruction (ADD, SUB, MULT, ACCUM, READOUT) into the
// stream of per-bit control words that the bit-serial PIM blocks need, one
// control word per cycle. On start it latches the instruction fields; in the
// following LOAD cycle it latches destination and widths from the Op-Params
// registers (the paper's "additional cycle to load its parameters"); it then
// issues the bit steps and finally idles PIPE_DRAIN cycles so that the last
// result has been written back before it reports done.
//
// Issue cycles (N = width, all from this design's algorithm):
//   ADD, SUB : N                      dst+t = A+t (+/-) B+min(t,BW-1)
//   MULT     : sum_{j<N} (1 + 2N - j) per multiplier bit j: one Booth-load
//              step, then 2N-j steps adding +/-A (sign-extended) into the
//              product rows j..2N-1; pass 0 treats the old product as zero
//   ACCUM    : N + 1                  the pointer word is transmitted one cycle
//              ahead of the matching local read, so east-in lines up
//   READOUT  : N                      pointer word sent west, marked valid
// start to done: 1 (LOAD) + issue + PIPE_DRAIN cycles; done is a one-cycle
// pulse in the cycle after the last drain cycle; busy is high from the cycle
// after start until done.
module multicycle_driver
  import imagine_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  opcode_e            opcode,
  input  logic [ADDR_W-1:0]  addr_a,
  input  logic [ADDR_W-1:0]  addr_b,
  input  opb_sel_e           opb_sel,
  input  logic               a_zero,
  input  logic [ADDR_W-1:0]  p_dest,    // from Op-Params
  input  logic [WIDTH_W-1:0] p_width,
  input  logic [WIDTH_W-1:0] p_bwidth,
  output ctrl_t              ctrl,
  output logic               busy,
  output logic               done
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_BLOAD, S_DRAIN} state_e;

  state_e             state;
  opcode_e            op;
  logic [ADDR_W-1:0]  a, b, dst;
  opb_sel_e           bsel;
  logic               azero;
  logic [WIDTH_W-1:0] n, bw;
  logic [WIDTH_W:0]   t;      // bit step inside a pass
  logic [WIDTH_W:0]   j;      // multiplier bit (MULT pass)
  logic [WIDTH_W:0]   last_t; // index of the last step of the current pass
  logic [1:0]         dcnt;

  always_comb begin
    unique case (op)
      OP_MULT:  last_t = {n, 1'b0} - j - 1'b1;
      OP_ACCUM: last_t = {1'b0, n};
      default:  last_t = {1'b0, n} - 1'b1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      op    <= OP_NOP;
      a     <= '0;
      b     <= '0;
      dst   <= '0;
      bsel  <= OPB_RF;
      azero <= 1'b0;
      n     <= '0;
      bw    <= '0;
      t     <= '0;
      j     <= '0;
      dcnt  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op    <= opcode;
          a     <= addr_a;
          b     <= addr_b;
          bsel  <= opb_sel;
          azero <= a_zero;
          state <= S_LOAD;
        end
        S_LOAD: begin
          dst   <= p_dest;
          n     <= p_width;
          bw    <= (p_bwidth == 0) ? p_width : p_bwidth;
          t     <= '0;
          j     <= '0;
          state <= (op == OP_MULT) ? S_BLOAD : S_RUN;
        end
        S_BLOAD: state <= S_RUN;
        S_RUN: begin
          if (t == last_t) begin
            t <= '0;
            if (op == OP_MULT && j + 1'b1 < {1'b0, n}) begin
              j     <= j + 1'b1;
              state <= S_BLOAD;
            end else begin
              dcnt  <= '0;
              state <= S_DRAIN;
            end
          end else begin
            t <= t + 1'b1;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 2'(PIPE_DRAIN - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = state != S_IDLE;

  // ------------------------------------------------------ control word out
  logic [WIDTH_W:0] tb_ext;   // B row index, sign-extended past its width
  logic [WIDTH_W:0] ta_ext;   // multiplicand row index, sign-extended
  always_comb begin
    tb_ext = (t >= {1'b0, bw}) ? {1'b0, bw} - 1'b1 : t;
    ta_ext = (t >= {1'b0, n})  ? {1'b0, n}  - 1'b1 : t;
  end

  always_comb begin
    ctrl         = '0;
    ctrl.alu_op  = ALU_ADD;
    ctrl.opa_sel = OPA_RF_A;
    ctrl.opb_sel = OPB_RF;
    unique case (state)
      S_LOAD:  ctrl.booth_clr = 1'b1;
      S_BLOAD: begin
        ctrl.addr_b = b + ADDR_W'(j);
        ctrl.alu_op = ALU_BLOAD;
        ctrl.op_en  = 1'b1;
      end
      S_RUN: begin
        unique case (op)
          OP_ADD, OP_SUB: begin
            ctrl.addr_a  = a + ADDR_W'(t);
            ctrl.addr_b  = b + ADDR_W'(tb_ext);
            ctrl.opa_sel = azero ? OPA_ZERO : OPA_RF_A;
            ctrl.opb_sel = bsel;
            ctrl.alu_op  = (op == OP_SUB) ? ALU_SUB : ALU_ADD;
            ctrl.op_en   = 1'b1;
            ctrl.first   = t == 0;
            ctrl.wr_addr = dst + ADDR_W'(t);
          end
          OP_MULT: begin
            ctrl.addr_a  = dst + ADDR_W'(j) + ADDR_W'(t);
            ctrl.addr_b  = a + ADDR_W'(ta_ext);
            ctrl.opa_sel = (j == 0) ? OPA_ZERO : OPA_RF_A;
            ctrl.alu_op  = ALU_BOOTH;
            ctrl.op_en   = 1'b1;
            ctrl.first   = t == 0;
            ctrl.wr_addr = dst + ADDR_W'(j) + ADDR_W'(t);
          end
          OP_ACCUM: begin
            ctrl.is_tx   = t < {1'b0, n};
            ctrl.addr_b  = a + ADDR_W'(t) - 1'b1;
            ctrl.opa_sel = OPA_RF_B;
            ctrl.opb_sel = OPB_EAST;
            ctrl.op_en   = t != 0;
            ctrl.first   = t == 1;
            ctrl.wr_addr = dst + ADDR_W'(t) - 1'b1;
          end
          OP_READOUT: begin
            ctrl.is_tx     = 1'b1;
            ctrl.net_valid = 1'b1;
          end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

endmodule
