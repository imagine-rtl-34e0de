// picaso_alu: the bit-serial ALUs of the PEs of one PiCaSO-IM block.
//
// Every PE owns a one-bit full adder with a carry flip-flop, so an N-bit
// addition or subtraction takes N cycles, LSB first. For multiplication each PE
// also holds a Booth pair (current and previous multiplier bit): radix-2 Booth
// is the paper's stated default PE multiplication. The multiplier bit is
// shifted into the pair by an ALU_BLOAD step (the bit arrives on operand B);
// an ALU_BOOTH pass then adds operand B to operand A (pair 01), subtracts it
// (pair 10) or passes A unchanged (pair 00 or 11).
//
// Interface: op_en qualifies one bit step; first marks the LSB step, on which
// the carry starts at 0 (add) or 1 (subtract). The result bits are registered
// (the ALU pipeline register of Fig. 3(b)) and valid the cycle after the step.
// Carry and Booth pair reset to zero.
module picaso_alu
  import imagine_pkg::*;
#(
  parameter int unsigned WIDTH = PE_PER_BLOCK
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             op_en,
  input  logic             first,
  input  alu_op_e          alu_op,
  input  logic             booth_clr,
  input  logic [WIDTH-1:0] op_a,
  input  logic [WIDTH-1:0] op_b,
  output logic [WIDTH-1:0] result
);

  logic [WIDTH-1:0] carry, booth_cur, booth_prev;
  logic [WIDTH-1:0] b_eff, cin, sum, cout;

  always_comb begin
    for (int p = 0; p < WIDTH; p++) begin
      logic sub;
      logic pass;
      sub  = 1'b0;
      pass = 1'b0;
      unique case (alu_op)
        ALU_SUB:   sub = 1'b1;
        ALU_BOOTH: begin
          sub  = booth_cur[p] & ~booth_prev[p];
          pass = booth_cur[p] == booth_prev[p];
        end
        default: ;
      endcase
      b_eff[p] = pass ? 1'b0 : (op_b[p] ^ sub);
      cin[p]   = first ? sub : carry[p];
      sum[p]   = op_a[p] ^ b_eff[p] ^ cin[p];
      cout[p]  = (op_a[p] & b_eff[p]) | (cin[p] & (op_a[p] ^ b_eff[p]));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      carry      <= '0;
      booth_cur  <= '0;
      booth_prev <= '0;
      result     <= '0;
    end else begin
      if (booth_clr) begin
        booth_cur  <= '0;
        booth_prev <= '0;
      end
      if (op_en) begin
        if (alu_op == ALU_BLOAD) begin
          booth_prev <= booth_cur;
          booth_cur  <= op_b;
        end else begin
          carry  <= cout;
          result <= sum;
        end
      end
    end
  end

endmodule
