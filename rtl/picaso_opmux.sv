// picaso_opmux: operand multiplexer of a PiCaSO-IM block (OpMux, Fig. 3(b)).
//
// Picks, for every PE of the block, the two one-bit operands of the ALU and
// registers them (the pipeline register after the OpMux in Fig. 3(b)).
// Operand A is register-file port A, port B (used while port A is busy
// transmitting) or zero. Operand B is port B of the same PE, the bit arriving
// from the east neighbour, zero, or port B of the PE 8, 4, 2 or 1 places
// higher: these "fold" choices let the block add its PEs pairwise in place,
// which is how PiCaSO reduces inside a block without copying data. The paper
// names the OpMux and its zero-copy reduction role; the exact set of choices
// and their encoding are this design's own.
//
// Timing: one register stage, outputs valid the cycle after the inputs.
module picaso_opmux
  import imagine_pkg::*;
#(
  parameter int unsigned WIDTH = PE_PER_BLOCK
) (
  input  logic             clk,
  input  opa_sel_e         opa_sel,
  input  opb_sel_e         opb_sel,
  input  logic [WIDTH-1:0] rd_a,
  input  logic [WIDTH-1:0] rd_b,
  input  logic [WIDTH-1:0] east,
  output logic [WIDTH-1:0] op_a,
  output logic [WIDTH-1:0] op_b
);

  logic [WIDTH-1:0] a_d, b_d;

  always_comb begin
    unique case (opa_sel)
      OPA_RF_A: a_d = rd_a;
      OPA_RF_B: a_d = rd_b;
      default:  a_d = '0;
    endcase
    unique case (opb_sel)
      OPB_RF:    b_d = rd_b;
      OPB_EAST:  b_d = east;
      OPB_FOLD8: b_d = rd_b >> 8;
      OPB_FOLD4: b_d = rd_b >> 4;
      OPB_FOLD2: b_d = rd_b >> 2;
      OPB_FOLD1: b_d = rd_b >> 1;
      default:   b_d = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    op_a <= a_d;
    op_b <= b_d;
  end

endmodule
