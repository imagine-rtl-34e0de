// imagine_pkg: types and constants shared by the IMAGine GEMV engine.
//
// IMAGine is a GEMV overlay built from a 2D array of GEMV tiles, each holding a
// tile controller and a 2D array of PiCaSO-IM processing-in-memory blocks. The
// front end sends 30-bit instructions; each tile controller turns them into a
// per-cycle control bundle (ctrl_t) that is broadcast to every PIM block.
//
// The 30-bit instruction width, the single-cycle / multicycle split and the
// Op-Params module come from the paper. The opcode values, the field layout of
// the instruction and the contents of the control bundle are this design's own
// choices (the paper does not publish an encoding):
//
//   [29:26] opcode, opcode[3]=1 marks a multicycle instruction
//   NOP       : -
//   SELECT    : [25:18] block row id, [17:12] block column id,
//               [1] match row, [0] match column  (ID-based block selection)
//   WRITE_ROW : [25:16] address, [15:0] one bit per PE of the block
//   SET_PTR   : [25:16] value of the pointer register (third address)
//   SET_PARAM : [25:16] destination address, [11:6] width N, [5:0] width of B
//   multicycle: [25:16] address A, [15:6] address B, [5:3] operand-B source,
//               [2] operand A forced to zero
//
// Multicycle operations (all bit-serial, LSB at the lowest address):
//   ADD   : dst[0..N) = A + B         (B sign-extended past its width)
//   SUB   : dst[0..N) = A - B
//   MULT  : dst[0..2N) = A * B        (signed, radix-2 Booth, N-bit operands)
//   ACCUM : dst[0..N) = A + east      (east = neighbour's word at its pointer)
//   READOUT: stream N rows at the pointer out of the west port, marked valid
package imagine_pkg;

  localparam int unsigned INSTR_W  = 30;   // paper: 30-bit instruction
  localparam int unsigned PE_PER_BLOCK = 16; // PEs (bit-lines) per PIM block
  localparam int unsigned RF_DEPTH = 1024; // rows of a PIM block register file
  localparam int unsigned ADDR_W   = 10;
  localparam int unsigned ROW_IDW  = 8;    // block-row id width
  localparam int unsigned COL_IDW  = 6;    // block-column id width
  localparam int unsigned WIDTH_W  = 6;    // operand width field
  localparam int unsigned PIPE_DRAIN = 3;  // PIM block read->write latency

  typedef enum logic [3:0] {
    OP_NOP       = 4'h0,
    OP_SELECT    = 4'h1,
    OP_WRITE_ROW = 4'h2,
    OP_SET_PTR   = 4'h3,
    OP_SET_PARAM = 4'h4,
    OP_ADD       = 4'h8,
    OP_SUB       = 4'h9,
    OP_MULT      = 4'hA,
    OP_ACCUM     = 4'hB,
    OP_READOUT   = 4'hC
  } opcode_e;

  // Operand-B source selected in the OpMux.
  typedef enum logic [2:0] {
    OPB_RF    = 3'd0,   // register-file port B of the same PE
    OPB_EAST  = 3'd1,   // east-in from the neighbouring block
    OPB_FOLD8 = 3'd2,   // port B of PE p+8 (in-block reduction)
    OPB_FOLD4 = 3'd3,   // port B of PE p+4
    OPB_FOLD2 = 3'd4,   // port B of PE p+2
    OPB_FOLD1 = 3'd5,   // port B of PE p+1
    OPB_ZERO  = 3'd6
  } opb_sel_e;

  // Operand-A source selected in the OpMux.
  typedef enum logic [1:0] {
    OPA_RF_A = 2'd0,    // register-file port A
    OPA_RF_B = 2'd1,    // register-file port B (port A busy transmitting)
    OPA_ZERO = 2'd2
  } opa_sel_e;

  typedef enum logic [1:0] {
    ALU_ADD   = 2'd0,
    ALU_SUB   = 2'd1,
    ALU_BOOTH = 2'd2,   // add, subtract or pass A by the PE's Booth pair
    ALU_BLOAD = 2'd3    // shift operand-B bit into the PE's Booth pair
  } alu_op_e;

  // Control bundle that the tile controller sends to every PIM block.
  typedef struct packed {
    // register-file read side
    logic [ADDR_W-1:0]  addr_a;
    logic [ADDR_W-1:0]  addr_b;
    logic               is_tx;      // port A reads the pointer, data goes west
    logic               net_valid;  // west-out data is a read-out word
    // operation travelling down the block pipeline
    logic               op_en;
    logic               first;      // first bit: initialise the carry
    alu_op_e            alu_op;
    opa_sel_e           opa_sel;
    opb_sel_e           opb_sel;
    logic               booth_clr;
    logic [ADDR_W-1:0]  wr_addr;
    // single-cycle actions
    logic               wr_row;
    logic [PE_PER_BLOCK-1:0] wdata;
    logic               ptr_load;
    logic               sel_load;
    logic [ROW_IDW-1:0] sel_row;
    logic [COL_IDW-1:0] sel_col;
    logic               match_row;
    logic               match_col;
  } ctrl_t;

  localparam int unsigned CTRL_W = $bits(ctrl_t);

  // West-out / east-in link between neighbouring PIM blocks.
  typedef struct packed {
    logic                    valid;  // read-out word bit
    logic [PE_PER_BLOCK-1:0] data;   // one bit per PE
  } net_t;

  // ------------------------------------------------ instruction encoders
  typedef logic [INSTR_W-1:0] instr_t;

  function automatic instr_t enc_select(input logic [ROW_IDW-1:0] row, input logic [COL_IDW-1:0] col,
                                        input logic match_row, input logic match_col);
    return {OP_SELECT, row, col, 10'b0, match_row, match_col};
  endfunction

  function automatic instr_t enc_write_row(input logic [ADDR_W-1:0] addr,
                                           input logic [PE_PER_BLOCK-1:0] data);
    return {OP_WRITE_ROW, addr, data};
  endfunction

  function automatic instr_t enc_set_ptr(input logic [ADDR_W-1:0] addr);
    return {OP_SET_PTR, addr, 16'b0};
  endfunction

  function automatic instr_t enc_set_param(input logic [ADDR_W-1:0] dest,
                                           input logic [WIDTH_W-1:0] width,
                                           input logic [WIDTH_W-1:0] bwidth);
    return {OP_SET_PARAM, dest, 4'b0, width, bwidth};
  endfunction

  function automatic instr_t enc_mc(input opcode_e op, input logic [ADDR_W-1:0] a,
                                    input logic [ADDR_W-1:0] b, input opb_sel_e bsel,
                                    input logic a_zero);
    return {op, a, b, bsel, a_zero, 2'b0};
  endfunction

endpackage
