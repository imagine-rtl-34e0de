// tile_controller: the FSM-based controller of a GEMV tile (Fig. 3(a)).
//
// Takes the 30-bit instruction from the top-level fanout tree and produces one
// control word per cycle for the tile's PIM array. The organisation follows the
// paper: input register -> Decoder -> [A] -> Op-Params -> [B] -> Driver-Select
// FSM, Single-Cycle Driver and Multicycle Driver -> [C] -> outmux -> output
// register. A, B and C are optional pipeline registers (PIPE_A/B/C); the paper
// enabled A in its final implementation, which is the default here. Each only
// adds one cycle of latency to every instruction alike.
//
//   Decoder        splits the instruction into opcode and fields.
//   Op-Params      holds destination address and operand widths, written by
//                  SET_PARAM and read by the multicycle driver in its LOAD cycle.
//   Single-Cycle   turns SELECT, WRITE_ROW and SET_PTR into one control word.
//   Multicycle     expands ADD/SUB/MULT/ACCUM/READOUT (multicycle_driver).
//   Driver-Select  two states, SINGLE and MULTI: a multicycle instruction
//                  moves it to MULTI, the multicycle driver's done moves it
//                  back; the outmux follows it.
//
// Interface: instr_valid/instr in; ctrl out (registered); mc_done pulses when a
// multicycle instruction has completed, mc_busy is high while one runs. The
// controller has no input back-pressure: the sender must not send a new
// instruction while a multicycle one runs (the top-level input registers wait
// for mc_done). Latency from instr to ctrl: 2 + PIPE_A + PIPE_B + PIPE_C cycles
// for a single-cycle instruction, plus one LOAD cycle for a multicycle one.
module tile_controller
  import imagine_pkg::*;
#(
  parameter bit PIPE_A = 1'b1,
  parameter bit PIPE_B = 1'b0,
  parameter bit PIPE_C = 1'b0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               instr_valid,
  input  logic [INSTR_W-1:0] instr,
  output ctrl_t              ctrl,
  output logic               mc_busy,
  output logic               mc_done
);

  typedef struct packed {
    logic               valid;
    opcode_e            opcode;
    logic [ADDR_W-1:0]  addr_a;   // [25:16]
    logic [ADDR_W-1:0]  addr_b;   // [15:6]
    logic [15:0]        data;     // [15:0]
    logic [ROW_IDW-1:0] sel_row;  // [25:18]
    logic [COL_IDW-1:0] sel_col;  // [17:12]
    logic               match_row;
    logic               match_col;
    opb_sel_e           opb_sel;  // [5:3]
    logic               a_zero;   // [2]
    logic [WIDTH_W-1:0] width;    // [11:6]
    logic [WIDTH_W-1:0] bwidth;   // [5:0]
  } dec_t;

  // ---------------------------------------------------------- input register
  logic               iv_q;
  logic [INSTR_W-1:0] instr_q;
  always_ff @(posedge clk) begin
    if (rst) iv_q <= 1'b0;
    else     iv_q <= instr_valid;
    instr_q <= instr;
  end

  // ----------------------------------------------------------------- Decoder
  dec_t dec;
  always_comb begin
    dec.valid     = iv_q;
    dec.opcode    = opcode_e'(instr_q[29:26]);
    dec.addr_a    = instr_q[25:16];
    dec.addr_b    = instr_q[15:6];
    dec.data      = instr_q[15:0];
    dec.sel_row   = instr_q[25:18];
    dec.sel_col   = instr_q[17:12];
    dec.match_row = instr_q[1];
    dec.match_col = instr_q[0];
    dec.opb_sel   = opb_sel_e'(instr_q[5:3]);
    dec.a_zero    = instr_q[2];
    dec.width     = instr_q[11:6];
    dec.bwidth    = instr_q[5:0];
  end

  // ------------------------------------------------------------ stage A
  dec_t dec_a;
  if (PIPE_A) begin : g_pa
    always_ff @(posedge clk) begin
      if (rst) dec_a <= '0;
      else     dec_a <= dec;
    end
  end else begin : g_na
    assign dec_a = dec;
  end

  // --------------------------------------------------------------- Op-Params
  logic [ADDR_W-1:0]  p_dest;
  logic [WIDTH_W-1:0] p_width, p_bwidth;
  always_ff @(posedge clk) begin
    if (rst) begin
      p_dest   <= '0;
      p_width  <= WIDTH_W'(8);
      p_bwidth <= '0;
    end else if (dec_a.valid && dec_a.opcode == OP_SET_PARAM) begin
      p_dest   <= dec_a.addr_a;
      p_width  <= dec_a.width;
      p_bwidth <= dec_a.bwidth;
    end
  end

  // ------------------------------------------------------------ stage B
  dec_t dec_b;
  if (PIPE_B) begin : g_pb
    always_ff @(posedge clk) begin
      if (rst) dec_b <= '0;
      else     dec_b <= dec_a;
    end
  end else begin : g_nb
    assign dec_b = dec_a;
  end

  logic is_mc;
  assign is_mc = dec_b.valid && dec_b.opcode[3];

  // ------------------------------------------------------ Driver-Select FSM
  typedef enum logic {D_SINGLE, D_MULTI} dsel_e;
  dsel_e dsel;
  logic  mc_fin;

  always_ff @(posedge clk) begin
    if (rst) dsel <= D_SINGLE;
    else unique case (dsel)
      D_SINGLE: if (is_mc)  dsel <= D_MULTI;
      D_MULTI:  if (mc_fin) dsel <= D_SINGLE;
      default:  dsel <= D_SINGLE;
    endcase
  end

  // ----------------------------------------------------- Single-Cycle Driver
  ctrl_t sc_ctrl;
  always_comb begin
    sc_ctrl         = '0;
    sc_ctrl.alu_op  = ALU_ADD;
    sc_ctrl.opa_sel = OPA_RF_A;
    sc_ctrl.opb_sel = OPB_RF;
    if (dec_b.valid) begin
      unique case (dec_b.opcode)
        OP_SELECT: begin
          sc_ctrl.sel_load  = 1'b1;
          sc_ctrl.sel_row   = dec_b.sel_row;
          sc_ctrl.sel_col   = dec_b.sel_col;
          sc_ctrl.match_row = dec_b.match_row;
          sc_ctrl.match_col = dec_b.match_col;
        end
        OP_WRITE_ROW: begin
          sc_ctrl.wr_row = 1'b1;
          sc_ctrl.addr_a = dec_b.addr_a;
          sc_ctrl.wdata  = dec_b.data;
        end
        OP_SET_PTR: begin
          sc_ctrl.ptr_load = 1'b1;
          sc_ctrl.addr_a   = dec_b.addr_a;
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------- Multicycle Driver
  ctrl_t mc_ctrl;
  logic  mcd_busy;
  multicycle_driver u_mcd (
    .clk     (clk),
    .rst     (rst),
    .start   (is_mc && dsel == D_SINGLE),
    .opcode  (dec_b.opcode),
    .addr_a  (dec_b.addr_a),
    .addr_b  (dec_b.addr_b),
    .opb_sel (dec_b.opb_sel),
    .a_zero  (dec_b.a_zero),
    .p_dest  (p_dest),
    .p_width (p_width),
    .p_bwidth(p_bwidth),
    .ctrl    (mc_ctrl),
    .busy    (mcd_busy),
    .done    (mc_fin)
  );

  // ------------------------------------------------------------ stage C
  ctrl_t sc_c, mc_c;
  dsel_e dsel_c;
  if (PIPE_C) begin : g_pc
    always_ff @(posedge clk) begin
      if (rst) begin
        sc_c   <= '0;
        mc_c   <= '0;
        dsel_c <= D_SINGLE;
      end else begin
        sc_c   <= sc_ctrl;
        mc_c   <= mc_ctrl;
        dsel_c <= dsel;
      end
    end
  end else begin : g_nc
    assign sc_c   = sc_ctrl;
    assign mc_c   = mc_ctrl;
    assign dsel_c = dsel;
  end

  // ------------------------------------------------- outmux + output register
  always_ff @(posedge clk) begin
    if (rst) begin
      ctrl    <= '0;
      mc_done <= 1'b0;
      mc_busy <= 1'b0;
    end else begin
      ctrl    <= (dsel_c == D_MULTI) ? mc_c : sc_c;
      mc_done <= mc_fin;
      mc_busy <= dsel == D_MULTI || mcd_busy;
    end
  end

  // The sender must hold new instructions back while a multicycle one runs.
  a_no_instr_while_busy: assert property (@(posedge clk) disable iff (rst)
    !(dec_b.valid && dsel == D_MULTI));

endmodule
