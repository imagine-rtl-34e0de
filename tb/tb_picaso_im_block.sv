// tb_picaso_im_block: self-checking test of one PiCaSO-IM block.
//
// Feeds hand-built control words (one per cycle, as the tile controller
// would) and checks: row writes and ID-based selection, bit-serial ADD and SUB
// through the read/OpMux/ALU/write-back pipeline, in-block fold reduction,
// accumulation of a bit stream arriving on east_in, and the pointer-addressed
// transmit path to west_out, which is also how results are read back. The
// expected values are plain integer arithmetic on the data the testbench wrote.
module tb_picaso_im_block;
  import imagine_pkg::*;

  localparam int W = PE_PER_BLOCK;
  logic clk = 1'b0, rst = 1'b1;
  ctrl_t ctrl;
  net_t  east_in, west_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  picaso_im_block #(.DEPTH(RF_DEPTH)) dut (
    .clk(clk), .rst(rst), .row_id(8'd3), .col_id(6'd5),
    .ctrl(ctrl), .east_in(east_in), .west_out(west_out));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ctrl_t idle();
    ctrl_t c;
    c = '0;
    c.alu_op = ALU_ADD; c.opa_sel = OPA_RF_A; c.opb_sel = OPB_RF;
    return c;
  endfunction

  // one control word for one cycle
  task automatic issue(input ctrl_t c);
    @(negedge clk);
    ctrl = c;
  endtask

  task automatic write_word(input int addr, input int n, input logic [31:0] v [W]);
    ctrl_t c;
    for (int t = 0; t < n; t++) begin
      c = idle();
      c.wr_row = 1'b1;
      c.addr_a = ADDR_W'(addr + t);
      for (int p = 0; p < W; p++) c.wdata[p] = v[p][t];
      issue(c);
    end
    issue(idle());
  endtask

  // read an n-bit word of every PE back through the transmit path
  task automatic read_word(input int addr, input int n, output logic [31:0] v [W]);
    ctrl_t c;
    int got;
    c = idle(); c.ptr_load = 1'b1; c.addr_a = ADDR_W'(addr);
    issue(c);
    for (int p = 0; p < W; p++) v[p] = '0;
    got = 0;
    fork
      begin
        for (int t = 0; t < n; t++) begin
          c = idle(); c.is_tx = 1'b1; c.net_valid = 1'b1;
          issue(c);
        end
        issue(idle());
      end
      begin
        repeat (n + 6) begin
          @(posedge clk); #1;
          if (west_out.valid) begin
            for (int p = 0; p < W; p++) v[p][got] = west_out.data[p];
            got++;
          end
        end
      end
    join
    checks++;
    if (got != n) begin
      failures++;
      $display("FAIL read-out gave %0d bits, expected %0d", got, n);
    end
  endtask

  // bit-serial operation on all PEs: dst = A (op) B
  task automatic alu_word(input alu_op_e op, input opa_sel_e asel, input opb_sel_e bsel,
                          input int a, input int b, input int dst, input int n);
    ctrl_t c;
    for (int t = 0; t < n; t++) begin
      c = idle();
      c.addr_a = ADDR_W'(a + t); c.addr_b = ADDR_W'(b + t);
      c.opa_sel = asel; c.opb_sel = bsel; c.alu_op = op;
      c.op_en = 1'b1; c.first = (t == 0); c.wr_addr = ADDR_W'(dst + t);
      issue(c);
    end
    repeat (PIPE_DRAIN) issue(idle());
  endtask

  task automatic check_vec(input string what, input int n, input logic [31:0] got [W],
                           input logic [31:0] exp [W]);
    logic [31:0] m;
    m = (n >= 32) ? '1 : ((32'h1 << n) - 1);
    for (int p = 0; p < W; p++) begin
      checks++;
      if (((got[p] ^ exp[p]) & m) != 0) begin
        failures++;
        $display("FAIL %s pe=%0d got=%h exp=%h", what, p, got[p] & m, exp[p] & m);
      end
    end
  endtask

  logic [31:0] va [W], vb [W], ve [W], vr [W], vx [W];
  int unsigned sel_writes_seen;

  initial begin
    ctrl = idle(); east_in = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int p = 0; p < W; p++) begin va[p] = $urandom; vb[p] = $urandom; end

    // write and read back
    write_word(0, 16, va);
    write_word(16, 16, vb);
    read_word(0, 16, vr);
    check_vec("write/read A", 16, vr, va);

    // ADD and SUB
    alu_word(ALU_ADD, OPA_RF_A, OPB_RF, 0, 16, 40, 16);
    read_word(40, 16, vr);
    for (int p = 0; p < W; p++) ve[p] = va[p] + vb[p];
    check_vec("ADD", 16, vr, ve);
    alu_word(ALU_SUB, OPA_RF_A, OPB_RF, 0, 16, 60, 16);
    read_word(60, 16, vr);
    for (int p = 0; p < W; p++) ve[p] = va[p] - vb[p];
    check_vec("SUB", 16, vr, ve);

    // fold by 8: PE p adds PE p+8's value (zero beyond the block)
    alu_word(ALU_ADD, OPA_RF_A, OPB_FOLD8, 0, 0, 80, 16);
    read_word(80, 16, vr);
    for (int p = 0; p < W; p++) ve[p] = va[p] + ((p + 8 < W) ? va[p+8] : 0);
    check_vec("FOLD8", 16, vr, ve);

    // accumulate an east-in stream: east bit t must arrive one cycle after
    // the control word of bit t, as the neighbour's west_out does
    for (int p = 0; p < W; p++) vx[p] = $urandom;
    fork
      alu_word(ALU_ADD, OPA_RF_B, OPB_EAST, 0, 16, 100, 16);
      begin
        @(negedge clk);
        for (int t = 0; t < 16; t++) begin
          @(negedge clk);
          for (int p = 0; p < W; p++) east_in.data[p] = vx[p][t];
        end
        @(negedge clk); east_in = '0;
      end
    join
    read_word(100, 16, vr);
    for (int p = 0; p < W; p++) ve[p] = vb[p] + vx[p];
    check_vec("EAST accumulate", 16, vr, ve);

    // ID-based select: a SELECT naming another column blocks writes
    begin
      ctrl_t c;
      c = idle(); c.sel_load = 1'b1; c.match_col = 1'b1; c.sel_col = 6'd4;
      issue(c);
      write_word(0, 16, vb);                 // must be ignored
      alu_word(ALU_ADD, OPA_RF_A, OPB_RF, 16, 16, 40, 16); // must be ignored
      c = idle(); c.sel_load = 1'b1; c.match_col = 1'b1; c.match_row = 1'b1;
      c.sel_col = 6'd5; c.sel_row = 8'd3;
      issue(c);
    end
    read_word(0, 16, vr);
    check_vec("deselected row write", 16, vr, va);
    read_word(40, 16, vr);
    for (int p = 0; p < W; p++) ve[p] = va[p] + vb[p];
    check_vec("deselected ALU write", 16, vr, ve);
    write_word(200, 16, vb);                 // selected by row and column
    read_word(200, 16, vr);
    check_vec("selected write", 16, vr, vb);

    // west_out stays invalid when nothing is read out
    checks++;
    repeat (4) @(posedge clk);
    if (west_out.valid) begin failures++; $display("FAIL west_out valid while idle"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
