// tb_tile_controller: self-checking test of the tile controller.
//
// Two controllers run side by side: the default one (pipeline stage A only)
// and one with stages A, B and C all enabled. For each single-cycle
// instruction the control word must appear exactly 2 + (stages) cycles later
// with the decoded fields; SET_PARAM must reach the multicycle driver through
// Op-Params (ADD writes to the destination it names, for the width it names);
// the driver-select FSM must hand the output to the multicycle driver for the
// whole operation and back; and mc_done must follow.
module tb_tile_controller;
  import imagine_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic instr_valid;
  instr_t instr;
  ctrl_t c0, c1;
  logic b0, b1, d0, d1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tile_controller u0 (.clk(clk), .rst(rst), .instr_valid(instr_valid), .instr(instr),
                      .ctrl(c0), .mc_busy(b0), .mc_done(d0));
  tile_controller #(.PIPE_A(1'b1), .PIPE_B(1'b1), .PIPE_C(1'b1)) u1 (
                      .clk(clk), .rst(rst), .instr_valid(instr_valid), .instr(instr),
                      .ctrl(c1), .mc_busy(b1), .mc_done(d1));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // history of outputs, index 0 = newest
  ctrl_t h0 [$], h1 [$];
  always @(posedge clk) begin
    #1;
    h0.push_front(c0); h1.push_front(c1);
    if (h0.size() > 64) begin void'(h0.pop_back()); void'(h1.pop_back()); end
  end

  task automatic send1(input instr_t i, output ctrl_t o0, output ctrl_t o1);
    @(negedge clk); instr_valid = 1'b1; instr = i;
    @(negedge clk); instr_valid = 1'b0;
    repeat (6) @(negedge clk);
    // sent at cycle 0: controller 0 shows it after 3 edges, controller 1 after 5
    o0 = h0[6 + 1 - 3];
    o1 = h1[6 + 1 - 5];
  endtask

  initial begin
    ctrl_t o0, o1;
    instr_valid = 0; instr = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int it = 0; it < 50; it++) begin
      logic [9:0] a; logic [15:0] d; logic [7:0] r; logic [5:0] c;
      a = 10'($urandom); d = 16'($urandom); r = 8'($urandom); c = 6'($urandom);
      send1(enc_write_row(a, d), o0, o1);
      chk(o0.wr_row && o0.addr_a == a && o0.wdata == d, "WRITE_ROW ctrl0");
      chk(o1.wr_row && o1.addr_a == a && o1.wdata == d, "WRITE_ROW ctrl1");
      send1(enc_set_ptr(a), o0, o1);
      chk(o0.ptr_load && o0.addr_a == a && !o0.wr_row, "SET_PTR ctrl0");
      chk(o1.ptr_load && o1.addr_a == a, "SET_PTR ctrl1");
      send1(enc_select(r, c, it[0], it[1]), o0, o1);
      chk(o0.sel_load && o0.sel_row == r && o0.sel_col == c && o0.match_row == it[0] &&
          o0.match_col == it[1], "SELECT ctrl0");
      chk(o1.sel_load && o1.sel_row == r && o1.sel_col == c, "SELECT ctrl1");
    end
    // Op-Params then ADD: count the writes and check their addresses
    for (int it = 0; it < 10; it++) begin
      int n, dst, seen0, seen1, bad, dn0, dn1;
      n = 2 + ($urandom % 40); dst = $urandom % 512;
      @(negedge clk); instr_valid = 1; instr = enc_set_param(ADDR_W'(dst), WIDTH_W'(n), '0);
      @(negedge clk); instr = enc_mc(OP_ADD, 10'd3, 10'd700, OPB_RF, 1'b0);
      @(negedge clk); instr_valid = 0;
      seen0 = 0; seen1 = 0; bad = 0; dn0 = 0; dn1 = 0;
      repeat (n + 20) begin
        @(negedge clk);
        if (c0.op_en) begin if (c0.wr_addr != ADDR_W'(dst + seen0)) bad++; seen0++; end
        if (c1.op_en) begin if (c1.wr_addr != ADDR_W'(dst + seen1)) bad++; seen1++; end
        dn0 += int'(d0); dn1 += int'(d1);
      end
      chk(dn0 == 1 && dn1 == 1, "one mc_done pulse per controller");
      chk(seen0 == n && seen1 == n && bad == 0,
          $sformatf("ADD via Op-Params: %0d/%0d steps, expected %0d, %0d bad addresses", seen0, seen1, n, bad));
      chk(!b0 && !b1, "busy cleared after done");
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
