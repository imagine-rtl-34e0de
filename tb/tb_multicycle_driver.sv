// tb_multicycle_driver: self-checking test of the multicycle driver.
//
// Starts every multicycle operation with random addresses and widths, records
// the control words it issues and checks: the number of cycles from start to
// done (1 LOAD + issue cycles + PIPE_DRAIN), the per-bit read and write
// addresses of ADD/SUB (with B sign-extension), the Booth-load and Booth steps
// of MULT, the one-cycle skew of ACCUM and the valid read-out steps.
module tb_multicycle_driver;
  import imagine_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic start, a_zero, busy, done;
  opcode_e opcode;
  logic [ADDR_W-1:0] addr_a, addr_b, p_dest;
  opb_sel_e opb_sel;
  logic [WIDTH_W-1:0] p_width, p_bwidth;
  ctrl_t ctrl;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  multicycle_driver dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input opcode_e op, input int a, input int b, input int d,
                     input int n, input int bw);
    int cycles, n_op, n_bload, n_tx, n_valid, exp_issue, bwe, t;
    @(negedge clk);
    start = 1'b1; opcode = op; addr_a = ADDR_W'(a); addr_b = ADDR_W'(b);
    opb_sel = OPB_RF; a_zero = 1'b0;
    p_dest = ADDR_W'(d); p_width = WIDTH_W'(n); p_bwidth = WIDTH_W'(bw);
    @(negedge clk);
    start = 1'b0;
    cycles = 1; n_op = 0; n_bload = 0; n_tx = 0; n_valid = 0; t = 0;
    bwe = (bw == 0) ? n : bw;
    while (!done) begin
      if (ctrl.op_en && ctrl.alu_op == ALU_BLOAD) n_bload++;
      else if (ctrl.op_en) begin
        if (op == OP_ADD || op == OP_SUB) begin
          chk(ctrl.addr_a == ADDR_W'(a + n_op) && ctrl.wr_addr == ADDR_W'(d + n_op) &&
              ctrl.addr_b == ADDR_W'(b + ((n_op < bwe) ? n_op : bwe - 1)) &&
              ctrl.first == (n_op == 0), $sformatf("ADD step %0d addresses", n_op));
        end
        if (op == OP_ACCUM)
          chk(ctrl.addr_b == ADDR_W'(a + n_op) && ctrl.opb_sel == OPB_EAST,
              $sformatf("ACCUM step %0d", n_op));
        n_op++;
      end
      if (ctrl.is_tx) n_tx++;
      if (ctrl.net_valid) n_valid++;
      @(negedge clk);
      cycles++;
    end
    unique case (op)
      OP_MULT: begin
        exp_issue = 0;
        for (int j = 0; j < n; j++) exp_issue += 1 + 2*n - j;
        chk(n_bload == n, "MULT Booth loads");
        chk(n_op == exp_issue - n, "MULT Booth steps");
      end
      OP_ACCUM: begin
        exp_issue = n + 1;
        chk(n_tx == n && n_op == n, "ACCUM tx/op counts");
      end
      OP_READOUT: begin
        exp_issue = n;
        chk(n_valid == n && n_op == 0, "READOUT valid count");
      end
      default: begin
        exp_issue = n;
        chk(n_op == n, "ADD/SUB step count");
      end
    endcase
    chk(cycles == 1 + exp_issue + PIPE_DRAIN + 1,
        $sformatf("op %0d n=%0d: start to done %0d cycles, expected %0d", op, n, cycles,
                  1 + exp_issue + PIPE_DRAIN + 1));
  endtask

  initial begin
    start = 0; opcode = OP_NOP; addr_a = 0; addr_b = 0; opb_sel = OPB_RF; a_zero = 0;
    p_dest = 0; p_width = 0; p_bwidth = 0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int it = 0; it < 40; it++) begin
      int n;
      n = 2 + ($urandom % 30);
      run(OP_ADD, $urandom % 512, $urandom % 512, $urandom % 512, n, (it % 2) ? 0 : 1 + ($urandom % n));
      run(OP_SUB, $urandom % 512, $urandom % 512, $urandom % 512, n, 0);
      run(OP_MULT, $urandom % 512, $urandom % 512, $urandom % 512, 2 + ($urandom % 15), 0);
      run(OP_ACCUM, $urandom % 512, 0, $urandom % 512, n, 0);
      run(OP_READOUT, 0, 0, 0, n, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
