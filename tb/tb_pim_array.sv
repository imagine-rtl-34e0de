// tb_pim_array: self-checking test of a PIM array (3 rows x 3 columns here).
//
// Drives control words straight into every block, as the fanout tree does.
// Writes a different random 16-bit word to each block (ID-based selection),
// then folds the columns together east to west with two ACCUM sequences
// (pointer transmits one cycle ahead of the local read), and reads the
// westernmost column back through west_out. Each PE's result must be the sum
// of its row's three words.
module tb_pim_array;
  import imagine_pkg::*;
  localparam int R = 3, C = 3, N = 20;

  logic clk = 1'b0, rst = 1'b1;
  ctrl_t ctrl;
  ctrl_t ctrl_a [R*C];
  net_t east_in [R], west_out [R];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  for (genvar i = 0; i < R*C; i++) begin : g_c
    assign ctrl_a[i] = ctrl;
  end

  pim_array #(.ROWS(R), .COLS(C)) dut (.clk(clk), .rst(rst), .row_base(8'd4), .col_base(6'd2),
                                      .ctrl(ctrl_a), .east_in(east_in), .west_out(west_out));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ctrl_t idle();
    ctrl_t c;
    c = '0; c.alu_op = ALU_ADD; c.opa_sel = OPA_RF_A; c.opb_sel = OPB_RF;
    return c;
  endfunction
  task automatic issue(input ctrl_t c);
    @(negedge clk); ctrl = c;
  endtask
  task automatic select(input int r, input int c, input bit mr, input bit mc);
    ctrl_t k;
    k = idle(); k.sel_load = 1; k.sel_row = ROW_IDW'(r); k.sel_col = COL_IDW'(c);
    k.match_row = mr; k.match_col = mc;
    issue(k);
  endtask
  task automatic set_ptr(input int a);
    ctrl_t k;
    k = idle(); k.ptr_load = 1; k.addr_a = ADDR_W'(a);
    issue(k);
  endtask

  logic [N-1:0] v [R][C][PE_PER_BLOCK];
  logic [N-1:0] res [R][PE_PER_BLOCK];
  int got;

  initial begin
    ctrl = idle();
    for (int r = 0; r < R; r++) east_in[r] = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        select(4 + r, 2 + c, 1, 1);
        for (int p = 0; p < PE_PER_BLOCK; p++) v[r][c][p] = N'($urandom % 4096);
        for (int t = 0; t < N; t++) begin
          ctrl_t k;
          k = idle(); k.wr_row = 1; k.addr_a = ADDR_W'(10 + t);
          for (int p = 0; p < PE_PER_BLOCK; p++) k.wdata[p] = v[r][c][p][t];
          issue(k);
        end
      end
    // ACCUM column c += column c+1, from the east
    for (int c = C - 2; c >= 0; c--) begin
      set_ptr(10);
      select(0, 2 + c, 0, 1);
      for (int t = 0; t <= N; t++) begin
        ctrl_t k;
        k = idle();
        k.is_tx = t < N;
        k.addr_b = ADDR_W'(10 + t - 1); k.opa_sel = OPA_RF_B; k.opb_sel = OPB_EAST;
        k.op_en = t != 0; k.first = t == 1; k.wr_addr = ADDR_W'(10 + t - 1);
        issue(k);
      end
      repeat (PIPE_DRAIN + 1) issue(idle());
    end
    // read out
    set_ptr(10);
    got = 0;
    fork
      begin
        for (int t = 0; t < N; t++) begin
          ctrl_t k;
          k = idle(); k.is_tx = 1; k.net_valid = 1;
          issue(k);
        end
        issue(idle());
      end
      repeat (N + 6) begin
        @(posedge clk); #1;
        if (west_out[0].valid) begin
          for (int r = 0; r < R; r++)
            for (int p = 0; p < PE_PER_BLOCK; p++) res[r][p][got] = west_out[r].data[p];
          got++;
        end
      end
    join
    checks++;
    if (got != N) begin failures++; $display("FAIL read-out bits %0d", got); end
    for (int r = 0; r < R; r++)
      for (int p = 0; p < PE_PER_BLOCK; p++) begin
        checks++;
        if (res[r][p] != v[r][0][p] + v[r][1][p] + v[r][2][p]) begin
          failures++; $display("FAIL row %0d pe %0d got %0d", r, p, res[r][p]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
