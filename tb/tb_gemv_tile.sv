// tb_gemv_tile: end-to-end GEMV on one GEMV tile (12 x 2 PIM blocks).
//
// Loads a random signed 8-bit matrix W (192 rows, one per PE, x 4 columns, two
// per block column) and vector x through WRITE_ROW instructions, then runs
// the GEMV as the engine does: per column a Booth MULT and an ADD into a
// 32-bit accumulator, an east-to-west ACCUM that folds the east block column
// into the west one, and a READOUT of the west column. The words leaving the
// tile's west port are compared with y = W x computed in the testbench. Also
// checks the cycle count of a MULT (start to done) against the driver's
// documented formula.
module tb_gemv_tile;
  import imagine_pkg::*;

  localparam int ROWS = 12, COLS = 2, K = 2, N = 8, ACC = 32;
  localparam int NROW = ROWS * PE_PER_BLOCK;
  localparam int NCOL = COLS * K;
  localparam int A_W = 0, A_X = 64, A_P = 128, A_ACC = 160;

  logic clk = 1'b0, rst = 1'b1;
  logic instr_valid;
  instr_t instr;
  net_t east_in [ROWS], west_out [ROWS];
  logic mc_busy, mc_done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gemv_tile #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .rst(rst), .instr_valid(instr_valid), .instr(instr),
    .row_base('0), .col_base('0), .east_in(east_in), .west_out(west_out),
    .mc_busy(mc_busy), .mc_done(mc_done));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_mc_cycles;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic send(input instr_t i);
    int t0;
    @(negedge clk);
    instr_valid = 1'b1; instr = i;
    @(negedge clk);
    instr_valid = 1'b0;
    if (i[INSTR_W-1]) begin
      t0 = cyc;
      @(posedge mc_done);
      last_mc_cycles = cyc - t0;
    end
  endtask

  logic signed [7:0]  wm [NROW][NCOL];
  logic signed [7:0]  xv [NCOL];
  logic signed [31:0] yref [NROW];
  logic [31:0]        yout [NROW];
  int got_bits;

  // collect read-out words from the tile's west port
  initial begin
    got_bits = 0;
    forever begin
      @(posedge clk); #1;
      if (west_out[0].valid) begin
        for (int r = 0; r < ROWS; r++)
          for (int p = 0; p < PE_PER_BLOCK; p++)
            yout[r*PE_PER_BLOCK + p][got_bits] = west_out[r].data[p];
        got_bits++;
      end
    end
  end

  initial begin
    int mult_exp;
    instr_valid = 1'b0; instr = '0;
    for (int r = 0; r < ROWS; r++) east_in[r] = '0;
    repeat (4) @(posedge clk);
    rst = 1'b0;

    for (int i = 0; i < NROW; i++)
      for (int j = 0; j < NCOL; j++) wm[i][j] = 8'($urandom);
    for (int j = 0; j < NCOL; j++) xv[j] = 8'($urandom);
    wm[0][0] = -128; xv[0] = -128;   // extreme Booth case
    for (int i = 0; i < NROW; i++) begin
      yref[i] = 0;
      for (int j = 0; j < NCOL; j++) yref[i] += 32'(wm[i][j]) * 32'(xv[j]);
    end

    // load: weights per block, x per block column
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        send(enc_select(ROW_IDW'(r), COL_IDW'(c), 1'b1, 1'b1));
        for (int k = 0; k < K; k++)
          for (int t = 0; t < N; t++) begin
            logic [15:0] d;
            for (int p = 0; p < PE_PER_BLOCK; p++) d[p] = wm[r*PE_PER_BLOCK + p][c*K + k][t];
            send(enc_write_row(ADDR_W'(A_W + k*N + t), d));
          end
      end
    for (int c = 0; c < COLS; c++) begin
      send(enc_select('0, COL_IDW'(c), 1'b0, 1'b1));
      for (int k = 0; k < K; k++)
        for (int t = 0; t < N; t++)
          send(enc_write_row(ADDR_W'(A_X + k*N + t), {16{xv[c*K + k][t]}}));
    end

    // multiply and accumulate in every PE
    send(enc_select('0, '0, 1'b0, 1'b0));
    for (int k = 0; k < K; k++) begin
      send(enc_set_param(ADDR_W'(A_P), WIDTH_W'(N), '0));
      send(enc_mc(OP_MULT, ADDR_W'(A_W + k*N), ADDR_W'(A_X + k*N), OPB_RF, 1'b0));
      // LOAD + issue + drain, plus 3 cycles: controller input register,
      // pipeline stage A and the registered mc_done
      mult_exp = 1 + PIPE_DRAIN;
      for (int j = 0; j < N; j++) mult_exp += 1 + 2*N - j;
      checks++;
      if (last_mc_cycles != mult_exp + 3) begin
        failures++;
        $display("FAIL MULT took %0d cycles, expected %0d", last_mc_cycles, mult_exp + 3);
      end
      send(enc_set_param(ADDR_W'(A_ACC), WIDTH_W'(ACC), WIDTH_W'(2*N)));
      send(enc_mc(OP_ADD, ADDR_W'(A_ACC), ADDR_W'(A_P), OPB_RF, k == 0));
    end

    // east-to-west reduction across the block columns
    for (int c = COLS - 2; c >= 0; c--) begin
      send(enc_set_ptr(ADDR_W'(A_ACC)));
      send(enc_select('0, COL_IDW'(c), 1'b0, 1'b1));
      send(enc_set_param(ADDR_W'(A_ACC), WIDTH_W'(ACC), '0));
      send(enc_mc(OP_ACCUM, ADDR_W'(A_ACC), '0, OPB_EAST, 1'b0));
    end

    // read out
    send(enc_set_ptr(ADDR_W'(A_ACC)));
    send(enc_set_param('0, WIDTH_W'(ACC), '0));
    send(enc_mc(OP_READOUT, '0, '0, OPB_RF, 1'b0));
    repeat (10) @(posedge clk);

    checks++;
    if (got_bits != ACC) begin failures++; $display("FAIL read-out bits %0d", got_bits); end
    for (int i = 0; i < NROW; i++) begin
      checks++;
      if (yout[i] != yref[i]) begin
        failures++;
        if (failures < 10) $display("FAIL y[%0d] got %0d exp %0d", i, $signed(yout[i]), yref[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
