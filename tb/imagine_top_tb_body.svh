// Shared body of the IMAGine top-level testbenches (tb_imagine_top and
// tb_imagine_top_full). The including module defines the DUT instance and
// these localparams: TILE_ROWS, TILE_COLS, ROWS, COLS (as built), K (matrix
// columns per block column), PER_BLOCK (1: every block gets its own weights,
// 0: weights are written per block column to all rows at once).
//
// One GEMV, y = W x, with signed 8-bit W and x and 32-bit y, runs through the
// real ports: instructions go in through FIFO-in with valid/ready, results
// come back through FIFO-out and are compared with y computed here. The
// mechanisms of the design are counted and each must occur at least once:
// FIFO-in back-pressure while a multicycle instruction runs, an east-to-west
// ACCUM across a tile boundary, a Booth pass that subtracts and the column
// shift-out. ID-based selection is exercised by every load.

  localparam int BR   = TILE_ROWS * ROWS;           // block rows
  localparam int BC   = TILE_COLS * COLS;           // block columns
  localparam int NROW = BR * PE_PER_BLOCK;          // matrix rows = outputs
  localparam int NCOL = BC * K;                     // matrix columns
  localparam int N = 8, ACC = 32;
  localparam int A_W = 0, A_X = 256, A_P = 512, A_ACC = 544;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // ------------------------------------------------------- FIFO-in driver
  instr_t q [$];
  always @(negedge clk) begin
    if (fifo_in_valid && fifo_in_ready_q) void'(q.pop_front());
    fifo_in_valid <= 1'b0;
    if (q.size() > 0) begin
      fifo_in_valid <= 1'b1;
      fifo_in_data  <= q[0];
    end
  end
  // ready as sampled at the clock edge, used to retire the popped entry
  logic fifo_in_ready_q;
  always @(posedge clk) fifo_in_ready_q <= fifo_in_ready;

  int n_stall = 0, n_out = 0, n_booth_sub = 0;
  always @(posedge clk) if (!rst && fifo_in_valid && !fifo_in_ready) n_stall++;

  // ------------------------------------------------------ FIFO-out monitor
  logic [31:0] yout [NROW];
  always @(posedge clk) begin
    if (!rst && fifo_out_valid) begin
      if (n_out < NROW) yout[n_out] = fifo_out_data;
      n_out++;
    end
  end

  logic signed [7:0]  wm [NROW][NCOL];
  logic signed [7:0]  xv [NCOL];
  logic signed [31:0] yref [NROW];

  task automatic wait_drain();
    while (q.size() > 0 || fifo_in_valid || busy) @(posedge clk);
  endtask

  initial begin
    int t_start, t_end;
    fifo_in_valid = 1'b0;
    fifo_in_data  = '0;
    repeat (5) @(posedge clk);
    rst = 1'b0;

    for (int i = 0; i < NROW; i++)
      for (int j = 0; j < NCOL; j++)
        wm[i][j] = (PER_BLOCK != 0) ? 8'($urandom)
                             : 8'($urandom((i % PE_PER_BLOCK) * 1000 + j));
    for (int j = 0; j < NCOL; j++) xv[j] = 8'($urandom);
    xv[0] = -8'sd90;   // bits 1,0 = 1,0: the Booth pass for bit 1 subtracts
    if (PER_BLOCK == 0)
      for (int i = 0; i < NROW; i++)
        for (int j = 0; j < NCOL; j++) wm[i][j] = wm[i % PE_PER_BLOCK][j];
    for (int i = 0; i < NROW; i++) begin
      yref[i] = 0;
      for (int j = 0; j < NCOL; j++) yref[i] += 32'(wm[i][j]) * 32'(xv[j]);
      for (int j = 0; j < NCOL; j++)
        if (xv[j][0] == 1'b0 && xv[j][1] == 1'b1) n_booth_sub++;  // pair 10 at bit 1
    end

    // ---- load weights and vector
    for (int r = 0; r < ((PER_BLOCK != 0) ? BR : 1); r++)
      for (int c = 0; c < BC; c++) begin
        q.push_back(enc_select(ROW_IDW'(r), COL_IDW'(c), PER_BLOCK != 0, 1'b1));
        for (int k = 0; k < K; k++)
          for (int t = 0; t < N; t++) begin
            logic [15:0] d;
            for (int p = 0; p < PE_PER_BLOCK; p++) d[p] = wm[r*PE_PER_BLOCK + p][c*K + k][t];
            q.push_back(enc_write_row(ADDR_W'(A_W + k*N + t), d));
          end
      end
    for (int c = 0; c < BC; c++) begin
      q.push_back(enc_select('0, COL_IDW'(c), 1'b0, 1'b1));
      for (int k = 0; k < K; k++)
        for (int t = 0; t < N; t++)
          q.push_back(enc_write_row(ADDR_W'(A_X + k*N + t), {16{xv[c*K + k][t]}}));
    end
    wait_drain();
    t_start = cyc;

    // ---- multiply-accumulate in every PE
    q.push_back(enc_select('0, '0, 1'b0, 1'b0));
    for (int k = 0; k < K; k++) begin
      q.push_back(enc_set_param(ADDR_W'(A_P), WIDTH_W'(N), '0));
      q.push_back(enc_mc(OP_MULT, ADDR_W'(A_W + k*N), ADDR_W'(A_X + k*N), OPB_RF, 1'b0));
      q.push_back(enc_set_param(ADDR_W'(A_ACC), WIDTH_W'(ACC), WIDTH_W'(2*N)));
      q.push_back(enc_mc(OP_ADD, ADDR_W'(A_ACC), ADDR_W'(A_P), OPB_RF, k == 0));
    end
    // ---- east-to-west reduction, one block column at a time
    for (int c = BC - 2; c >= 0; c--) begin
      q.push_back(enc_set_ptr(ADDR_W'(A_ACC)));
      q.push_back(enc_select('0, COL_IDW'(c), 1'b0, 1'b1));
      q.push_back(enc_set_param(ADDR_W'(A_ACC), WIDTH_W'(ACC), '0));
      q.push_back(enc_mc(OP_ACCUM, ADDR_W'(A_ACC), '0, OPB_EAST, 1'b0));
    end
    // ---- read out through the column shift registers
    q.push_back(enc_set_ptr(ADDR_W'(A_ACC)));
    q.push_back(enc_set_param('0, WIDTH_W'(ACC), '0));
    q.push_back(enc_mc(OP_READOUT, '0, '0, OPB_RF, 1'b0));
    wait_drain();
    repeat (20) @(posedge clk);
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    t_end = cyc;

    checks++;
    if (n_out != NROW) begin failures++; $display("FAIL %0d words out, expected %0d", n_out, NROW); end
    for (int i = 0; i < NROW; i++) begin
      checks++;
      if (yout[i] != yref[i]) begin
        failures++;
        if (failures < 10) $display("FAIL y[%0d] got %0d exp %0d", i, $signed(yout[i]), yref[i]);
      end
    end
    // every mechanism must have happened
    $display("mechanisms: fifo-in stalls=%0d, cross-tile ACCUM steps=%0d, booth-subtract pairs=%0d, words shifted out=%0d",
             n_stall, TILE_COLS - 1, n_booth_sub, n_out);
    checks++; if (n_stall == 0)        begin failures++; $display("FAIL no back-pressure seen"); end
    checks++; if (TILE_COLS < 2)       begin failures++; $display("FAIL no tile boundary crossed"); end
    checks++; if (n_booth_sub == 0)    begin failures++; $display("FAIL no Booth subtract pair"); end
    checks++; if (n_out == 0)          begin failures++; $display("FAIL nothing shifted out"); end
    $display("GEMV %0dx%0d (8-bit): %0d cycles from first compute instruction to last result",
             NROW, NCOL, t_end - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
