// tb_tile_array: self-checking test of the tile array (2 x 2 tiles of 1 x 2
// blocks here), driven with instructions as the top-level fanout tree does.
//
// Gives every block its own random 24-bit words (SELECT by engine-wide ID plus
// WRITE_ROW), folds the four block columns together east to west with three
// ACCUM instructions, one of which crosses the boundary between tiles, then
// READOUT; the words leaving the westernmost tiles must be the row sums.
module tb_tile_array;
  import imagine_pkg::*;
  localparam int TR = 2, TC = 2, R = 1, C = 2, N = 24;
  localparam int BR = TR * R, BC = TC * C;

  logic clk = 1'b0, rst = 1'b1;
  logic [INSTR_W:0] tile_in [TR*TC];
  logic [INSTR_W:0] bus;
  net_t west_out [BR];
  logic mc_busy, mc_done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  for (genvar i = 0; i < TR*TC; i++) begin : g_in
    assign tile_in[i] = bus;
  end

  tile_array #(.TILE_ROWS(TR), .TILE_COLS(TC), .ROWS(R), .COLS(C)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input instr_t i);
    @(negedge clk); bus = {1'b1, i};
    @(negedge clk); bus = '0;
    if (i[INSTR_W-1]) @(posedge mc_done);
  endtask

  logic [N-1:0] v [BR][BC][PE_PER_BLOCK];
  logic [N-1:0] res [BR][PE_PER_BLOCK];
  int got = 0;

  always @(posedge clk) begin
    #1;
    if (west_out[0].valid) begin
      for (int r = 0; r < BR; r++)
        for (int p = 0; p < PE_PER_BLOCK; p++) res[r][p][got] = west_out[r].data[p];
      got++;
    end
  end

  initial begin
    bus = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int r = 0; r < BR; r++)
      for (int c = 0; c < BC; c++) begin
        send(enc_select(ROW_IDW'(r), COL_IDW'(c), 1'b1, 1'b1));
        for (int p = 0; p < PE_PER_BLOCK; p++) v[r][c][p] = N'($urandom % (1 << 20));
        for (int t = 0; t < N; t++) begin
          logic [15:0] d;
          for (int p = 0; p < PE_PER_BLOCK; p++) d[p] = v[r][c][p][t];
          send(enc_write_row(ADDR_W'(100 + t), d));
        end
      end
    for (int c = BC - 2; c >= 0; c--) begin
      send(enc_set_ptr(10'd100));
      send(enc_select('0, COL_IDW'(c), 1'b0, 1'b1));
      send(enc_set_param(10'd100, WIDTH_W'(N), '0));
      send(enc_mc(OP_ACCUM, 10'd100, '0, OPB_EAST, 1'b0));
    end
    send(enc_set_ptr(10'd100));
    send(enc_mc(OP_READOUT, '0, '0, OPB_RF, 1'b0));
    repeat (8) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("FAIL read-out bits %0d", got); end
    for (int r = 0; r < BR; r++)
      for (int p = 0; p < PE_PER_BLOCK; p++) begin
        logic [N-1:0] e;
        e = 0;
        for (int c = 0; c < BC; c++) e += v[r][c][p];
        checks++;
        if (res[r][p] != e) begin failures++; $display("FAIL row %0d pe %0d got %0d exp %0d", r, p, res[r][p], e); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
