// fanout_tree: pipelined, parameterised fanout tree (Fig. 2, item 3).
//
// IMAGine uses two of these: one from the input registers to every GEMV tile,
// and one inside each tile from the tile controller to every PIM block. The
// tree has LEVELS register levels; level l holds FANOUT**l copies of the word,
// each copy driven by one register of the level above, so no register drives
// more than FANOUT others. Output i is taken from a last-level register, the
// N_OUT outputs being spread evenly over them. The paper fixes the tile's tree
// at 2 levels with a fanout of 4; the depth of the top-level tree is not given.
//
// Timing: every output equals the input delayed by exactly LEVELS cycles, so
// all leaves stay in lock-step. No reset: the tree is a delay line, and its
// users reset what it feeds.
module fanout_tree #(
  parameter int unsigned W      = 8,
  parameter int unsigned N_OUT  = 16,
  parameter int unsigned LEVELS = 2,
  parameter int unsigned FANOUT = 4
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout [N_OUT]
);

  localparam int unsigned NLAST = FANOUT ** (LEVELS - 1);

  logic [W-1:0] node [LEVELS][NLAST];

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar j = 0; j < FANOUT ** l; j++) begin : g_node
      if (l == 0) begin : g_root
        always_ff @(posedge clk) node[0][j] <= din;
      end else begin : g_inner
        always_ff @(posedge clk) node[l][j] <= node[l-1][j / FANOUT];
      end
    end
  end

  for (genvar i = 0; i < N_OUT; i++) begin : g_out
    assign dout[i] = node[LEVELS-1][(i * NLAST) / N_OUT];
  end

endmodule
