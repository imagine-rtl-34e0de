// picaso_regfile: register file of one PiCaSO-IM block, the BRAM of Fig. 3(b).
//
// Each column of the memory is the private storage of one bit-serial PE: a
// multi-bit operand occupies consecutive rows (LSB at the lowest address), so a
// row read returns one bit of the same operand for every PE at once.
//
// The paper maps one block onto one FPGA BRAM; the size used here (1024 rows by
// 16 bit-lines) is derived from the paper's figures of 64K PEs on 2016 BRAM36
// tiles with 12 BRAM36 per 12x2 tile, i.e. 16 PEs per block. The two read ports
// (A and B) follow the dual-port BRAM that PiCaSO uses; the separate write port
// is this model's simplification of writing back through one of the two ports.
//
// Interface: synchronous reads, data registered (the BRAM output register of
// Fig. 3(b)) and valid the cycle after the address; one synchronous write port.
// A read and a write to the same row in the same cycle return the old data.
module picaso_regfile #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic [AW-1:0]    addr_a,
  input  logic [AW-1:0]    addr_b,
  output logic [WIDTH-1:0] rd_a,
  output logic [WIDTH-1:0] rd_b,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    rd_a <= mem[addr_a];
    rd_b <= mem[addr_b];
    if (we) mem[wr_addr] <= wr_data;
  end

endmodule
