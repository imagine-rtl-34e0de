// column_shift_regs: column of shift registers that reads out the result
// vector (Fig. 2(a), item 4).
//
// After a GEMV the result of every PE row sits in the westernmost blocks. A
// READOUT instruction streams those words out of the blocks' west ports, bit
// serially, LSB first, with the valid flag set. This block has one entry per
// PE row of the engine (BLOCK_ROWS x 16): while valid is high it stores bit k
// of each word into bit k of its entry; when valid drops it sign-extends the
// entries from the last bit received and then shifts the column up by one
// entry per cycle, sending the top entry to FIFO-out. OUT_STAGES registers sit
// between the column and FIFO-out (two are drawn in the paper's figure).
//
// Interface: fifo_out_valid/fifo_out_data, one word per cycle, no
// back-pressure (the receiving FIFO must have room for ENTRIES words). Word i
// is the result of PE p = i % 16 of block row i / 16. Read-out of words wider
// than ACC_W is not supported.
module column_shift_regs
  import imagine_pkg::*;
#(
  parameter int unsigned BLOCK_ROWS = 144,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned OUT_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  net_t             west [BLOCK_ROWS],
  output logic             fifo_out_valid,
  output logic [ACC_W-1:0] fifo_out_data,
  output logic             busy
);

  localparam int unsigned ENTRIES = BLOCK_ROWS * PE_PER_BLOCK;
  localparam int unsigned CW = $clog2(ACC_W + 1);
  localparam int unsigned EW = $clog2(ENTRIES + 1);

  typedef enum logic [1:0] {S_IDLE, S_CAPTURE, S_SHIFT} state_e;

  state_e            state;
  logic [ACC_W-1:0]  ent [ENTRIES];
  logic [CW-1:0]     cnt;
  logic [EW-1:0]     left;
  logic              in_valid;
  logic [ACC_W-1:0]  keep;   // bits received so far

  assign in_valid = west[0].valid;
  assign keep     = (cnt >= CW'(ACC_W)) ? '1 : ((ACC_W'(1) << cnt) - 1'b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      cnt   <= '0;
      left  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          for (int r = 0; r < BLOCK_ROWS; r++)
            for (int p = 0; p < PE_PER_BLOCK; p++)
              ent[r*PE_PER_BLOCK + p] <= ACC_W'(west[r].data[p]);
          cnt   <= CW'(1);
          state <= S_CAPTURE;
        end
        S_CAPTURE: begin
          if (in_valid) begin
            if (cnt < CW'(ACC_W))
              for (int r = 0; r < BLOCK_ROWS; r++)
                for (int p = 0; p < PE_PER_BLOCK; p++)
                  ent[r*PE_PER_BLOCK + p][cnt[$clog2(ACC_W)-1:0]] <= west[r].data[p];
            cnt <= cnt + 1'b1;
          end else begin
            // sign-extend from the last bit received
            for (int i = 0; i < ENTRIES; i++)
              ent[i] <= (ent[i] & keep) | (ent[i][$clog2(ACC_W)'(cnt - 1'b1)] ? ~keep : '0);
            left  <= EW'(ENTRIES);
            state <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          for (int i = 0; i + 1 < ENTRIES; i++) ent[i] <= ent[i+1];
          left <= left - 1'b1;
          if (left == EW'(1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = state != S_IDLE;

  // output pipeline towards FIFO-out
  logic             pv [OUT_STAGES+1];
  logic [ACC_W-1:0] pd [OUT_STAGES+1];
  assign pv[0] = state == S_SHIFT;
  assign pd[0] = ent[0];
  for (genvar s = 0; s < OUT_STAGES; s++) begin : g_out
    always_ff @(posedge clk) begin
      if (rst) pv[s+1] <= 1'b0;
      else     pv[s+1] <= pv[s];
      pd[s+1] <= pd[s];
    end
  end
  assign fifo_out_valid = pv[OUT_STAGES];
  assign fifo_out_data  = pd[OUT_STAGES];

endmodule
