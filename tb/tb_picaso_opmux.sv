// tb_picaso_opmux: self-checking test of the OpMux.
//
// Applies random port-A, port-B and east words with every operand choice and
// checks the registered operands one cycle later against the selection rule
// written out bit by bit in the testbench.
module tb_picaso_opmux;
  import imagine_pkg::*;
  localparam int W = 16;
  logic clk = 1'b0;
  opa_sel_e opa_sel;
  opb_sel_e opb_sel;
  logic [W-1:0] rd_a, rd_b, east, op_a, op_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  picaso_opmux #(.WIDTH(W)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2000; k++) begin
      logic [W-1:0] ea, eb;
      int d;
      @(negedge clk);
      rd_a = W'($urandom); rd_b = W'($urandom); east = W'($urandom);
      opa_sel = opa_sel_e'(k % 3);
      opb_sel = opb_sel_e'((k / 3) % 7);
      ea = (opa_sel == OPA_RF_A) ? rd_a : (opa_sel == OPA_RF_B) ? rd_b : '0;
      unique case (opb_sel)
        OPB_FOLD8: d = 8;
        OPB_FOLD4: d = 4;
        OPB_FOLD2: d = 2;
        OPB_FOLD1: d = 1;
        default:   d = 0;
      endcase
      for (int p = 0; p < W; p++) begin
        if (opb_sel == OPB_RF)        eb[p] = rd_b[p];
        else if (opb_sel == OPB_EAST) eb[p] = east[p];
        else if (d != 0)              eb[p] = (p + d < W) ? rd_b[p+d] : 1'b0;
        else                          eb[p] = 1'b0;
      end
      @(posedge clk); #1;
      checks += 2;
      if (op_a != ea) begin failures++; $display("FAIL A sel=%0d", opa_sel); end
      if (op_b != eb) begin failures++; $display("FAIL B sel=%0d got %h exp %h", opb_sel, op_b, eb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
