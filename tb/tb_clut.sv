// tb_clut -- checks the comparison look-up table: for random weights (with
// many ties) the index must be the first position of the maximum and wmax
// the maximum itself. Runs the paper's f = 6 and a 4-input table.
module tb_clut;
  import mcts_pkg::*;

  logic signed [UW-1:0] w6 [6];
  logic signed [UW-1:0] w4 [4];
  logic [2:0] i6;
  logic [1:0] i4;
  logic signed [UW-1:0] m6, m4;
  int checks = 0, failures = 0;

  clut #(.FI(6)) dut6 (.w(w6), .idx(i6), .wmax(m6));
  clut #(.FI(4)) dut4 (.w(w4), .idx(i4), .wmax(m4));

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int best6, best4;
      for (int k = 0; k < 6; k++)
        w6[k] = (t % 2 == 0) ? $signed(UW'($urandom % 8)) - 4 : $signed(UW'($urandom));
      for (int k = 0; k < 4; k++) w4[k] = $signed(UW'($urandom % 5)) - 2;
      #1;
      best6 = 0;
      for (int k = 1; k < 6; k++) if (w6[k] > w6[best6]) best6 = k;
      best4 = 0;
      for (int k = 1; k < 4; k++) if (w4[k] > w4[best4]) best4 = k;
      checks += 3;
      if (int'(i6) != best6) begin failures++; $display("FAIL f6 idx %0d exp %0d", i6, best6); end
      if (m6 != w6[best6]) begin failures++; $display("FAIL f6 max"); end
      if (int'(i4) != best4) begin failures++; $display("FAIL f4 idx %0d exp %0d", i4, best4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
