// tb_backup_updater -- checks one BackUp edge update: W += V, N += 1, one
// virtual loss recovered, and the weight equal to W'/N' + beta*sqrt(ln Np/N')
// - O'*VL computed in real numbers (tolerance 0.003).
module tb_backup_updater;
  import mcts_pkg::*;

  edge_t old_e, new_e;
  logic signed [RW-1:0] reward;
  logic [NW-1:0] pn;
  int checks = 0, failures = 0;

  backup_updater dut (.old_edge(old_e), .reward, .parent_n(pn), .new_edge(new_e));

  initial begin
    for (int i = 0; i < 300; i++) begin
      longint w0;
      int n0, o0, npv, rv;
      real r, got;
      n0  = int'($urandom % 1000);
      o0  = 1 + int'($urandom % 5);
      npv = n0 + 1 + int'($urandom % 3000);
      w0  = (longint'($urandom % 2000) - 1000) * 65536 / 100;
      rv  = int'($urandom % 131072) - 65536;          // -1.0 .. +1.0
      old_e = '{uct: UW'(12345), w: WW'(w0), n: NW'(n0), o: OW'(o0)};
      reward = RW'(rv);
      pn = NW'(npv);
      #1;
      checks += 4;
      if (new_e.n !== NW'(n0 + 1)) begin failures++; $display("FAIL n"); end
      if (new_e.o !== OW'(o0 - 1)) begin failures++; $display("FAIL o"); end
      if (new_e.w !== WW'(w0 + rv)) begin failures++; $display("FAIL w"); end
      r = (real'(w0 + rv) / 65536.0) / (n0 + 1)
          + (real'(BETA_DEF) / 65536.0) * $sqrt($ln(real'(npv)) / (n0 + 1))
          - (o0 - 1) * (real'(VL_DEF) / 65536.0);
      got = real'(new_e.uct) / 65536.0;
      if (got - r > 0.003 || r - got > 0.003) begin
        failures++;
        $display("FAIL uct got=%f ref=%f", got, r);
      end
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
