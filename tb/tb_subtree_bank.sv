// tb_subtree_bank -- random edge and counter writes and reads against an array
// model: addressing of edge e of entry a, same-cycle (combinational) read,
// write visible after the clock edge, independence of the two write ports.
module tb_subtree_bank;
  import mcts_pkg::*;
  localparam int F = 6, ENT = 36;

  logic clk = 0;
  logic [5:0] raddr, waddr, caddr;
  logic [SW-1:0] rslot, wslot;
  edge_t redge, wedge;
  cnt_t rcnt, wcnt;
  logic we_edge, we_cnt;
  edge_t m_e [ENT*F];
  cnt_t  m_c [ENT];
  int checks = 0, failures = 0;

  subtree_bank #(.F(F), .ENTRIES(ENT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we_edge = 0; we_cnt = 0;
    // fill everything first
    for (int a = 0; a < ENT; a++) begin
      for (int e = 0; e < F; e++) begin
        @(negedge clk);
        we_edge = 1; waddr = 6'(a); wslot = SW'(e);
        wedge = '{uct: UW'($urandom), w: WW'($urandom), n: NW'($urandom), o: OW'($urandom)};
        m_e[a*F+e] = wedge;
      end
      we_cnt = 1; caddr = 6'(a); wcnt = '{ins: SW'($urandom % 7), clm: SW'($urandom % 7)};
      m_c[a] = wcnt;
    end
    @(negedge clk); we_edge = 0; we_cnt = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      raddr = 6'($urandom % ENT); rslot = SW'($urandom % F);
      we_edge = ($urandom % 2) != 0; waddr = 6'($urandom % ENT); wslot = SW'($urandom % F);
      wedge = '{uct: UW'($urandom), w: WW'($urandom), n: NW'($urandom), o: OW'($urandom)};
      we_cnt = ($urandom % 2) != 0; caddr = 6'($urandom % ENT);
      wcnt = '{ins: SW'($urandom % 7), clm: SW'($urandom % 7)};
      #1;
      checks += 2;
      if (redge !== m_e[int'(raddr)*F + int'(rslot)]) begin failures++; $display("FAIL edge"); end
      if (rcnt !== m_c[raddr]) begin failures++; $display("FAIL cnt"); end
      @(posedge clk);
      if (we_edge) m_e[int'(waddr)*F + int'(wslot)] = wedge;
      if (we_cnt) m_c[caddr] = wcnt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
