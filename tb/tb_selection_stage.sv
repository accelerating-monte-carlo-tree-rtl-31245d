// tb_selection_stage -- one selection stage on a behavioural bank (F = 4).
// Checks: argmax over the F edges of a non-leaf node (ties to the lower slot),
// virtual loss written to the winner, memo write, child token fields, F+1
// cycles per worker back to back (the paper's intra-pipeline T_sync), claims
// at a leaf (and no expansion when all children are claimed), one-cycle
// bypass of finished workers, holding under back-pressure, and the last
// stage ending Selection at the height limit.
module tb_selection_stage;
  import mcts_pkg::*;
  localparam int F = 4, ENT = 4;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  token_t in_tok = '0, out_tok;
  logic [1:0] raddr, waddr, caddr, maddr;
  logic [SW-1:0] rslot, wslot, mslot;
  edge_t redge, wedge;
  cnt_t rcnt, wcnt;
  logic we_edge, we_cnt, mwe, ev_leaf, ev_bypass, ev_stall;
  logic [WIDW-1:0] mwid;

  edge_t m_e [ENT*F];
  cnt_t  m_c [ENT];
  assign redge = m_e[int'(raddr)*F + int'(rslot)];
  assign rcnt  = m_c[raddr];
  always_ff @(posedge clk) begin
    if (!rst && we_edge) m_e[int'(waddr)*F + int'(wslot)] <= wedge;
    if (!rst && we_cnt)  m_c[caddr] <= wcnt;
  end

  selection_stage #(.F(F), .AW(2), .LAST(1'b0)) dut (
    .clk, .rst, .in_valid, .in_ready, .in_tok, .out_valid, .out_ready, .out_tok,
    .raddr, .rslot, .redge, .rcnt, .we_edge, .waddr, .wslot, .wedge, .we_cnt, .caddr, .wcnt,
    .memo_we(mwe), .memo_wid(mwid), .memo_addr(maddr), .memo_slot(mslot),
    .ev_leaf, .ev_bypass, .ev_stall);

  // last-stage instance on its own copy of entry 0
  logic l_in_valid = 0, l_in_ready, l_out_valid;
  token_t l_out_tok;
  logic [1:0] l_raddr, l_waddr, l_caddr, l_maddr;
  logic [SW-1:0] l_rslot, l_wslot, l_mslot;
  edge_t l_wedge; cnt_t l_wcnt;
  logic l_we_edge, l_we_cnt, l_mwe, l_e1, l_e2, l_e3;
  logic [WIDW-1:0] l_mwid;
  selection_stage #(.F(F), .AW(2), .LAST(1'b1)) dut_last (
    .clk, .rst, .in_valid(l_in_valid), .in_ready(l_in_ready), .in_tok, .out_valid(l_out_valid),
    .out_ready(1'b1), .out_tok(l_out_tok),
    .raddr(l_raddr), .rslot(l_rslot), .redge(m_e[int'(l_raddr)*F + int'(l_rslot)]), .rcnt(m_c[l_raddr]),
    .we_edge(l_we_edge), .waddr(l_waddr), .wslot(l_wslot), .wedge(l_wedge),
    .we_cnt(l_we_cnt), .caddr(l_caddr), .wcnt(l_wcnt),
    .memo_we(l_mwe), .memo_wid(l_mwid), .memo_addr(l_maddr), .memo_slot(l_mslot),
    .ev_leaf(l_e1), .ev_bypass(l_e2), .ev_stall(l_e3));

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic token_t mk(int wid, int addr, int pos);
    token_t t = '0;
    t.wid = WIDW'(wid); t.depth = DW'(2); t.addr = IXW'(addr); t.pos = IXW'(pos);
    return t;
  endfunction

  int t0, t1, nout, bests[$], stalls;
  int exp_best;
  logic hs;
  token_t exp_tok;

  initial begin
    for (int a = 0; a < ENT; a++) begin
      m_c[a] = '{ins: SW'(F), clm: SW'(F)};
      for (int e = 0; e < F; e++) m_e[a*F+e] = '{uct: $signed(UW'(1000 * e)), w: 0, n: 16'd1, o: 0};
    end
    m_e[1*F+1].uct = 32'sd9000;  m_e[1*F+3].uct = 32'sd9000;   // tie in entry 1: slot 1 wins
    m_c[2] = '{ins: SW'(1), clm: SW'(1)};                        // leaf
    m_c[3] = '{ins: SW'(2), clm: SW'(F)};                        // leaf, all claimed
    repeat (2) @(posedge clk);
    #1 rst = 0;

    // 1: two workers back to back on entries 0 and 1
    @(negedge clk);
    in_valid = 1; in_tok = mk(5, 0, 7);
    t0 = -1; nout = 0;
    for (int cyc = 0; cyc < 30 && nout < 2; cyc++) begin
      #1;
      hs = in_valid && in_ready;
      if (mwe) begin
        exp_best = (mwid == 5) ? 3 : 1;
        chk(int'(mslot) == exp_best && int'(maddr) == ((mwid == 5) ? 0 : 1), "memo word");
        chk(we_edge && int'(wslot) == exp_best, "vl write slot");
        chk(wedge.uct == ((mwid == 5) ? 32'sd3000 : 32'sd9000) - $signed(VL_DEF) && wedge.o == 1, "vl value");
      end
      if (out_valid && out_ready) begin
        if (nout == 0) begin
          exp_tok = mk(5, 0 * F + 3, 7 * F + 3); exp_tok.depth = DW'(3);
          chk(out_tok == exp_tok, "child token 1");
          t0 = cyc;
        end else begin
          exp_tok = mk(6, 1 * F + 1, 9 * F + 1); exp_tok.depth = DW'(3);
          chk(out_tok == exp_tok, "child token 2 (tie to lower slot)");
          chk(cyc - t0 == F + 1, "F+1 cycles per worker");
        end
        nout++;
      end
      @(negedge clk);
      if (hs) begin
        if (in_tok.wid == 5) in_tok = mk(6, 1, 9); else in_valid = 0;
      end
    end
    chk(nout == 2, "two workers out");

    // 2: leaf with a free child, 3: leaf with all claimed
    in_valid = 1; in_tok = mk(7, 2, 11);
    #1 chk(in_ready && ev_leaf && we_cnt && wcnt.clm == 2, "claim at leaf");
    @(negedge clk);
    in_tok = mk(8, 3, 12);
    chk(out_valid && out_tok.done && out_tok.xv && out_tok.xslot == 1 && out_tok.wid == 7, "leaf result");
    #1 chk(in_ready && ev_leaf && !we_cnt, "no claim when all children claimed");
    @(negedge clk);
    chk(out_valid && out_tok.done && !out_tok.xv && out_tok.wid == 8, "leaf without expansion");
    // 4: bypass of a finished worker, with back-pressure for 3 cycles
    in_tok = mk(9, 0, 0); in_tok.done = 1;
    #1 chk(ev_bypass && !we_cnt, "bypass accepted");
    @(negedge clk);
    in_valid = 0; out_ready = 0;
    stalls = 0;
    repeat (3) begin #1; if (ev_stall) stalls++; chk(out_valid && out_tok.wid == 9, "held under stall"); @(negedge clk); end
    chk(stalls == 3, "stall events");
    out_ready = 1;
    #1 chk(out_valid && out_tok.done && !mwe && !we_edge, "bypass leaves untouched");
    @(negedge clk);
    chk(!out_valid, "empty again");
    // 6: last stage ends at the height limit
    in_tok = mk(10, 0, 7); l_in_valid = 1;
    @(negedge clk); l_in_valid = 0;
    for (int cyc = 0; cyc < 10 && !l_out_valid; cyc++) @(negedge clk);
    chk(l_out_valid && l_out_tok.done && !l_out_tok.xv && l_out_tok.depth == 3, "last stage done at height limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
