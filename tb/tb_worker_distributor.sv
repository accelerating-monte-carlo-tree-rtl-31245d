// tb_worker_distributor -- with a behavioural root bank around it, checks that
// (a) while the root is a leaf each worker claims the next root child and
// stops there, (b) afterwards each worker goes to the argmax of the root
// weights as they stand after the previous workers' virtual losses, with the
// right token fields, (c) workers leave every 2 cycles with F = 6 (one CLUT)
// and every 3 cycles with F = 36 (two CLUT levels), as the paper states.
module tb_worker_distributor;
  import mcts_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- F = 6, P = 8 ----------------
  localparam int F1 = 6, P1 = 8;
  edge_t e1 [F1]; cnt_t c1;
  logic st1 = 0, busy1, vl1, cl1, tv1, rv1, mwe1, stall1;
  logic [SW-1:0] vs1, ms1, bs1;
  logic [WIDW-1:0] mw1;
  token_t t1; result_t r1;
  logic tr1 = 1, rr1 = 1;

  worker_distributor #(.F(F1), .P(P1)) d1 (
    .clk, .rst, .start(st1), .busy(busy1), .root_edges(e1), .root_cnt(c1),
    .vl_en(vl1), .vl_slot(vs1), .claim_en(cl1),
    .tok_valid(tv1), .tok_ready(tr1), .tok(t1), .res_valid(rv1), .res_ready(rr1), .res(r1),
    .memo_we(mwe1), .memo_wid(mw1), .memo_slot(ms1), .best_slot(bs1), .stall(stall1));

  // behavioural root bank
  always_ff @(posedge clk) begin
    if (vl1) begin e1[vs1].uct <= e1[vs1].uct - $signed(VL_DEF); e1[vs1].o <= e1[vs1].o + 1; end
    if (cl1) c1.clm <= c1.clm + 1;
  end

  // ---------------- F = 36, P = 4 ----------------
  localparam int F2 = 36, P2 = 6;
  edge_t e2 [F2]; cnt_t c2;
  logic st2 = 0, busy2, vl2, cl2, tv2, rv2, mwe2, stall2;
  logic [SW-1:0] vs2, ms2, bs2;
  logic [WIDW-1:0] mw2;
  token_t t2; result_t r2;

  worker_distributor #(.F(F2), .P(P2)) d2 (
    .clk, .rst, .start(st2), .busy(busy2), .root_edges(e2), .root_cnt(c2),
    .vl_en(vl2), .vl_slot(vs2), .claim_en(cl2),
    .tok_valid(tv2), .tok_ready(1'b1), .tok(t2), .res_valid(rv2), .res_ready(1'b1), .res(r2),
    .memo_we(mwe2), .memo_wid(mw2), .memo_slot(ms2), .best_slot(bs2), .stall(stall2));

  always_ff @(posedge clk) if (vl2) e2[vs2].uct <= e2[vs2].uct - $signed(VL_DEF);

  // reference argmax (first maximum)
  function automatic int amax6(edge_t e [F1]);
    int b = 0;
    for (int i = 1; i < F1; i++) if (e[i].uct > e[b].uct) b = i;
    return b;
  endfunction
  function automatic int amax36(edge_t e [F2]);
    int b = 0;
    for (int i = 1; i < F2; i++) if (e[i].uct > e[b].uct) b = i;
    return b;
  endfunction

  int last_t, gap, nissued, exp_c;
  int stalls = 0;

  initial begin
    for (int i = 0; i < F1; i++) e1[i] = '0;
    for (int i = 0; i < F2; i++) e2[i] = '0;
    c1 = '{ins: SW'(0), clm: SW'(0)};
    c2 = '{ins: SW'(F2), clm: SW'(F2)};
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // (a) root is a leaf: 8 workers, 6 claims then 2 without expansion
    st1 = 1; @(posedge clk); #1 st1 = 0;
    nissued = 0;
    while (nissued < P1) begin
      @(negedge clk);
      if (rv1) begin
        chk(r1.wid == WIDW'(nissued) && r1.s == 0 && r1.depth == 0, "root leaf result");
        chk(r1.xv == (nissued < F1), "claim available");
        if (nissued < F1) chk(r1.sx == IXW'(1 + nissued), "claimed child index");
        chk(mwe1 && ms1 == SW'(F1), "memo marks root stop");
        nissued++;
      end
      chk(!tv1, "no token while root is leaf");
    end
    @(negedge clk);
    // (b) root full, random weights, backpressure now and then
    c1 = '{ins: SW'(F1), clm: SW'(F1)};
    for (int i = 0; i < F1; i++) e1[i].uct = $signed(UW'($urandom % 65536));
    e1[3].uct = e1[1].uct;   // a tie
    @(negedge clk);
    st1 = 1; @(posedge clk); #1 st1 = 0;
    nissued = 0; last_t = -1;
    for (int cyc = 0; nissued < P1 && cyc < 200; cyc++) begin
      @(negedge clk);
      tr1 = (cyc % 7) != 3;
      #1;
      if (stall1) stalls++;
      if (tv1 && tr1) begin
        exp_c = amax6(e1);
        chk(int'(t1.pos) == exp_c, "argmax");
        chk(t1.wid == WIDW'(nissued) && t1.depth == 1 && t1.addr == IXW'(exp_c / 6) && !t1.done, "token fields");
        chk(vl1 && int'(vs1) == exp_c && mwe1 && int'(ms1) == exp_c, "vl and memo");
        nissued++;
      end
    end
    chk(nissued == P1, "all workers issued");
    chk(stalls > 0, "backpressure seen");
    tr1 = 1;
    // (c) interval: 2 cycles per worker for F = 6
    repeat (3) @(negedge clk);
    st1 = 1; @(posedge clk); #1 st1 = 0;
    nissued = 0; last_t = -1;
    for (int cyc = 0; nissued < P1 && cyc < 100; cyc++) begin
      @(negedge clk);
      if (tv1) begin
        if (last_t >= 0) chk(cyc - last_t == 2, "F=6 interval 2");
        last_t = cyc;
        nissued++;
      end
    end
    // F = 36, two CLUT levels: argmax and 3-cycle interval
    for (int i = 0; i < F2; i++) e2[i].uct = $signed(UW'($urandom % 1000000));
    @(negedge clk);
    st2 = 1; @(posedge clk); #1 st2 = 0;
    nissued = 0; last_t = -1;
    for (int cyc = 0; nissued < P2 && cyc < 100; cyc++) begin
      @(negedge clk);
      if (tv2) begin
        chk(int'(t2.pos) == amax36(e2), "F=36 argmax");
        if (last_t >= 0) chk(cyc - last_t == 3, "F=36 interval 3");
        last_t = cyc;
        nissued++;
      end
    end
    chk(nissued == P2, "F=36 all issued");
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
