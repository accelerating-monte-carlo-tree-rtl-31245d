// tb_subtree_pipeline -- one sub-tree pipeline (F = 3, D = 4, P = 8, a
// single pipeline owning all three root children, 3 stages) driven through
// the counter sweep and 10 rounds of Selection, Insertion and BackUp, with the
// root side (root choice and root-edge visit counts) played by the testbench.
// A reference model in real arithmetic follows each worker: at a node with
// all F children inserted it must take an edge of (near-)largest uct and pay
// the virtual loss; at a leaf it claims the next child; at depth D it stops.
// Also checked: a worker that scans stage 1 leaves F+1 cycles after the
// previous one (round 1), a worker that stops at a leaf in stage 1 one cycle
// after the previous one (round 0), one insertion per cycle, BackUp accepts a worker
// every 2 cycles.
module tb_subtree_pipeline;
  import mcts_pkg::*;
  localparam int F = 3, D = 4, P = 8, NPIPE = 1, NS = D - 1;
  localparam real TOL  = 0.01;
  localparam real BETA = real'(BETA_DEF) / 65536.0;
  localparam real VLR  = real'(VL_DEF) / 65536.0;
  localparam real UMAX = 32768.0 - 1.0 / 65536.0;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst;
  phase_e phase;
  logic in_valid, in_ready, res_valid, res_ready, bu_start, ins_pending, clr_en;
  token_t in_tok;
  result_t res;
  logic [WIDW-1:0] bu_wid;
  logic signed [RW-1:0] bu_reward;
  logic [NW-1:0] bu_parent_n;
  logic [IXW-1:0] clr_addr;
  logic [D-2:0] ev_leaf, ev_bypass, ev_stall, ev_bu_write;

  subtree_pipeline #(.F(F), .D(D), .P(P), .NPIPE(NPIPE)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ---------------- reference model ----------------
  real    e_uct [longint];
  longint e_w   [longint];
  int     e_n   [longint];
  int     e_o   [longint];
  int     n_ins [longint];
  int     n_clm [longint];
  int     rootN [F];
  int     rc    [P];          // root child of each worker
  longint path  [P][$];
  longint pend  [$];
  int     bu_w = 0, leaf_ev = 0, byp_ev = 0, stall_ev = 0;

  always @(posedge clk) if (!rst) begin
    bu_w     += $countones(ev_bu_write);
    leaf_ev  += $countones(ev_leaf);
    byp_ev   += $countones(ev_bypass);
    stall_ev += $countones(ev_stall);
  end

  function automatic longint base_of(int d);
    longint b = 0, pw = 1;
    for (int i = 0; i < d; i++) begin b += pw; pw *= F; end
    return b;
  endfunction
  function automatic int depth_of(longint ix);
    int d = 0;
    while (d < 20 && ix >= base_of(d + 1)) d++;
    return d;
  endfunction
  function automatic longint anc(longint ix, int d);
    int dd = depth_of(ix);
    longint pos = ix - base_of(dd);
    for (int i = dd; i > d; i--) pos = pos / F;
    return base_of(d) + pos;
  endfunction
  function automatic longint child(longint ix, int e);
    int d = depth_of(ix);
    return base_of(d + 1) + (ix - base_of(d)) * F + e;
  endfunction
  function automatic int gi(ref int a [longint], input longint k);
    return a.exists(k) ? a[k] : 0;
  endfunction
  function automatic real ucalc(longint w, int n, int np, int o);
    real u;
    if (n == 0) return UMAX - o * VLR;
    u = (real'(w) / 65536.0) / n + BETA * $sqrt($ln(real'(np)) / n) - o * VLR;
    return (u > UMAX) ? UMAX : u;
  endfunction

  task automatic model_select(int j, result_t r);
    longint cur = 1 + rc[j], hw_s, hc;
    int d = 1, hw_d, slot;
    real best;
    logic xv;
    hw_s = longint'(r.s);
    hw_d = depth_of(hw_s);
    path[j].delete();
    forever begin
      if (d == D) begin xv = 0; break; end
      if (gi(n_ins, cur) < F) begin
        if (gi(n_clm, cur) < F) begin
          xv = 1; slot = gi(n_clm, cur); n_clm[cur] = slot + 1; pend.push_back(child(cur, slot));
        end else xv = 0;
        break;
      end
      best = -1.0e9;
      for (int e = 0; e < F; e++) if (e_uct[child(cur, e)] > best) best = e_uct[child(cur, e)];
      if (hw_d <= d) begin chk(0, $sformatf("worker %0d stopped at non-leaf %0d", j, cur)); return; end
      hc = anc(hw_s, d + 1);
      chk(e_uct[hc] >= best - TOL, $sformatf("worker %0d edge %0d not best", j, hc));
      e_uct[hc] -= VLR; e_o[hc]++;
      path[j].push_back(hc);
      cur = hc; d++;
    end
    chk(hw_s == cur, $sformatf("worker %0d selected %0d, model %0d", j, hw_s, cur));
    chk(r.xv == xv, $sformatf("worker %0d expansion flag", j));
    if (xv && r.xv) chk(longint'(r.sx) == child(cur, slot), $sformatf("worker %0d expanded node", j));
    chk(int'(r.depth) == hw_d, "depth field");
  endtask

  // ---------------- phases ----------------
  task automatic sweep;
    phase <= PH_FLUSH;
    for (int a = 0; a < F * F * F; a++) begin   // largest bank: 3 * F**(D-2) = 27 entries
      clr_en <= 1; clr_addr <= IXW'(a); @(posedge clk);
    end
    clr_en <= 0; phase <= PH_IDLE; @(posedge clk);
  endtask

  task automatic select_round(int round);
    int sent = 0, got = 0;
    longint t_prev = 0;
    result_t rr [P];
    phase <= PH_SEL;
    @(posedge clk);
    fork
      begin
        for (int j = 0; j < P; j++) begin
          rc[j] = (round == 0) ? j % F : (round == 1) ? j % 2 : int'($urandom % F);
          in_valid <= 1;
          in_tok <= '{wid: WIDW'(j), depth: DW'(1), pos: IXW'(rc[j]), addr: IXW'(rc[j]),
                      done: 1'b0, xv: 1'b0, xslot: '0};
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
        in_valid <= 0;
      end
      begin
        while (got < P) begin
          res_ready <= ($urandom % 5 != 0) || round < 2;
          @(posedge clk);
          if (res_valid && res_ready) begin
            chk(int'(res.wid) == got, "results in worker order within a pipeline");
            // round 0: every worker stops at a leaf in stage 1 (one per cycle);
            // round 1: every worker scans F edges in stage 1 (F+1 cycles each)
            if (round == 0 && got >= 1) chk(cyc - t_prev == 1, $sformatf("leaf-stop interval %0d, expected 1", cyc - t_prev));
            if (round == 1 && got >= 1) chk(cyc - t_prev == F + 1, $sformatf("result interval %0d, expected F+1", cyc - t_prev));
            t_prev = cyc;
            rr[got] = res;
            got++;
          end
        end
        res_ready <= 0;
      end
    join
    for (int j = 0; j < P; j++) model_select(j, rr[j]);
  endtask

  task automatic insert_round;
    int n = pend.size(), c = 0;
    phase <= PH_INS;
    @(posedge clk);
    while (ins_pending) begin c++; @(posedge clk); end
    chk(c == n, $sformatf("insertion of %0d nodes took %0d cycles", n, c));
    foreach (pend[i]) begin
      longint ch = pend[i];
      longint par = anc(ch, depth_of(ch) - 1);
      e_uct[ch] = UMAX; e_w[ch] = 0; e_n[ch] = 0; e_o[ch] = 0;
      n_ins[par] = gi(n_ins, par) + 1;
    end
    pend.delete();
    phase <= PH_IDLE;
    @(posedge clk);
  endtask

  task automatic backup_round;
    int w0 = bu_w, exp_w = 0;
    longint t0;
    phase <= PH_BU;
    @(posedge clk);
    t0 = cyc;
    for (int j = 0; j < P; j++) begin
      longint rw = longint'($urandom % 131072) - 65536;
      int np;
      rootN[rc[j]]++;
      bu_start <= 1; bu_wid <= WIDW'(j); bu_reward <= RW'(rw); bu_parent_n <= NW'(rootN[rc[j]]);
      @(posedge clk);
      bu_start <= 0;
      @(posedge clk);
      np = rootN[rc[j]];
      foreach (path[j][i]) begin
        longint c = path[j][i];
        e_n[c]++; e_o[c]--; e_w[c] += rw;
        e_uct[c] = ucalc(e_w[c], e_n[c], np, e_o[c]);
        np = e_n[c];
      end
      exp_w += path[j].size();
      path[j].delete();
    end
    @(posedge clk);
    chk(cyc - t0 == 2 * P + 1, "BackUp: 2 cycles per worker");
    chk(bu_w - w0 == exp_w, $sformatf("BackUp wrote %0d edges, expected %0d", bu_w - w0, exp_w));
    phase <= PH_IDLE;
    @(posedge clk);
  endtask

  initial begin
    rst = 1; phase = PH_IDLE; in_valid = 0; in_tok = '0; res_ready = 0; bu_start = 0;
    bu_wid = '0; bu_reward = '0; bu_parent_n = '0; clr_en = 0; clr_addr = '0;
    foreach (rootN[i]) rootN[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    sweep();
    for (int r = 0; r < 10; r++) begin
      if (r > 0) backup_round();
      select_round(r);
      insert_round();
    end
    backup_round();
    chk(leaf_ev > 0 && byp_ev > 0 && stall_ev > 0, "leaf, bypass and stall events all seen");
    $display("events: leaf=%0d bypass=%0d stall=%0d bu_write=%0d", leaf_ev, byp_ev, stall_ev, bu_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
