// mcts_host_model -- plays the host side of the accelerator and checks it
// against a reference model of tree-parallel MCTS written here in real
// numbers.
//
// The host sends CMD_ITER commands, streams one reward per worker (worker
// order, back to back) and reads the P results of each iteration; every
// FLUSH_EVERY iterations it sends CMD_FLUSH. The reference model runs the
// same iteration sequentially, worker after worker, which is what the
// hardware computes (each stage and the root serve workers in order):
//   Selection: at a node with F inserted children go to an edge of largest
//   uct, subtract VL from it; at a leaf claim the next child; stop at depth D.
//   Insertion after all workers; BackUp edge by edge with
//   uct = W/N + beta*sqrt(ln Np / N) - O*VL (real arithmetic).
// Because fixed-point and real weights can differ in the last bits, the
// hardware's choice (read from the selected node's index, which encodes the
// whole path in the full F-ary numbering) is accepted when its model weight is
// within TOL of the best, and the model then follows it.
// It also counts the mechanisms the design has and fails if one never
// happened, and checks that a BackUp phase takes 2 cycles per worker.
module mcts_host_model
  import mcts_pkg::*;
#(
  parameter int unsigned F = F_DEF,
  parameter int unsigned D = D_DEF,
  parameter int unsigned P = P_DEF,
  parameter int unsigned ITERS = 12,
  parameter int unsigned FLUSH_EVERY = 5,
  parameter bit          EXPAND_ALL = 1'b0,
  parameter longint unsigned WATCHDOG = 64'd5_000_000
) (
  input  logic           clk,
  output logic           rst,
  output logic           cmd_valid,
  input  logic           cmd_ready,
  output cmd_e           cmd,
  output logic           rew_valid,
  input  logic           rew_ready,
  output logic signed [RW-1:0] rew_data,
  input  logic           out_valid,
  output logic           out_ready,
  input  result_t        out_res,
  input  logic           new_root_valid,
  input  logic [SW-1:0]  new_root_slot,
  input  phase_e         phase,
  input  logic           ev_dist_stall,
  input  logic           ev_root_leaf,
  input  logic           ev_stage_leaf,
  input  logic           ev_stage_bypass,
  input  logic           ev_stage_stall,
  input  logic           ev_bu_edge,
  input  logic           ev_insert,
  input  logic           ev_no_expand
);

  localparam real TOL  = 0.01;
  localparam real BETA = real'(BETA_DEF) / 65536.0;
  localparam real VLR  = real'(VL_DEF) / 65536.0;
  localparam real UMAX = 32768.0 - 1.0 / 65536.0;

  int checks = 0, failures = 0;
  longint unsigned cycles = 0;

  // ---------------- reference model state ----------------
  real    e_uct [longint];   // edge into node (keyed by child node index)
  longint e_w   [longint];
  int     e_n   [longint];
  int     e_o   [longint];
  int     n_ins [longint];
  int     n_clm [longint];
  int     nroot;
  longint path  [P][$];      // traversed edges (child indices) of each worker
  longint pend_ins [$];      // nodes inserted after Selection

  // mechanism counters
  int c_dist_stall = 0, c_root_leaf = 0, c_stage_leaf = 0, c_bypass = 0,
      c_stage_stall = 0, c_bu_edge = 0, c_insert = 0, c_no_expand = 0, c_flush = 0;
  int bu_cycles = 0;

  always @(posedge clk) begin
    cycles++;
    if (!rst) begin
      if (ev_dist_stall)   c_dist_stall++;
      if (ev_root_leaf)    c_root_leaf++;
      if (ev_stage_leaf)   c_stage_leaf++;
      if (ev_stage_bypass) c_bypass++;
      if (ev_stage_stall)  c_stage_stall++;
      if (ev_bu_edge)      c_bu_edge++;
      if (ev_insert)       c_insert++;
      if (ev_no_expand)    c_no_expand++;
      if (phase == PH_BU)  bu_cycles++;
    end
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycles);
    end
  endtask

  function automatic longint base_of(int d);
    longint b = 0, pw = 1;
    for (int i = 0; i < d; i++) begin b += pw; pw *= F; end
    return b;
  endfunction

  function automatic longint idx(int d, longint pos);
    return base_of(d) + pos;
  endfunction

  function automatic int depth_of(longint ix);
    int d = 0;
    while (d < 20 && ix >= base_of(d + 1)) d++;
    return d;
  endfunction

  // ancestor of node ix at depth d
  function automatic longint anc(longint ix, int d);
    int dd = depth_of(ix);
    longint pos = ix - base_of(dd);
    for (int i = dd; i > d; i--) pos = pos / F;
    return idx(d, pos);
  endfunction

  function automatic longint child(longint ix, int e);
    int d = depth_of(ix);
    return idx(d + 1, (ix - base_of(d)) * F + e);
  endfunction

  function automatic int gi(ref int a [longint], input longint k);
    return a.exists(k) ? a[k] : 0;
  endfunction

  function automatic real ucalc(longint w, int n, int np, int o);
    real u;
    if (n == 0) return UMAX - o * VLR;
    u = (real'(w) / 65536.0) / n + BETA * $sqrt($ln(real'(np)) / n) - o * VLR;
    if (u > UMAX) u = UMAX;
    if (u < -32768.0) u = -32768.0;
    return u;
  endfunction

  // Selection of one worker in the model, following the hardware's result r
  task automatic model_select(int j, result_t r);
    longint cur = 0, hw_s, ch, hc;
    int d = 0, hw_d, slot;
    real best;
    logic xv;
    hw_s = longint'(r.s);
    hw_d = depth_of(hw_s);
    path[j].delete();
    chk(int'(r.wid) == j, "result order = worker order");
    chk(int'(r.depth) == hw_d, "result depth field");
    forever begin
      if (d == int'(D)) begin xv = 0; break; end
      if (gi(n_ins, cur) < int'(F)) begin
        if (EXPAND_ALL && gi(n_clm, cur) == 0) begin
          xv = 1; slot = 0;
          n_clm[cur] = int'(F);
          for (int e = 0; e < int'(F); e++) pend_ins.push_back(child(cur, e));
        end else if (!EXPAND_ALL && gi(n_clm, cur) < int'(F)) begin
          xv = 1; slot = gi(n_clm, cur);
          n_clm[cur] = slot + 1;
          pend_ins.push_back(child(cur, slot));
        end else xv = 0;
        break;
      end
      // non-leaf: check the hardware's choice
      best = -1.0e9;
      for (int e = 0; e < int'(F); e++) if (e_uct[child(cur, e)] > best) best = e_uct[child(cur, e)];
      if (hw_d <= d) begin
        chk(0, $sformatf("worker %0d stopped at non-leaf node %0d", j, cur));
        return;
      end
      hc = anc(hw_s, d + 1);
      chk(e_uct[hc] >= best - TOL, $sformatf("worker %0d: edge to %0d is not the best (%f < %f)", j, hc, e_uct[hc], best));
      e_uct[hc] = e_uct[hc] - VLR;
      if (e_uct[hc] < -32768.0) e_uct[hc] = -32768.0;
      e_o[hc]++;
      path[j].push_back(hc);
      cur = hc;
      d++;
    end
    chk(hw_s == cur, $sformatf("worker %0d: selected node %0d, model %0d", j, hw_s, cur));
    chk(r.xv == xv, $sformatf("worker %0d: expansion flag", j));
    if (xv && r.xv) chk(longint'(r.sx) == child(cur, slot), $sformatf("worker %0d: expanded node", j));
  endtask

  task automatic model_insert;
    foreach (pend_ins[i]) begin
      longint c = pend_ins[i];
      longint par = anc(c, depth_of(c) - 1);
      e_uct[c] = UMAX; e_w[c] = 0; e_n[c] = 0; e_o[c] = 0;
      n_ins[par] = gi(n_ins, par) + 1;
    end
    pend_ins.delete();
  endtask

  task automatic model_backup(int j, longint rw);
    int np;
    np = nroot + 1;
    foreach (path[j][i]) begin
      longint c = path[j][i];
      e_n[c]++;
      e_o[c]--;
      e_w[c] += rw;
      e_uct[c] = ucalc(e_w[c], e_n[c], np, e_o[c]);
      np = e_n[c];
    end
    nroot++;
    path[j].delete();
  endtask

  longint rewards [P];
  logic outstanding = 0;

  task automatic send_rewards;
    int bu0;
    bu0 = bu_cycles;
    for (int j = 0; j < int'(P); j++) begin
      // root child 0 is a strong move (reward 0.75..1), the others are weak
      // (-1..-0.75): workers then pile into one sub-tree and its pipeline
      // backs up, as happens when the search has found a good move
      if (path[j].size() != 0 && anc(path[j][0], 1) == 1)
        rewards[j] = 49152 + longint'($urandom % 16384);
      else if (path[j].size() != 0)
        rewards[j] = -65536 + longint'($urandom % 16384);
      else
        rewards[j] = longint'($urandom % 131072) - 65536;  // -1.0 .. +1.0
      rew_valid <= 1;
      rew_data  <= RW'(rewards[j]);
      @(posedge clk);
      while (!rew_ready) @(posedge clk);
      model_backup(j, rewards[j]);
    end
    rew_valid <= 0;
    @(posedge clk);
    @(posedge clk);
    chk(bu_cycles - bu0 == 2 * int'(P), $sformatf("BackUp takes 2 cycles per worker (%0d for %0d)", bu_cycles - bu0, P));
  endtask

  task automatic command(cmd_e c);
    cmd_valid <= 1;
    cmd <= c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 0;
  endtask

  task automatic iterate;
    int got;
    command(CMD_ITER);
    if (outstanding) send_rewards();
    got = 0;
    while (got < int'(P)) begin
      out_ready <= ($urandom % 4) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        model_select(got, out_res);
        got++;
      end
    end
    out_ready <= 0;
    model_insert();
    outstanding = 1;
  endtask

  task automatic flush;
    real best;
    int sl;
    command(CMD_FLUSH);
    if (outstanding) send_rewards();
    outstanding = 0;
    while (phase != PH_FLUSH) @(posedge clk);
    @(posedge clk);
    chk(new_root_valid, "new root reported");
    sl = int'(new_root_slot);
    best = -1.0e9;
    for (int e = 0; e < int'(F); e++) if (e_uct[child(0, e)] > best) best = e_uct[child(0, e)];
    chk(e_uct[child(0, sl)] >= best - TOL, "flush picks the best root child");
    nroot = e_n[child(0, sl)];
    n_ins.delete(); n_clm.delete();
    e_uct.delete(); e_w.delete(); e_n.delete(); e_o.delete();
    while (phase != PH_IDLE) @(posedge clk);
    c_flush++;
  endtask

  initial begin
    rst = 1; cmd_valid = 0; cmd = CMD_ITER; rew_valid = 0; rew_data = '0; out_ready = 0;
    nroot = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    while (phase != PH_IDLE) @(posedge clk);      // counters cleared after reset
    for (int it = 1; it <= int'(ITERS); it++) begin
      iterate();
      if (it % int'(FLUSH_EVERY) == 0) flush();
    end
    chk(c_dist_stall  > 0, "mechanism: distributor stalled by a full FIFO");
    chk(c_root_leaf   > 0, "mechanism: worker stops at a root that is a leaf");
    chk(c_stage_leaf  > 0, "mechanism: worker stops at a leaf inside a pipeline");
    chk(c_bypass      > 0, "mechanism: finished worker bypasses a stage");
    chk(c_stage_stall > 0, "mechanism: stage output stalled");
    chk(c_bu_edge     > 0, "mechanism: sub-tree BackUp write");
    chk(c_insert      > 0, "mechanism: node insertion");
    chk(c_no_expand   > 0, "mechanism: worker with nothing to expand");
    chk(c_flush       > 0, "mechanism: tree flush");
    $display("events: dist_stall=%0d root_leaf=%0d stage_leaf=%0d bypass=%0d stage_stall=%0d bu_edge=%0d insert=%0d no_expand=%0d flush=%0d cycles=%0d",
             c_dist_stall, c_root_leaf, c_stage_leaf, c_bypass, c_stage_stall, c_bu_edge, c_insert,
             c_no_expand, c_flush, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cycles < WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
