// mcts_accel -- in-tree operations accelerator for tree-parallel Monte-Carlo
// Tree Search (top level; Fig. 2 and Fig. 3 of the paper).
//
// The host runs the simulations of P workers; this unit keeps the search tree
// (the UCT: nodes, edges and their statistics, no environment states) and does
// all in-tree work of one bulk-synchronous iteration:
//   BackUp     the P rewards of the previous iteration, one per worker in worker
//              order on the reward stream, update every edge each worker
//              traversed (root edge and sub-tree edges in parallel, 2 cycles
//              per worker);
//   Selection  the Worker Distributor sends the P workers down the tree: root
//              choice by CLUTs, then one of NPIPE = min(P, F) Sub-Tree
//              Selection Pipelines of D-1 stages each. Every worker ends at a
//              selected node s and, if it could claim one, an unexpanded child
//              s' to expand;
//   Insertion  the claimed children are written into the banks (root and all
//              pipelines concurrently);
//   Output     (worker, s, s') leave on the result stream in worker order, so
//              entry j of the host's receive buffer belongs to worker j.
// A flush command (after the BackUp of any outstanding workers) runs the
// Tree-Flush module; it also runs once after reset to clear the counters.
//
// Interface: cmd (CMD_ITER or CMD_FLUSH) with valid/ready, accepted when the
// unit is idle; reward stream (valid/ready, Q15.16 signed); result stream
// (valid/ready, result_t with node indices in breadth-first numbering of the
// full F-ary tree); new_root_slot after a flush; ev_* single-cycle event
// strobes for monitoring. Synchronous active-high reset.
//
// Follows the paper: the block structure, n = min(p, F), the D-1 stage
// pipelines over level-partitioned banks, the CLUT distributor, memoized
// 2-cycle BackUp, insertion after Selection, counter-clearing flush.
// EXPAND_ALL = 1 gives the Gomoku expansion: the first worker at a leaf
// expands all F children (s' is child 0; the rest follow it in numbering).
// Lint notes: node, worker and slot fields use the package's fixed widths,
// so indexing an array of P or F entries with them truncates the index
// (values are always in range); the busy outputs of the distributor and
// flush module and the crossbar's sel are not needed here.
// This design's own choices: the stream interfaces in place of the PCIe shell,
// constant virtual loss, the leaf/claim counters, FIFO depths, and the
// flush keeping only the new root's visit count.
module mcts_accel
  import mcts_pkg::*;
#(
  parameter int unsigned F      = F_DEF,
  parameter int unsigned D      = D_DEF,
  parameter int unsigned P      = P_DEF,
  parameter int unsigned CLUT_F = CLUT_F_DEF,
  parameter logic [UW-1:0] BETA = BETA_DEF,
  parameter logic [UW-1:0] VL   = VL_DEF,
  parameter int unsigned FIFO_D = 4,
  parameter bit EXPAND_ALL = 1'b0,        // 1: a worker expands all F children (Gomoku)
  localparam int unsigned NPIPE = (P < F) ? P : F
) (
  input  logic           clk,
  input  logic           rst,
  // commands
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cmd_e           cmd,
  // worker reward queue
  input  logic           rew_valid,
  output logic           rew_ready,
  input  logic signed [RW-1:0] rew_data,
  // node index queue
  output logic           out_valid,
  input  logic           out_ready,
  output result_t        out_res,
  // tree flush
  output logic           new_root_valid,
  output logic [SW-1:0]  new_root_slot,
  output phase_e         phase_o,
  // event strobes
  output logic           ev_dist_stall,
  output logic           ev_root_leaf,
  output logic           ev_stage_leaf,
  output logic           ev_stage_bypass,
  output logic           ev_stage_stall,
  output logic           ev_bu_edge,
  output logic           ev_insert,
  output logic           ev_no_expand
);

  phase_e phase;
  assign phase_o = phase;

  // ---------------- root level ----------------
  edge_t         root_edges [F];
  cnt_t          root_cnt;
  logic [NW-1:0] nroot;
  logic          vl_en, claim_en;
  logic [SW-1:0] vl_slot, best_slot;
  logic          rb_flush_en, rb_ins_en, rb_bu_en, rb_bu_edge_en;
  logic [NW-1:0] rb_flush_n;
  logic [SW-1:0] rb_bu_slot;
  edge_t         rb_bu_edge;

  root_level_bank #(.F(F), .VL(VL), .EXPAND_ALL(EXPAND_ALL)) u_root (
    .clk, .rst,
    .flush_en(rb_flush_en), .flush_n(rb_flush_n),
    .ins_en(rb_ins_en),
    .bu_en(rb_bu_en), .bu_edge_en(rb_bu_edge_en), .bu_slot(rb_bu_slot), .bu_edge(rb_bu_edge),
    .vl_en, .vl_slot, .claim_en,
    .edges(root_edges), .cnt(root_cnt), .nroot
  );

  // ---------------- distributor, FIFO, crossbar ----------------
  logic     dist_start, dist_busy;
  logic     dtok_valid, dtok_ready;
  token_t   dtok;
  logic     dres_valid, dres_ready;
  result_t  dres;
  logic     hm_we;
  logic [WIDW-1:0] hm_wid;
  logic [SW-1:0]   hm_slot;
  logic [SW-1:0]   head_c [P];   // root level of the memoization buffer

  worker_distributor #(.F(F), .P(P), .NPIPE(NPIPE), .CLUT_F(CLUT_F), .EXPAND_ALL(EXPAND_ALL)) u_dist (
    .clk, .rst, .start(dist_start), .busy(dist_busy),
    .root_edges, .root_cnt, .vl_en, .vl_slot, .claim_en,
    .tok_valid(dtok_valid), .tok_ready(dtok_ready), .tok(dtok),
    .res_valid(dres_valid), .res_ready(dres_ready), .res(dres),
    .memo_we(hm_we), .memo_wid(hm_wid), .memo_slot(hm_slot),
    .best_slot, .stall(ev_dist_stall)
  );

  always_ff @(posedge clk) if (hm_we) head_c[hm_wid] <= hm_slot;

  logic   xf_valid, xf_ready;
  token_t xf_tok;
  logic   pf_in_valid [NPIPE];
  logic   pf_in_ready [NPIPE];
  token_t pf_in_tok   [NPIPE];
  logic [SW-1:0] xsel;

  sync_fifo #(.WIDTH(TOK_W), .DEPTH(FIFO_D)) u_dfifo (
    .clk, .rst,
    .in_valid(dtok_valid), .in_ready(dtok_ready), .in_data(dtok),
    .out_valid(xf_valid),  .out_ready(xf_ready),  .out_data(xf_tok),
    .count()
  );

  crossbar_switch #(.NPIPE(NPIPE)) u_xbar (
    .in_valid(xf_valid), .in_ready(xf_ready), .in_tok(xf_tok),
    .out_valid(pf_in_valid), .out_ready(pf_in_ready), .out_tok(pf_in_tok), .sel(xsel)
  );

  // ---------------- pipelines ----------------
  logic          pres_valid [NPIPE];
  logic          pres_ready [NPIPE];
  result_t       pres       [NPIPE];
  logic          ins_pend   [NPIPE];
  logic [D-2:0]  p_leaf [NPIPE], p_byp [NPIPE], p_stall [NPIPE], p_buw [NPIPE];
  logic          bu_start;
  logic [WIDW-1:0] bu_wid;
  logic [NW-1:0] bu_parent_n;
  logic          fl_clr_en;
  logic [IXW-1:0] fl_clr_addr;

  for (genvar i = 0; i < NPIPE; i++) begin : g_pipe
    logic   pv, pr;
    token_t pt;
    sync_fifo #(.WIDTH(TOK_W), .DEPTH(FIFO_D)) u_pfifo (
      .clk, .rst,
      .in_valid(pf_in_valid[i]), .in_ready(pf_in_ready[i]), .in_data(pf_in_tok[i]),
      .out_valid(pv), .out_ready(pr), .out_data(pt), .count()
    );
    subtree_pipeline #(.F(F), .D(D), .P(P), .NPIPE(NPIPE), .BETA(BETA), .VL(VL),
                       .EXPAND_ALL(EXPAND_ALL)) u_pipe (
      .clk, .rst, .phase,
      .in_valid(pv), .in_ready(pr), .in_tok(pt),
      .res_valid(pres_valid[i]), .res_ready(pres_ready[i]), .res(pres[i]),
      .bu_start, .bu_wid, .bu_reward(rew_data), .bu_parent_n,
      .ins_pending(ins_pend[i]),
      .clr_en(fl_clr_en), .clr_addr(fl_clr_addr),
      .ev_leaf(p_leaf[i]), .ev_bypass(p_byp[i]), .ev_stall(p_stall[i]), .ev_bu_write(p_buw[i])
    );
  end

  // ---------------- result collector (receive-buffer order) ----------------
  localparam int unsigned NSRC = NPIPE + 1;     // source NPIPE = distributor
  result_t rbuf [P];
  logic    src_valid [NSRC];
  result_t src_res   [NSRC];
  logic [$clog2(NSRC+1)-1:0] rr_ptr, grant;
  logic    grant_v;
  logic [WIDW:0] n_collected;

  always_comb begin
    for (int i = 0; i < NPIPE; i++) begin
      src_valid[i] = pres_valid[i];
      src_res[i]   = pres[i];
    end
    src_valid[NPIPE] = dres_valid;
    src_res[NPIPE]   = dres;
    grant_v = 1'b0;
    grant   = '0;
    for (int k = 0; k < NSRC; k++) begin
      automatic int s = (int'(rr_ptr) + k) % NSRC;
      if (!grant_v && src_valid[s]) begin
        grant_v = 1'b1;
        grant   = ($bits(grant))'(s);
      end
    end
    for (int i = 0; i < NPIPE; i++) pres_ready[i] = grant_v && (grant == ($bits(grant))'(i));
    dres_ready = grant_v && (grant == ($bits(grant))'(NPIPE));
  end

  always_ff @(posedge clk) if (grant_v) rbuf[src_res[grant].wid] <= src_res[grant];

  // ---------------- BackUp sequencing ----------------
  logic          bu_b;          // second cycle of a worker's BackUp
  logic [WIDW:0] bu_j;
  logic [SW-1:0] bu_c_q;
  logic signed [RW-1:0] bu_rew_q;
  edge_t         root_new;
  logic [SW-1:0] cur_c;

  assign cur_c       = head_c[bu_j[WIDW-1:0]];
  assign bu_wid      = bu_j[WIDW-1:0];
  assign rew_ready   = (phase == PH_BU) && !bu_b;
  assign bu_start    = rew_valid && rew_ready;
  assign bu_parent_n = (cur_c < SW'(F)) ? ((root_edges[cur_c].n == '1) ? root_edges[cur_c].n
                                                                    : root_edges[cur_c].n + 1'b1)
                                        : '0;

  backup_updater #(.BETA(BETA), .VL(VL)) u_root_bu (
    .old_edge(root_edges[bu_c_q]), .reward(bu_rew_q),
    .parent_n((nroot == '1) ? nroot : nroot + 1'b1), .new_edge(root_new)
  );

  assign rb_bu_en      = (phase == PH_BU) && bu_b;
  assign rb_bu_edge_en = bu_c_q < SW'(F);
  assign rb_bu_slot    = bu_c_q;
  assign rb_bu_edge    = root_new;

  // ---------------- tree flush ----------------
  logic fl_start, fl_init, fl_busy, fl_done;

  tree_flush #(.F(F), .D(D), .NPIPE(NPIPE)) u_flush (
    .clk, .rst, .start(fl_start), .init(fl_init), .best_slot, .root_edges,
    .busy(fl_busy), .done(fl_done),
    .root_flush_en(rb_flush_en), .root_flush_n(rb_flush_n),
    .clr_en(fl_clr_en), .clr_addr(fl_clr_addr),
    .new_root_valid, .new_root_slot
  );

  // ---------------- phase control ----------------
  logic outstanding;     // workers selected and not yet backed up
  cmd_e pend_cmd;
  logic started;         // the phase's unit has been started
  logic [WIDW:0] out_j;
  logic ins_busy;

  always_comb begin
    ins_busy = 1'b0;
    for (int i = 0; i < NPIPE; i++) ins_busy |= ins_pend[i];
  end

  assign cmd_ready  = (phase == PH_IDLE);
  assign dist_start = (phase == PH_SEL) && !started;
  assign fl_start   = (phase == PH_FLUSH) && !started;
  assign rb_ins_en  = (phase == PH_INS) && !started;
  assign out_valid  = (phase == PH_OUT);
  assign out_res    = rbuf[out_j[WIDW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      phase       <= PH_FLUSH;
      fl_init     <= 1'b1;
      started     <= 1'b0;
      outstanding <= 1'b0;
      pend_cmd    <= CMD_ITER;
      bu_b        <= 1'b0;
      bu_j        <= '0;
      bu_c_q      <= '0;
      bu_rew_q    <= '0;
      n_collected <= '0;
      out_j       <= '0;
      rr_ptr      <= '0;
    end else begin
      if (grant_v) rr_ptr <= (int'(grant) == NSRC - 1) ? '0 : grant + 1'b1;
      unique case (phase)
        PH_IDLE: if (cmd_valid) begin
          pend_cmd <= cmd;
          started  <= 1'b0;
          bu_j     <= '0;
          bu_b     <= 1'b0;
          if (outstanding)          phase <= PH_BU;
          else if (cmd == CMD_ITER) phase <= PH_SEL;
          else begin
            fl_init <= 1'b0;
            phase   <= PH_FLUSH;
          end
        end
        PH_BU: begin
          if (!bu_b) begin
            if (bu_start) begin
              bu_b     <= 1'b1;
              bu_c_q   <= cur_c;
              bu_rew_q <= rew_data;
            end
          end else begin
            bu_b <= 1'b0;
            if (bu_j == (WIDW+1)'(P - 1)) begin
              outstanding <= 1'b0;
              started     <= 1'b0;
              if (pend_cmd == CMD_ITER) phase <= PH_SEL;
              else begin
                fl_init <= 1'b0;
                phase   <= PH_FLUSH;
              end
            end else begin
              bu_j <= bu_j + 1'b1;
            end
          end
        end
        PH_SEL: begin
          started <= 1'b1;
          if (dist_start) n_collected <= '0;
          else if (grant_v) begin
            if (n_collected == (WIDW+1)'(P - 1)) begin
              phase   <= PH_INS;
              started <= 1'b0;
            end
            n_collected <= n_collected + 1'b1;
          end
        end
        PH_INS: begin
          started <= 1'b1;
          if (started && !ins_busy) begin
            phase <= PH_OUT;
            out_j <= '0;
          end
        end
        PH_OUT: if (out_ready) begin
          if (out_j == (WIDW+1)'(P - 1)) begin
            outstanding <= 1'b1;
            phase       <= PH_IDLE;
          end
          out_j <= out_j + 1'b1;
        end
        PH_FLUSH: begin
          started <= 1'b1;
          if (fl_done) phase <= PH_IDLE;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // ---------------- event strobes ----------------
  always_comb begin
    ev_stage_leaf = 1'b0; ev_stage_bypass = 1'b0; ev_stage_stall = 1'b0; ev_bu_edge = 1'b0;
    ev_insert = 1'b0;
    for (int i = 0; i < NPIPE; i++) begin
      ev_stage_leaf   |= |p_leaf[i];
      ev_stage_bypass |= |p_byp[i];
      ev_stage_stall  |= |p_stall[i];
      ev_bu_edge      |= |p_buw[i];
      ev_insert       |= (phase == PH_INS) && ins_pend[i];
    end
    ev_root_leaf = dres_valid && dres_ready;
    ev_no_expand = grant_v && !src_res[grant].xv;
  end

  // a result is collected only during Selection, a reward only taken in BackUp
  always_ff @(posedge clk) if (!rst) begin
    assert (!grant_v || phase == PH_SEL) else $error("mcts_accel: result outside Selection");
    assert (!bu_start || phase == PH_BU) else $error("mcts_accel: reward outside BackUp");
  end

endmodule
