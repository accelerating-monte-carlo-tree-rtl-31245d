// subtree_pipeline -- one Sub-Tree Selection Pipeline with its Sub-Tree Memory
// Bank Group, BackUp Memoization Buffers, BackUp Updaters and Node Insertion
// (Fig. 3 of the paper, one row of it).
//
// The pipeline owns the root children c with c mod NPIPE = PIPE and every
// node below them. Depth k = 1..D-1 of this sub-tree lives in bank k, which
// holds ceil(F/NPIPE) * F**(k-1) node entries of F edges each: the full F-ary
// tree, allocated at compile time as in Sec. IV-B. The node at position pos of
// depth k has entry address addr = (c div NPIPE) * F**(k-1) + (pos mod F**(k-1)),
// and its child e has address addr*F + e in bank k+1, so no address table is
// needed.
//
// Four operations, selected by the phase input, share the bank ports:
//   PH_SEL   D-1 selection_stage units form a pipeline; stage k serves one
//            worker while stage k+1 serves the previous one. A worker leaves
//            at the last stage with its selected node s and claimed child s'
//            and becomes a result (node indices) and, if it claimed a child,
//            an insertion request.
//   PH_BU    bu_start with a worker number, reward and the new visit count of
//            the worker's root edge: in the same cycle every level's memo
//            word and edge are read and registered; in the next cycle D-1
//            backup_updater units write all the traversed edges at once and the
//            memo words are invalidated. 2 cycles per worker (Sec. IV-E). The
//            parent visit count of level k is the new count of level k-1.
//   PH_INS   the node_inserter writes the queued insertions, one per cycle.
//   PH_FLUSH clr_en/clr_addr clear the expansion counters of entry clr_addr in
//            every bank that has it (the Tree-Flush sweep).
module subtree_pipeline
  import mcts_pkg::*;
#(
  parameter int unsigned F     = F_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned P     = P_DEF,
  parameter int unsigned NPIPE = (P < F) ? P : F,
  parameter logic [UW-1:0] BETA = BETA_DEF,
  parameter logic [UW-1:0] VL   = VL_DEF,
  parameter bit EXPAND_ALL = 1'b0          // Gomoku-style expansion of all F children
) (
  input  logic            clk,
  input  logic            rst,
  input  phase_e          phase,
  // Selection
  input  logic            in_valid,
  output logic            in_ready,
  input  token_t          in_tok,
  output logic            res_valid,
  input  logic            res_ready,
  output result_t         res,
  // BackUp
  input  logic            bu_start,
  input  logic [WIDW-1:0] bu_wid,
  input  logic signed [RW-1:0] bu_reward,
  input  logic [NW-1:0]   bu_parent_n,
  // Node Insertion
  output logic            ins_pending,
  // Tree Flush
  input  logic            clr_en,
  input  logic [IXW-1:0]  clr_addr,
  // events, one bit per stage
  output logic [D-2:0]    ev_leaf,
  output logic [D-2:0]    ev_bypass,
  output logic [D-2:0]    ev_stall,
  output logic [D-2:0]    ev_bu_write
);

  localparam int unsigned NS  = D - 1;                       // stages and banks
  localparam int unsigned RPP = (F + NPIPE - 1) / NPIPE;     // root children per pipeline

  // stage-to-stage handshake, index k = input of stage k (k = 1..NS), NS+1 = output
  logic   s_valid [1:NS+1];
  logic   s_ready [1:NS+1];
  token_t s_tok   [1:NS+1];

  assign s_valid[1] = in_valid && (phase == PH_SEL);
  assign in_ready   = s_ready[1] && (phase == PH_SEL);
  assign s_tok[1]   = in_tok;

  // insertion queue
  logic     iq_ready;
  ins_req_t iq_req;
  logic     ins_wr_en;
  ins_req_t ins_wr;
  cnt_t     ins_cnt_in;
  edge_t    ins_edge;
  cnt_t     ins_cnt;

  // per-level BackUp values
  edge_t            bu_old_q   [1:NS];
  logic             bu_val_q   [1:NS];
  logic [IXW-1:0]   bu_addr_q  [1:NS];
  logic [SW-1:0]    bu_slot_q  [1:NS];
  logic [NW-1:0]    bu_pn      [1:NS];
  edge_t            bu_new     [1:NS];
  logic             bu_wr_q;
  logic [WIDW-1:0]  bu_wid_q;
  logic signed [RW-1:0] bu_rew_q;
  logic [NW-1:0]    bu_pn0_q;
  cnt_t             bank_rcnt  [1:NS];

  // ---------------- result out of the last stage ----------------
  always_comb begin
    res       = '0;
    res.wid   = s_tok[NS+1].wid;
    res.s     = node_index(F, s_tok[NS+1].depth, s_tok[NS+1].pos);
    res.sx    = node_index(F, s_tok[NS+1].depth + 1'b1,
                           s_tok[NS+1].pos * IXW'(F) + IXW'(s_tok[NS+1].xslot));
    res.xv    = s_tok[NS+1].xv;
    res.depth = s_tok[NS+1].depth;
    res_valid = s_valid[NS+1] && iq_ready;
    s_ready[NS+1] = res_ready && iq_ready;
    iq_req    = '{depth: s_tok[NS+1].depth, addr: s_tok[NS+1].addr, slot: s_tok[NS+1].xslot};
  end

  node_inserter #(.P(P), .F(F), .EXPAND_ALL(EXPAND_ALL)) u_ins (
    .clk, .rst,
    .req_valid(s_valid[NS+1] && s_ready[NS+1] && s_tok[NS+1].xv),
    .req_ready(iq_ready),
    .req      (iq_req),
    .go       (phase == PH_INS),
    .pending  (ins_pending),
    .wr_en    (ins_wr_en),
    .wr       (ins_wr),
    .cnt_in   (ins_cnt_in),
    .wr_edge  (ins_edge),
    .wr_cnt   (ins_cnt)
  );

  always_comb begin
    ins_cnt_in = '0;
    for (int k = 1; k <= NS; k++)
      if (ins_wr.depth == DW'(k)) ins_cnt_in = bank_rcnt[k];
  end

  // ---------------- BackUp registers ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      bu_wr_q  <= 1'b0;
      bu_wid_q <= '0;
      bu_rew_q <= '0;
      bu_pn0_q <= '0;
    end else begin
      bu_wr_q  <= bu_start && (phase == PH_BU);
      if (bu_start) begin
        bu_wid_q <= bu_wid;
        bu_rew_q <= bu_reward;
        bu_pn0_q <= bu_parent_n;
      end
    end
  end

  always_comb begin
    for (int k = 1; k <= NS; k++) begin
      if (k == 1) bu_pn[k] = bu_pn0_q;
      else        bu_pn[k] = (bu_old_q[k-1].n == '1) ? bu_old_q[k-1].n : bu_old_q[k-1].n + 1'b1;
    end
  end

  // ---------------- stages, banks, memos, updaters ----------------
  for (genvar k = 1; k <= NS; k++) begin : g_lvl
    localparam int unsigned ENT = RPP * int'(fpow(F, k - 1));
    localparam int unsigned AW  = (ENT > 1) ? $clog2(ENT) : 1;

    logic [AW-1:0] st_raddr, st_waddr, st_caddr, st_maddr;
    logic [SW-1:0] st_rslot, st_wslot, st_mslot;
    edge_t st_wedge;
    cnt_t  st_wcnt;
    logic  st_we_edge, st_we_cnt, st_mwe;
    logic [WIDW-1:0] st_mwid;

    logic [AW-1:0] b_raddr, b_waddr, b_caddr;
    logic [SW-1:0] b_rslot, b_wslot;
    edge_t b_redge, b_wedge;
    cnt_t  b_rcnt, b_wcnt;
    logic  b_we_edge, b_we_cnt;

    logic            m_valid;
    logic [AW-1:0]   m_addr;
    logic [SW-1:0]   m_slot;

    selection_stage #(.F(F), .AW(AW), .LAST(k == NS), .VL(VL), .EXPAND_ALL(EXPAND_ALL)) u_stage (
      .clk, .rst,
      .in_valid (s_valid[k]),   .in_ready (s_ready[k]),   .in_tok (s_tok[k]),
      .out_valid(s_valid[k+1]), .out_ready(s_ready[k+1]), .out_tok(s_tok[k+1]),
      .raddr(st_raddr), .rslot(st_rslot), .redge(b_redge), .rcnt(b_rcnt),
      .we_edge(st_we_edge), .waddr(st_waddr), .wslot(st_wslot), .wedge(st_wedge),
      .we_cnt(st_we_cnt), .caddr(st_caddr), .wcnt(st_wcnt),
      .memo_we(st_mwe), .memo_wid(st_mwid), .memo_addr(st_maddr), .memo_slot(st_mslot),
      .ev_leaf(ev_leaf[k-1]), .ev_bypass(ev_bypass[k-1]), .ev_stall(ev_stall[k-1])
    );

    memo_buffer #(.P(P), .AW(AW)) u_memo (
      .clk, .rst,
      .we(st_mwe), .wwid(st_mwid), .waddr(st_maddr), .wslot(st_mslot),
      .clr_en(bu_wr_q), .clr_wid(bu_wid_q),
      .rwid(bu_wid), .rvalid(m_valid), .raddr(m_addr), .rslot(m_slot)
    );

    backup_updater #(.BETA(BETA), .VL(VL)) u_bu (
      .old_edge(bu_old_q[k]), .reward(bu_rew_q), .parent_n(bu_pn[k]), .new_edge(bu_new[k])
    );

    always_ff @(posedge clk) begin
      if (bu_start) begin
        bu_old_q[k]  <= b_redge;
        bu_val_q[k]  <= m_valid;
        bu_addr_q[k] <= IXW'(m_addr);
        bu_slot_q[k] <= m_slot;
      end
    end

    assign ev_bu_write[k-1] = bu_wr_q && bu_val_q[k];
    assign bank_rcnt[k] = b_rcnt;

    // bank port multiplexing by phase
    always_comb begin
      b_raddr = st_raddr;   b_rslot = st_rslot;
      b_we_edge = 1'b0;     b_waddr = st_waddr;  b_wslot = st_wslot;  b_wedge = st_wedge;
      b_we_cnt  = 1'b0;     b_caddr = st_caddr;  b_wcnt  = st_wcnt;
      unique case (phase)
        PH_SEL: begin
          b_we_edge = st_we_edge;
          b_we_cnt  = st_we_cnt;
        end
        PH_BU: begin
          b_raddr   = m_addr;
          b_rslot   = m_slot;
          b_we_edge = bu_wr_q && bu_val_q[k];
          b_waddr   = AW'(bu_addr_q[k]);
          b_wslot   = bu_slot_q[k];
          b_wedge   = bu_new[k];
        end
        PH_INS: begin
          b_raddr   = AW'(ins_wr.addr);
          b_rslot   = ins_wr.slot;
          b_we_edge = ins_wr_en && (ins_wr.depth == DW'(k));
          b_waddr   = AW'(ins_wr.addr);
          b_wslot   = ins_wr.slot;
          b_wedge   = ins_edge;
          b_we_cnt  = ins_wr_en && (ins_wr.depth == DW'(k));
          b_caddr   = AW'(ins_wr.addr);
          b_wcnt    = ins_cnt;
        end
        PH_FLUSH: begin
          b_we_cnt  = clr_en && (clr_addr < IXW'(ENT));
          b_caddr   = AW'(clr_addr);
          b_wcnt    = '0;
        end
        default: ;
      endcase
    end

    subtree_bank #(.F(F), .ENTRIES(ENT)) u_bank (
      .clk,
      .raddr(b_raddr), .rslot(b_rslot), .redge(b_redge), .rcnt(b_rcnt),
      .we_edge(b_we_edge), .waddr(b_waddr), .wslot(b_wslot), .wedge(b_wedge),
      .we_cnt(b_we_cnt), .caddr(b_caddr), .wcnt(b_wcnt)
    );
  end

  initial assert (D >= 2 && D < 2**DW && F >= 2 && F < 2**SW && P <= 2**WIDW)
    else $error("subtree_pipeline: parameters out of range");

endmodule
