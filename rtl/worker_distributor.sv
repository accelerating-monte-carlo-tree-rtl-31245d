// worker_distributor -- root-level Worker Distributor (Fig. 3, Sec. IV-D).
//
// On start it issues the P workers of one iteration, numbered 0..P-1. For each
// worker it picks the root child with the largest edge weight (Eq. 1) using
// comparison look-up tables, then subtracts the virtual loss from that root
// edge and sends the worker, as a token, towards the sub-tree pipeline that
// owns the child (through the FIFO and crossbar that follow it).
//   * F <= CLUT_F: one CLUT over the F weights; one cycle to compare and one
//     to apply the virtual loss, so a worker leaves every 2 cycles -- the
//     paper's inter-pipeline T_sync of 2 cycles.
//   * CLUT_F < F <= CLUT_F**2: a two-level hierarchy, ceil(F/CLUT_F) CLUTs
//     of CLUT_F inputs feed one second-level CLUT (the paper's Gomoku setting,
//     F = 36 with f = 6 at both levels). A register between the levels makes
//     it 3 cycles per worker, the figure the paper reports for F = 36.
// While the root is still a leaf (fewer than F children inserted), a worker
// stops at the root: it claims the next unexpanded child, if any is left, and
// its result goes straight to the result collector (with EXPAND_ALL the first
// such worker claims all F root children).
// The root edge each worker took is reported on memo_* for its BackUp
// (the root level of the BackUp memoization buffer).
// Handshakes are valid/ready; the unit waits while a downstream is not ready.
// Several token and result fields are constant by construction (a token
// always starts at depth 1 and not done; a root result has depth 0).
module worker_distributor
  import mcts_pkg::*;
#(
  parameter int unsigned F      = F_DEF,
  parameter int unsigned P      = P_DEF,
  parameter int unsigned NPIPE  = (P < F) ? P : F,   // n = min(p, F)
  parameter int unsigned CLUT_F = CLUT_F_DEF,
  parameter bit          EXPAND_ALL = 1'b0   // a leaf root hands out all F children at once
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  output logic           busy,
  // root level memory bank
  input  edge_t          root_edges [F],
  input  cnt_t           root_cnt,
  output logic           vl_en,
  output logic [SW-1:0]  vl_slot,
  output logic           claim_en,
  // worker tokens towards the pipelines
  output logic           tok_valid,
  input  logic           tok_ready,
  output token_t         tok,
  // workers that stop at the root
  output logic           res_valid,
  input  logic           res_ready,
  output result_t        res,
  // root level of the BackUp memoization buffer
  output logic           memo_we,
  output logic [WIDW-1:0] memo_wid,
  output logic [SW-1:0]  memo_slot,
  // best root child at this moment (used by Tree Flush)
  output logic [SW-1:0]  best_slot,
  output logic           stall
);

  localparam bit TWO_LEVEL = (F > CLUT_F);
  localparam int unsigned G = (F + CLUT_F - 1) / CLUT_F;   // first-level CLUTs
  localparam int unsigned GI = TWO_LEVEL ? G : 2;
  localparam int unsigned LW = $clog2(CLUT_F);
  localparam int unsigned GW = (GI > 1) ? $clog2(GI) : 1;

  // ---------------- comparison network ----------------
  logic signed [UW-1:0] wts [F];
  logic [SW-1:0] best_comb;
  logic signed [UW-1:0] grp_max_q [GI];
  logic [SW-1:0]        grp_idx_q [GI];

  always_comb for (int i = 0; i < F; i++) wts[i] = root_edges[i].uct;

  generate
    if (!TWO_LEVEL) begin : g_one
      logic [$clog2(F > 1 ? F : 2)-1:0] idx1;
      logic signed [UW-1:0] m1;
      clut #(.FI(F)) u_clut (.w(wts), .idx(idx1), .wmax(m1));
      assign best_comb = SW'(idx1);
      always_comb for (int g = 0; g < GI; g++) begin
        grp_max_q[g] = '0;
        grp_idx_q[g] = '0;
      end
    end else begin : g_two
      for (genvar g = 0; g < G; g++) begin : g_l1
        logic signed [UW-1:0] gw [CLUT_F];
        logic [LW-1:0] gi;
        logic signed [UW-1:0] gm;
        always_comb for (int k = 0; k < CLUT_F; k++)
          gw[k] = (g * CLUT_F + k < F) ? wts[(g * CLUT_F + k < F) ? g * CLUT_F + k : 0] : UCT_MIN;
        clut #(.FI(CLUT_F)) u_clut (.w(gw), .idx(gi), .wmax(gm));
        // register between the two CLUT levels
        always_ff @(posedge clk) begin
          grp_max_q[g] <= gm;
          grp_idx_q[g] <= SW'(g * CLUT_F) + SW'(gi);
        end
      end
      logic [GW-1:0] idx2;
      logic signed [UW-1:0] m2;
      clut #(.FI(GI)) u_clut2 (.w(grp_max_q), .idx(idx2), .wmax(m2));
      assign best_comb = grp_idx_q[idx2];
    end
  endgenerate

  assign best_slot = best_comb;

  // ---------------- issue control ----------------
  typedef enum logic [1:0] {S_IDLE, S_CMP, S_CMP2, S_ISSUE} state_e;
  state_e state;
  logic [WIDW-1:0] j;
  logic [SW-1:0]   best_q;
  logic            root_leaf;
  logic            fire;

  assign root_leaf = (root_cnt.ins < SW'(F));
  assign busy      = (state != S_IDLE);

  always_comb begin
    tok_valid = (state == S_ISSUE) && !root_leaf;
    res_valid = (state == S_ISSUE) &&  root_leaf;
    fire      = (tok_valid && tok_ready) || (res_valid && res_ready);
    stall     = (tok_valid && !tok_ready) || (res_valid && !res_ready);

    tok        = '0;
    tok.wid    = j;
    tok.depth  = DW'(1);
    tok.pos    = IXW'(best_q);
    tok.addr   = IXW'(best_q) / IXW'(NPIPE);

    res        = '0;
    res.wid    = j;
    res.s      = '0;
    res.xv     = EXPAND_ALL ? (root_cnt.clm == '0) : (root_cnt.clm < SW'(F));
    res.sx     = node_index(F, DW'(1), EXPAND_ALL ? '0 : IXW'(root_cnt.clm));
    res.depth  = '0;

    vl_en     = tok_valid && tok_ready;
    vl_slot   = best_q;
    claim_en  = res_valid && res_ready && res.xv;
    memo_we   = fire;
    memo_wid  = j;
    memo_slot = root_leaf ? SW'(F) : best_q;   // F marks "stopped at the root"
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      j      <= '0;
      best_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          j     <= '0;
          state <= S_CMP;
        end
        S_CMP: begin
          if (TWO_LEVEL) state <= S_CMP2;
          else begin
            best_q <= best_comb;
            state  <= S_ISSUE;
          end
        end
        S_CMP2: begin
          best_q <= best_comb;
          state  <= S_ISSUE;
        end
        S_ISSUE: if (fire) begin
          if (j == WIDW'(P - 1)) state <= S_IDLE;
          else begin
            j     <= j + 1'b1;
            state <= S_CMP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (F >= 2 && F <= CLUT_F * CLUT_F && F < 2**SW && P <= 2**WIDW)
    else $error("worker_distributor: parameters out of range");

endmodule
