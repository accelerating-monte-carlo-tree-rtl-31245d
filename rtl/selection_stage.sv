// selection_stage -- one stage of a Sub-Tree Selection Pipeline (Sec. IV-C).
//
// A stage owns the bank of one tree depth K of its sub-tree and serves one
// worker at a time (Alg. 1, lines 3-6, for one level):
//   cycle 0      the worker is accepted; its node's counters and edge 0 are
//                read. A node with fewer than F inserted children is a leaf:
//                the worker claims the next unclaimed child, if one is left,
//                raising the claim counter in the same cycle, and Selection
//                ends here.
//   cycles 1..F-1  edges 1..F-1 are read one per cycle and compared with the
//                best so far by a single 2-input comparator (ties keep the
//                lower slot). Fixed-point weights make each compare one cycle.
//   cycle F      virtual loss VL is subtracted from the winning edge and its
//                outstanding count raised; the choice goes to the memoization
//                buffer; the worker moves to the child.
// So a stage takes F+1 cycles per worker, the paper's intra-pipeline T_sync,
// and hands the worker on in the cycle after (overlapped with accepting the
// next worker). A worker whose Selection already ended passes through in one
// cycle (bypass). The last stage (K = D-1) ends Selection at the chosen child,
// which lies at the height limit D and is never expanded.
// With EXPAND_ALL = 1 (Gomoku: "expands all F child nodes of each selected
// node") the first worker at a leaf claims all F children (claim counter set
// to F, s' = child 0) and later workers there expand nothing.
// The leaf rule, the claim counter and the bypass are this design's choices;
// the paper leaves them open.
// Handshake: valid/ready on both sides; in_ready depends combinationally on
// out_ready.
module selection_stage
  import mcts_pkg::*;
#(
  parameter int unsigned F    = F_DEF,
  parameter int unsigned AW   = 1,        // bank entry address width
  parameter bit          LAST = 1'b0,     // stage of depth D-1
  parameter logic [UW-1:0] VL = VL_DEF,
  parameter bit          EXPAND_ALL = 1'b0  // claim all F children at once
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  output logic            in_ready,
  input  token_t          in_tok,
  output logic            out_valid,
  input  logic            out_ready,
  output token_t          out_tok,
  // bank ports
  output logic [AW-1:0]   raddr,
  output logic [SW-1:0]   rslot,
  input  edge_t           redge,
  input  cnt_t            rcnt,
  output logic            we_edge,
  output logic [AW-1:0]   waddr,
  output logic [SW-1:0]   wslot,
  output edge_t           wedge,
  output logic            we_cnt,
  output logic [AW-1:0]   caddr,
  output cnt_t            wcnt,
  // memoization buffer write
  output logic            memo_we,
  output logic [WIDW-1:0] memo_wid,
  output logic [AW-1:0]   memo_addr,
  output logic [SW-1:0]   memo_slot,
  // events
  output logic            ev_leaf,
  output logic            ev_bypass,
  output logic            ev_stall
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_WR, S_OUT} state_e;
  state_e state;
  token_t tok_q;
  logic [SW-1:0] e_q;
  logic [SW-1:0] bidx_q;
  edge_t         bedge_q;
  logic accept;
  logic leaf, can_claim;

  assign in_ready  = (state == S_IDLE) || (state == S_OUT && out_ready);
  assign accept    = in_valid && in_ready;
  assign out_valid = (state == S_OUT);
  assign out_tok   = tok_q;

  always_comb begin
    raddr = accept ? AW'(in_tok.addr) : AW'(tok_q.addr);
    rslot = accept ? '0 : e_q;
    leaf  = (rcnt.ins < SW'(F));
    can_claim = EXPAND_ALL ? (rcnt.clm == '0) : (rcnt.clm < SW'(F));

    we_cnt = accept && !in_tok.done && leaf && can_claim;
    caddr  = AW'(in_tok.addr);
    wcnt   = '{ins: rcnt.ins, clm: EXPAND_ALL ? SW'(F) : rcnt.clm + 1'b1};

    we_edge = (state == S_WR);
    waddr   = AW'(tok_q.addr);
    wslot   = bidx_q;
    wedge   = bedge_q;
    wedge.o = bedge_q.o + 1'b1;
    wedge.uct = ($signed({bedge_q.uct[UW-1], bedge_q.uct}) - $signed({1'b0, VL})
                 < $signed({UCT_MIN[UW-1], UCT_MIN})) ? UCT_MIN : bedge_q.uct - $signed(VL);

    memo_we   = (state == S_WR);
    memo_wid  = tok_q.wid;
    memo_addr = AW'(tok_q.addr);
    memo_slot = bidx_q;

    ev_leaf   = accept && !in_tok.done && leaf;
    ev_bypass = accept && in_tok.done;
    ev_stall  = (state == S_OUT) && !out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      tok_q   <= '0;
      e_q     <= '0;
      bidx_q  <= '0;
      bedge_q <= '0;
    end else begin
      if (accept) begin
        tok_q <= in_tok;
        if (in_tok.done) begin
          state <= S_OUT;
        end else if (leaf) begin
          tok_q.done  <= 1'b1;
          tok_q.xv    <= can_claim;
          tok_q.xslot <= EXPAND_ALL ? '0 : rcnt.clm;
          state       <= S_OUT;
        end else begin
          bedge_q <= redge;
          bidx_q  <= '0;
          e_q     <= SW'(1);
          state   <= (F == 1) ? S_WR : S_SCAN;
        end
      end else begin
        unique case (state)
          S_IDLE: ;
          S_SCAN: begin
            if (redge.uct > bedge_q.uct) begin   // the 2-input comparator
              bedge_q <= redge;
              bidx_q  <= e_q;
            end
            if (e_q == SW'(F - 1)) state <= S_WR;
            else e_q <= e_q + 1'b1;
          end
          S_WR: begin
            tok_q.depth <= tok_q.depth + 1'b1;
            tok_q.pos   <= tok_q.pos * IXW'(F) + IXW'(bidx_q);
            tok_q.addr  <= tok_q.addr * IXW'(F) + IXW'(bidx_q);
            if (LAST) begin
              tok_q.done <= 1'b1;
              tok_q.xv   <= 1'b0;
            end
            state <= S_OUT;
          end
          S_OUT: if (out_ready) state <= S_IDLE;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
