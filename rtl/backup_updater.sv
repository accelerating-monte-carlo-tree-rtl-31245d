// backup_updater -- BackUp update of one traversed edge (Alg. 1, UpdateEdge).
//
// Given the edge as read from its memory bank, the worker's reward V and the
// parent's visit count after this BackUp, it returns the new edge:
//   W += V, N += 1, one virtual loss recovered (O -= 1), uct recomputed by
//   uct_calc from the new W, N, parent N and remaining O.
// The paper places n x (D-1) such updaters beside the sub-tree banks and one
// beside the root bank; it names their function but not their insides. The
// recomputation of the weight from running statistics is this design's choice.
// Only the traversed edge is refreshed; its siblings keep the weight computed
// at their own last BackUp, as in Alg. 1, which updates only E_t.
//
// Combinational; the caller reads the bank in one cycle and writes the result
// in the next, so one worker's BackUp takes 2 cycles (Sec. IV-E).
module backup_updater
  import mcts_pkg::*;
#(
  parameter logic [UW-1:0] BETA = BETA_DEF,
  parameter logic [UW-1:0] VL   = VL_DEF
) (
  input  edge_t                old_edge,
  input  logic signed [RW-1:0] reward,
  input  logic [NW-1:0]        parent_n,   // parent visit count after this BackUp
  output edge_t                new_edge
);

  logic [NW-1:0] n_new;
  logic [OW-1:0] o_new;
  logic signed [WW-1:0] w_new;
  logic signed [UW-1:0] uct_new;

  always_comb begin
    n_new = (old_edge.n == '1) ? old_edge.n : old_edge.n + 1'b1;  // saturate
    o_new = (old_edge.o == '0) ? '0 : old_edge.o - 1'b1;
    w_new = old_edge.w + WW'(reward);
  end

  uct_calc #(.BETA(BETA), .VL(VL)) u_calc (
    .w  (w_new),
    .n  (n_new),
    .np (parent_n),
    .o  (o_new),
    .uct(uct_new)
  );

  always_comb begin
    new_edge     = old_edge;
    new_edge.w   = w_new;
    new_edge.n   = n_new;
    new_edge.o   = o_new;
    new_edge.uct = uct_new;
  end

endmodule
