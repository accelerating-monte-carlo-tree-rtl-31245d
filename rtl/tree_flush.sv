// tree_flush -- the Tree-Flush Module (Fig. 3, Sec. IV-E).
//
// At the end of an MCTS step the agent acts with the best root child, which
// becomes the new root, and the rest of the tree is dropped (Fig. 1). Instead
// of erasing node data, the paper clears the counters that track expanded
// children in all node entries and updates the Root Level Memory Bank. Here:
//   cycle 0     the best root child (from the Worker Distributor's CLUTs) is
//               latched and reported on new_root_slot; the root bank clears its
//               counters and takes over that child's visit count (root_flush_en).
//   cycles 1..  a sweep address runs over 0..MAX_ENT-1; every sub-tree bank
//               clears the counters of that entry if it has one, all banks in
//               parallel, one entry per cycle.
// The host re-keys its state table so that the new root (old node index
// 1 + new_root_slot) becomes index 0. With init = 1 (after reset) only the
// sweep runs and no new root is reported.
// Keeping only the new root's visit count, not its child edges, is this
// design's reading of the paper (its children are re-expanded from the new
// root's state).
module tree_flush
  import mcts_pkg::*;
#(
  parameter int unsigned F     = F_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned NPIPE = F_DEF,
  localparam int unsigned MAX_ENT = ((F + NPIPE - 1) / NPIPE) * int'(fpow(F, D - 2))
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  input  logic           init,
  input  logic [SW-1:0]  best_slot,
  input  edge_t          root_edges [F],
  output logic           busy,
  output logic           done,
  output logic           root_flush_en,
  output logic [NW-1:0]  root_flush_n,
  output logic           clr_en,
  output logic [IXW-1:0] clr_addr,
  output logic           new_root_valid,
  output logic [SW-1:0]  new_root_slot
);

  logic sweeping;

  assign busy          = sweeping;
  assign clr_en        = sweeping;
  assign root_flush_en = start && !sweeping;
  assign root_flush_n  = init ? '0 : root_edges[best_slot].n;

  always_ff @(posedge clk) begin
    if (rst) begin
      sweeping       <= 1'b0;
      clr_addr       <= '0;
      done           <= 1'b0;
      new_root_valid <= 1'b0;
      new_root_slot  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !sweeping) begin
        sweeping <= 1'b1;
        clr_addr <= '0;
        if (!init) begin
          new_root_valid <= 1'b1;
          new_root_slot  <= best_slot;
        end
      end else if (sweeping) begin
        if (clr_addr == IXW'(MAX_ENT - 1)) begin
          sweeping <= 1'b0;
          done     <= 1'b1;
        end else begin
          clr_addr <= clr_addr + 1'b1;
        end
      end
    end
  end

endmodule
