// root_level_bank -- the Root Level Memory Bank (Fig. 3 of the paper).
//
// Holds the single root node entry: its expansion counters, its visit count
// and its F adjacent edges. As in the paper the edge array is fully
// partitioned (registers), so the Worker Distributor sees all F weights in
// the same cycle. The bank applies the updates of the units around it; they
// act in different phases, and when several strobes are high in one cycle the
// order below is the priority:
//   flush_en  : Tree Flush -- counters cleared, root visit count loaded with
//               that of the new root (flush_n); the tree regrows below it.
//   ins_en    : Node Insertion -- every claimed, not yet inserted child edge
//               is written with a fresh edge (weight UCT_MAX, all counts 0),
//               all in one cycle, and ins catches up with clm.
//   bu_en     : BackUp -- the root visit count grows by one and, when
//               bu_edge_en, edge bu_slot takes the Root BackUp Updater's result.
//   vl_en     : Selection -- virtual loss VL subtracted from edge vl_slot
//               (saturating) and its outstanding count raised.
//   claim_en  : Selection at a root that is still a leaf -- clm += 1 (with
//               EXPAND_ALL: clm = F, all children claimed by one worker).
// vl_en and claim_en may come together with nothing else; the bank does not
// check that. All updates take effect at the next clock edge. Synchronous,
// active-high reset to an empty tree.
module root_level_bank
  import mcts_pkg::*;
#(
  parameter int unsigned F = F_DEF,
  parameter logic [UW-1:0] VL = VL_DEF,
  parameter bit EXPAND_ALL = 1'b0    // a claim takes all F children
) (
  input  logic          clk,
  input  logic          rst,
  // Tree Flush
  input  logic          flush_en,
  input  logic [NW-1:0] flush_n,
  // Node Insertion
  input  logic          ins_en,
  // BackUp
  input  logic          bu_en,
  input  logic          bu_edge_en,
  input  logic [SW-1:0] bu_slot,
  input  edge_t         bu_edge,
  // Selection
  input  logic          vl_en,
  input  logic [SW-1:0] vl_slot,
  input  logic          claim_en,
  // contents
  output edge_t         edges [F],
  output cnt_t          cnt,
  output logic [NW-1:0] nroot
);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt   <= '0;
      nroot <= '0;
      for (int i = 0; i < F; i++) edges[i] <= '0;
    end else if (flush_en) begin
      cnt   <= '0;
      nroot <= flush_n;
    end else if (ins_en) begin
      for (int i = 0; i < F; i++)
        if (SW'(i) >= cnt.ins && SW'(i) < cnt.clm)
          edges[i] <= '{uct: UCT_MAX, w: '0, n: '0, o: '0};
      cnt.ins <= cnt.clm;
    end else if (bu_en) begin
      nroot <= (nroot == '1) ? nroot : nroot + 1'b1;
      if (bu_edge_en) edges[bu_slot] <= bu_edge;
    end else begin
      if (vl_en) begin
        edges[vl_slot].uct <= ($signed({edges[vl_slot].uct[UW-1], edges[vl_slot].uct})
                               - $signed({1'b0, VL}) < $signed({UCT_MIN[UW-1], UCT_MIN}))
                              ? UCT_MIN : edges[vl_slot].uct - $signed(VL);
        edges[vl_slot].o   <= edges[vl_slot].o + 1'b1;
      end
      if (claim_en && EXPAND_ALL && cnt.clm == '0) cnt.clm <= SW'(F);
      else if (claim_en && !EXPAND_ALL && cnt.clm < SW'(F)) cnt.clm <= cnt.clm + 1'b1;
    end
  end

  initial assert (F >= 1 && F < 2**SW) else $error("root_level_bank: F out of range");

endmodule
