// subtree_bank -- one level of one Sub-Tree Memory Bank Group (Fig. 3).
//
// Stores the node entries of one tree depth inside one sub-tree, in the
// adjacency-list layout of Sec. IV-B: entry a holds the node's expansion
// counters and its F adjacent edges, edge e of entry a at word a*F+e. As the
// paper prescribes, the bank is sized at compile time for the full F-ary tree,
// so a node's address follows from its position and no allocation is needed.
// One read port (entry address + edge slot, result in the same cycle: the
// single-cycle access T_mem = 1 of the paper) and one edge write port plus one
// counter write port, written at the clock edge. A write and a read of the same
// word in one cycle return the old value.
// Memory contents are not reset; the Tree-Flush module clears the counters,
// and an edge is only read after Node Insertion has written it.
module subtree_bank
  import mcts_pkg::*;
#(
  parameter int unsigned F       = F_DEF,
  parameter int unsigned ENTRIES = 1,
  localparam int unsigned AW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned EAW = $clog2(ENTRIES * F)
) (
  input  logic          clk,
  // read port
  input  logic [AW-1:0] raddr,
  input  logic [SW-1:0] rslot,
  output edge_t         redge,
  output cnt_t          rcnt,
  // edge write port
  input  logic          we_edge,
  input  logic [AW-1:0] waddr,
  input  logic [SW-1:0] wslot,
  input  edge_t         wedge,
  // counter write port
  input  logic          we_cnt,
  input  logic [AW-1:0] caddr,
  input  cnt_t          wcnt
);

  edge_t edges [ENTRIES * F];
  cnt_t  cnts  [ENTRIES];

  function automatic logic [EAW-1:0] eaddr(input logic [AW-1:0] a, input logic [SW-1:0] s);
    return EAW'(a) * EAW'(F) + EAW'(s);
  endfunction

  assign redge = edges[eaddr(raddr, rslot)];
  assign rcnt  = cnts[raddr];

  always_ff @(posedge clk) begin
    if (we_edge) edges[eaddr(waddr, wslot)] <= wedge;
    if (we_cnt)  cnts[caddr] <= wcnt;
  end

endmodule
