// node_inserter -- Node Insertion for one sub-tree pipeline (Sec. IV-E).
//
// Workers that end Selection at a leaf of this sub-tree and claimed a child
// leave an insertion request (depth, entry address, child slot) here. As in
// the paper, insertions happen only after the Selection phase of all workers
// has finished (go = 1), by writing straight into the SRAM location of the
// expanded leaf: one request per cycle, the new edge written with weight
// UCT_MAX and zero counts, and the node's inserted-children counter raised
// (read from the bank in the same cycle through cnt_in). The pipelines insert
// concurrently, each into its own banks.
// With EXPAND_ALL = 1 (the Gomoku variant, where a worker expands all F
// children of its leaf) a request stands for children 0..F-1 and is written
// over F cycles, one child per cycle.
// The initial edge (wr_edge) is a constant.
// The queue (a sync_fifo of P entries) and the one-per-cycle rate are this
// design's choices.
module node_inserter
  import mcts_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  parameter int unsigned F = F_DEF,
  parameter bit EXPAND_ALL = 1'b0    // a request inserts children 0..F-1, one per cycle
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     req_valid,
  output logic     req_ready,
  input  ins_req_t req,
  input  logic     go,
  output logic     pending,
  // write command towards the bank of depth wr.depth
  output logic     wr_en,
  output ins_req_t wr,
  input  cnt_t     cnt_in,
  output edge_t    wr_edge,
  output cnt_t     wr_cnt
);

  localparam int unsigned QD = 1 << $clog2(P);
  logic q_valid;
  ins_req_t q_data;
  logic [$clog2(QD):0] q_count;
  logic q_pop;
  logic [SW-1:0] sub;     // child slot being written when EXPAND_ALL

  assign q_pop = go && (!EXPAND_ALL || sub == SW'(F - 1));

  always_ff @(posedge clk) begin
    if (rst) sub <= '0;
    else if (EXPAND_ALL && go && q_valid) sub <= (sub == SW'(F - 1)) ? '0 : sub + 1'b1;
  end

  sync_fifo #(.WIDTH($bits(ins_req_t)), .DEPTH(QD)) u_q (
    .clk, .rst,
    .in_valid (req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(q_valid),   .out_ready(q_pop),    .out_data(q_data),
    .count    (q_count)
  );

  always_comb begin
    pending = q_valid;
    wr_en   = go && q_valid;
    wr      = q_data;
    if (EXPAND_ALL) wr.slot = sub;
    wr_edge = '{uct: UCT_MAX, w: '0, n: '0, o: '0};
    wr_cnt  = '{ins: cnt_in.ins + 1'b1, clm: cnt_in.clm};
  end

endmodule
