// tb_mcts_gomoku -- the accelerator in the 6x6 Gomoku configuration
// (F = 36 moves, height limit D = 5, P = 128 workers): 36 pipelines of 4
// stages and a two-level comparison look-up table (six tables of f = 6, then
// one of f = 6) at the root, so the distributor issues a worker every 3
// cycles. Expansion as in Gomoku: a worker at a leaf takes all F children
// at once (EXPAND_ALL), and each pipeline inserts them one per cycle.
// Checked by the host/reference model over six iterations and one Tree
// Flush.
module tb_mcts_gomoku;
  import mcts_pkg::*;
  localparam int F = 36, D = 5, P = 128;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, cmd_valid, cmd_ready, rew_valid, rew_ready, out_valid, out_ready, nrv;
  cmd_e cmd;
  logic signed [RW-1:0] rew_data;
  result_t out_res;
  logic [SW-1:0] nrs;
  phase_e phase;
  logic e1, e2, e3, e4, e5, e6, e7, e8;

  mcts_accel #(.F(F), .D(D), .P(P), .EXPAND_ALL(1'b1)) dut (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .rew_valid, .rew_ready, .rew_data,
    .out_valid, .out_ready, .out_res, .new_root_valid(nrv), .new_root_slot(nrs), .phase_o(phase),
    .ev_dist_stall(e1), .ev_root_leaf(e2), .ev_stage_leaf(e3), .ev_stage_bypass(e4),
    .ev_stage_stall(e5), .ev_bu_edge(e6), .ev_insert(e7), .ev_no_expand(e8));

  mcts_host_model #(.F(F), .D(D), .P(P), .EXPAND_ALL(1'b1), .ITERS(6), .FLUSH_EVERY(6), .WATCHDOG(1_000_000)) host (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .rew_valid, .rew_ready, .rew_data,
    .out_valid, .out_ready, .out_res, .new_root_valid(nrv), .new_root_slot(nrs), .phase,
    .ev_dist_stall(e1), .ev_root_leaf(e2), .ev_stage_leaf(e3), .ev_stage_bypass(e4),
    .ev_stage_stall(e5), .ev_bu_edge(e6), .ev_insert(e7), .ev_no_expand(e8));
  // backstop watchdog (the host model has its own, shorter one)
  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
