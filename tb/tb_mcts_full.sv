// tb_mcts_full -- the accelerator at its default size (F = 6, D = 9,
// P = 128 workers, 6 pipelines of 8 stages, the Pong configuration), checked
// by the same host/reference model as the reduced test: the counter sweep
// after reset, four iterations and one Tree Flush (which sweeps again).
module tb_mcts_full;
  import mcts_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, cmd_valid, cmd_ready, rew_valid, rew_ready, out_valid, out_ready, nrv;
  cmd_e cmd;
  logic signed [RW-1:0] rew_data;
  result_t out_res;
  logic [SW-1:0] nrs;
  phase_e phase;
  logic e1, e2, e3, e4, e5, e6, e7, e8;

  mcts_accel dut (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .rew_valid, .rew_ready, .rew_data,
    .out_valid, .out_ready, .out_res, .new_root_valid(nrv), .new_root_slot(nrs), .phase_o(phase),
    .ev_dist_stall(e1), .ev_root_leaf(e2), .ev_stage_leaf(e3), .ev_stage_bypass(e4),
    .ev_stage_stall(e5), .ev_bu_edge(e6), .ev_insert(e7), .ev_no_expand(e8));

  mcts_host_model #(.ITERS(4), .FLUSH_EVERY(4), .WATCHDOG(2_000_000)) host (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .rew_valid, .rew_ready, .rew_data,
    .out_valid, .out_ready, .out_res, .new_root_valid(nrv), .new_root_slot(nrs), .phase,
    .ev_dist_stall(e1), .ev_root_leaf(e2), .ev_stage_leaf(e3), .ev_stage_bypass(e4),
    .ev_stage_stall(e5), .ev_bu_edge(e6), .ev_insert(e7), .ev_no_expand(e8));
endmodule
