// tb_mcts_accel -- end-to-end test of the accelerator at a reduced size
// (F = 4, D = 4, P = 32, FIFO depth 2, so n = 4 pipelines of 3 stages): 24 iterations of
// BackUp, Selection, Insertion and output with a Tree Flush every 6, checked
// against the reference model in mcts_host_model.
module tb_mcts_accel;
  import mcts_pkg::*;
  localparam int F = 4, D = 4, P = 32;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, cmd_valid, cmd_ready, rew_valid, rew_ready, out_valid, out_ready, nrv;
  cmd_e cmd;
  logic signed [RW-1:0] rew_data;
  result_t out_res;
  logic [SW-1:0] nrs;
  phase_e phase;
  logic e1, e2, e3, e4, e5, e6, e7, e8;

  mcts_accel #(.F(F), .D(D), .P(P), .FIFO_D(2)) dut (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .rew_valid, .rew_ready, .rew_data,
    .out_valid, .out_ready, .out_res, .new_root_valid(nrv), .new_root_slot(nrs), .phase_o(phase),
    .ev_dist_stall(e1), .ev_root_leaf(e2), .ev_stage_leaf(e3), .ev_stage_bypass(e4),
    .ev_stage_stall(e5), .ev_bu_edge(e6), .ev_insert(e7), .ev_no_expand(e8));

  mcts_host_model #(.F(F), .D(D), .P(P), .ITERS(24), .FLUSH_EVERY(6), .WATCHDOG(200000)) host (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .rew_valid, .rew_ready, .rew_data,
    .out_valid, .out_ready, .out_res, .new_root_valid(nrv), .new_root_slot(nrs), .phase,
    .ev_dist_stall(e1), .ev_root_leaf(e2), .ev_stage_leaf(e3), .ev_stage_bypass(e4),
    .ev_stage_stall(e5), .ev_bu_edge(e6), .ev_insert(e7), .ev_no_expand(e8));
endmodule
