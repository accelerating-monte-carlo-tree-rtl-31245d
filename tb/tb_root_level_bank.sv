// tb_root_level_bank -- drives each update of the root bank and compares with
// hand-computed results: claim, insertion of claimed children, virtual loss
// (with saturation), BackUp write and visit count, flush.
module tb_root_level_bank;
  import mcts_pkg::*;
  localparam int F = 6;

  logic clk = 0, rst = 1;
  logic flush_en = 0, ins_en = 0, bu_en = 0, bu_edge_en = 0, vl_en = 0, claim_en = 0;
  logic [NW-1:0] flush_n = 0;
  logic [SW-1:0] bu_slot = 0, vl_slot = 0;
  edge_t bu_edge = '0;
  edge_t edges [F];
  cnt_t cnt;
  logic [NW-1:0] nroot;
  int checks = 0, failures = 0;

  root_level_bank #(.F(F)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step;
    @(posedge clk); #1;
    flush_en = 0; ins_en = 0; bu_en = 0; bu_edge_en = 0; vl_en = 0; claim_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    chk(cnt.ins == 0 && cnt.clm == 0 && nroot == 0, "reset");
    // three claims
    repeat (3) begin claim_en = 1; step(); end
    chk(cnt.clm == 3 && cnt.ins == 0, "claims");
    ins_en = 1; step();
    chk(cnt.ins == 3, "ins count");
    for (int i = 0; i < 3; i++) chk(edges[i].uct == UCT_MAX && edges[i].n == 0 && edges[i].o == 0, "new edge");
    // claim all the rest, claims stop at F
    repeat (5) begin claim_en = 1; step(); end
    chk(cnt.clm == F, "claim saturates at F");
    ins_en = 1; step();
    chk(cnt.ins == F, "all inserted");
    // virtual loss
    vl_en = 1; vl_slot = 2; step();
    chk(edges[2].uct == UCT_MAX - $signed(VL_DEF) && edges[2].o == 1, "vl");
    // BackUp write
    bu_en = 1; bu_edge_en = 1; bu_slot = 2;
    bu_edge = '{uct: 32'sd65536, w: 48'sd65536, n: 16'd1, o: 8'd0}; step();
    chk(edges[2] == '{uct: 32'sd65536, w: 48'sd65536, n: 16'd1, o: 8'd0} && nroot == 1, "backup");
    bu_en = 1; step();
    chk(nroot == 2 && edges[2].n == 1, "backup without edge");
    // VL saturates at the bottom
    bu_en = 1; bu_edge_en = 1; bu_slot = 4;
    bu_edge = '{uct: UCT_MIN + 10, w: 0, n: 16'd1, o: 8'd0}; step();
    vl_en = 1; vl_slot = 4; step();
    chk(edges[4].uct == UCT_MIN && edges[4].o == 1, "vl saturates");
    // flush
    flush_en = 1; flush_n = 16'd77; step();
    chk(cnt.ins == 0 && cnt.clm == 0 && nroot == 77, "flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
