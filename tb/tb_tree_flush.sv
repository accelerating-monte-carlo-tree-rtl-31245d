// tb_tree_flush -- F = 6, D = 4, n = 6: a flush latches the best slot, loads
// the root with that child's visit count in its first cycle, then sweeps
// entries 0..F**(D-2)-1 one per cycle and signals done; the init variant
// reports no new root.
module tb_tree_flush;
  import mcts_pkg::*;
  localparam int F = 6, D = 4, MAXE = 36;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, init = 0, busy, done, rfe, clr_en, nrv;
  logic [SW-1:0] best = 0, nrs;
  logic [NW-1:0] rfn;
  logic [IXW-1:0] clr_addr;
  edge_t re [F];

  tree_flush #(.F(F), .D(D), .NPIPE(F)) dut (
    .clk, .rst, .start, .init, .best_slot(best), .root_edges(re), .busy, .done,
    .root_flush_en(rfe), .root_flush_n(rfn), .clr_en, .clr_addr,
    .new_root_valid(nrv), .new_root_slot(nrs));

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  int seen, cyc;

  initial begin
    for (int i = 0; i < F; i++) re[i] = '{uct: 0, w: 0, n: NW'(10 + i), o: 0};
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    // init flush
    init = 1; start = 1;
    #1 chk(rfe && rfn == 0, "init root load");
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done && cyc < 200) begin @(negedge clk); cyc++; end
    chk(cyc == MAXE, "sweep length");
    chk(!nrv, "no new root after init");
    // real flush
    @(negedge clk);
    init = 0; best = 4; start = 1;
    #1 chk(rfe && rfn == 14, "root takes best child's count");
    @(negedge clk) start = 0; best = 1;
    seen = 0;
    for (cyc = 0; cyc < 200 && !done; cyc++) begin
      #1;
      if (clr_en) begin
        chk(int'(clr_addr) == seen, "sweep address");
        seen++;
      end
      @(negedge clk);
    end
    chk(seen == MAXE && !busy, "all entries cleared");
    chk(nrv && nrs == 4, "new root slot");
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
