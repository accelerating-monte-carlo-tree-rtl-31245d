// tb_node_inserter -- insertion requests are held while go = 0 and written
// one per cycle in arrival order once go = 1: new edge (UCT_MAX, zero counts)
// and the inserted-children counter read through cnt_in raised by one.
module tb_node_inserter;
  import mcts_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, go = 0, pending, wr_en;
  ins_req_t req = '0, wr;
  cnt_t cnt_in, wr_cnt;
  edge_t wr_edge;
  ins_req_t sent [$];

  node_inserter #(.P(8)) dut (.*);

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    cnt_in = '{ins: SW'(2), clm: SW'(5)};
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 5; i++) begin
      req_valid = 1;
      req = '{depth: DW'(1 + $urandom % 8), addr: IXW'($urandom % 1000), slot: SW'($urandom % 6)};
      sent.push_back(req);
      #1 chk(req_ready && !wr_en, "queued, not written while go = 0");
      @(negedge clk);
    end
    req_valid = 0;
    repeat (3) begin #1 chk(pending && !wr_en, "held"); @(negedge clk); end
    go = 1;
    for (int i = 0; i < 5; i++) begin
      #1;
      chk(wr_en && wr == sent[i], "order");
      chk(wr_edge == '{uct: UCT_MAX, w: '0, n: '0, o: '0}, "new edge");
      chk(wr_cnt.ins == 3 && wr_cnt.clm == 5, "counter raised");
      @(negedge clk);
    end
    #1 chk(!pending && !wr_en, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
