// tb_memo_buffer -- per-worker memo words: write, read back by worker number,
// valid bit set by a write and cleared by clr_en, reset clears all valids.
module tb_memo_buffer;
  import mcts_pkg::*;
  localparam int P = 16;

  logic clk = 0, rst = 1;
  logic we, clr_en, rvalid;
  logic [WIDW-1:0] wwid, clr_wid, rwid;
  logic [9:0] waddr, raddr;
  logic [SW-1:0] wslot, rslot;
  logic [9:0] m_a [P];
  logic [SW-1:0] m_s [P];
  logic m_v [P];
  int checks = 0, failures = 0;

  memo_buffer #(.P(P), .AW(10)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; clr_en = 0; wwid = 0; clr_wid = 0; rwid = 0; waddr = 0; wslot = 0;
    for (int i = 0; i < P; i++) m_v[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = ($urandom % 2) != 0; wwid = WIDW'($urandom % P);
      waddr = 10'($urandom); wslot = SW'($urandom % 6);
      clr_en = ($urandom % 3) == 0; clr_wid = WIDW'($urandom % P);
      rwid = WIDW'($urandom % P);
      #1;
      checks++;
      if (rvalid !== m_v[rwid]) begin failures++; $display("FAIL valid %0d", rwid); end
      if (m_v[rwid]) begin
        checks++;
        if (raddr !== m_a[rwid] || rslot !== m_s[rwid]) begin failures++; $display("FAIL data"); end
      end
      @(posedge clk);
      if (clr_en) m_v[clr_wid] = 0;
      if (we) begin m_v[wwid] = 1; m_a[wwid] = waddr; m_s[wwid] = wslot; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
