// tb_sync_fifo -- random pushes and pops against a queue model: order, full
// and empty flags, count, and no loss or duplication.
module tb_sync_fifo;
  logic clk = 0, rst = 1;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data, out_data;
  logic [2:0] count;
  logic [7:0] model [$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(8), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = 8'($urandom);
      #1;
      checks += 3;
      if (in_ready !== (model.size() < 4)) begin failures++; $display("FAIL in_ready"); end
      if (out_valid !== (model.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (int'(count) != model.size()) begin failures++; $display("FAIL count"); end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== model[0]) begin failures++; $display("FAIL data %h exp %h", out_data, model[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
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
