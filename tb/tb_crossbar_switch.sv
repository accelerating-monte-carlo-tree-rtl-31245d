// tb_crossbar_switch -- a token must appear only at output (pos mod n), with
// the input ready equal to that output's ready. n = 6 (the paper's Pong) and
// n = 4 (fewer pipelines than root children).
module tb_crossbar_switch;
  import mcts_pkg::*;

  logic in_valid, in_ready6, in_ready4;
  token_t tok;
  logic ov6 [6]; logic or6 [6]; token_t ot6 [6];
  logic ov4 [4]; logic or4 [4]; token_t ot4 [4];
  logic [SW-1:0] sel6, sel4;
  int checks = 0, failures = 0;

  crossbar_switch #(.NPIPE(6)) dut6 (.in_valid, .in_ready(in_ready6), .in_tok(tok),
    .out_valid(ov6), .out_ready(or6), .out_tok(ot6), .sel(sel6));
  crossbar_switch #(.NPIPE(4)) dut4 (.in_valid, .in_ready(in_ready4), .in_tok(tok),
    .out_valid(ov4), .out_ready(or4), .out_tok(ot4), .sel(sel4));

  initial begin
    for (int t = 0; t < 500; t++) begin
      tok = '0;
      tok.pos = IXW'($urandom % 6);
      tok.wid = WIDW'($urandom);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < 6; i++) or6[i] = ($urandom % 2) != 0;
      for (int i = 0; i < 4; i++) or4[i] = ($urandom % 2) != 0;
      #1;
      for (int i = 0; i < 6; i++) begin
        checks++;
        if (ov6[i] !== (in_valid && (int'(tok.pos) % 6 == i))) begin failures++; $display("FAIL v6 %0d", i); end
        if (ov6[i] && ot6[i] !== tok) begin failures++; $display("FAIL t6"); end
      end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (ov4[i] !== (in_valid && (int'(tok.pos) % 4 == i))) begin failures++; $display("FAIL v4 %0d", i); end
      end
      checks += 2;
      if (in_ready6 !== or6[int'(tok.pos) % 6]) begin failures++; $display("FAIL r6"); end
      if (in_ready4 !== or4[int'(tok.pos) % 4]) begin failures++; $display("FAIL r4"); end
    end
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
