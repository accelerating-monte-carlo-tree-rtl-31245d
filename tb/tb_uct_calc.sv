// tb_uct_calc -- checks the fixed-point uct evaluator against a real-number
// model of Eq. 1: uct = W/N + beta*sqrt(ln(Np)/N) - O*VL, within 0.003 plus
// 0.1 % of the exploration term. Also checks the unvisited-edge value and
// saturation. Combinational block: one check per applied vector.
module tb_uct_calc;
  import mcts_pkg::*;

  logic signed [WW-1:0] w;
  logic [NW-1:0] n, np;
  logic [OW-1:0] o;
  logic signed [UW-1:0] uct;
  int checks = 0, failures = 0;

  uct_calc dut (.w, .n, .np, .o, .uct);

  function automatic real ref_uct(longint wv, int nv, int npv, int ov);
    real beta, vl;
    beta = real'(BETA_DEF) / 65536.0;
    vl   = real'(VL_DEF) / 65536.0;
    return (real'(wv) / 65536.0) / nv + beta * $sqrt($ln(real'(npv)) / nv) - ov * vl;
  endfunction

  task automatic try(longint wv, int nv, int npv, int ov);
    real r, got, tol;
    w = WW'(wv); n = NW'(nv); np = NW'(npv); o = OW'(ov);
    #1;
    checks++;
    got = real'(uct) / 65536.0;
    if (nv == 0) begin
      if (uct !== UCT_MAX - UW'(ov * int'(VL_DEF))) begin
        failures++;
        $display("FAIL n=0: uct=%0d", uct);
      end
    end else begin
      r = ref_uct(wv, nv, npv, ov);
      tol = 0.003 + 0.001 * $sqrt($ln(real'(npv)) / nv) * 1.5;
      if (r > 32767.0) r = 32768.0 - 1.0 / 65536.0;
      if (r < -32768.0) r = -32768.0;
      if (got - r > tol || r - got > tol) begin
        failures++;
        $display("FAIL w=%0d n=%0d np=%0d o=%0d got=%f ref=%f", wv, nv, npv, ov, got, r);
      end
    end
  endtask

  initial begin
    try(0, 1, 1, 0);
    try(65536, 1, 2, 0);
    try(-3 * 65536, 4, 100, 2);
    try(10 * 65536, 10, 56000, 0);
    try(0, 0, 5, 3);
    try(longint'(65536) * 40000, 1, 1, 0);     // saturates high
    try(-longint'(65536) * 40000, 1, 1, 0);    // saturates low
    for (int i = 0; i < 400; i++) begin
      int nv, npv, ov;
      longint wv;
      nv  = 1 + int'($urandom % 2000);
      npv = nv + int'($urandom % 50000);
      ov  = int'($urandom % 8);
      wv  = (longint'($urandom % 4000) - 2000) * longint'(nv) * 65536 / 1000;
      try(wv, nv, npv, ov);
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
