// uct_calc -- fixed-point evaluation of the UCT edge weight (Eq. 1).
//
//   uct = W/N + beta * sqrt( ln(Np) / N ) - O * VL
//
// W is the sum of the rewards backed up through the edge, N its visit count,
// Np the visit count of the parent node, O the number of virtual losses still
// applied to the edge and VL the constant virtual loss. All values are signed
// two's complement with FRAC = 16 fractional bits, as in the paper; the paper
// gives the format but not how the logarithm and square root are obtained,
// so the method here is this design's own:
//   * ln(Np) = ln2 * log2(Np), log2 from the leading-one position plus a
//     17-point table of log2(1+i/16) with linear interpolation (error below
//     1e-3 in log2);
//   * ln(Np)/N and W/N by integer division;
//   * the square root by the bit-serial (digit-by-digit) method, unrolled.
// An unvisited edge (N = 0) gets UCT_MAX so that it is tried first. The result
// saturates to the UW-bit range.
//
// Purely combinational; the BackUp updater registers around it.
module uct_calc
  import mcts_pkg::*;
#(
  parameter logic [UW-1:0] BETA = BETA_DEF,  // exploration constant, Q16
  parameter logic [UW-1:0] VL   = VL_DEF     // virtual loss per worker, Q16
) (
  input  logic signed [WW-1:0] w,
  input  logic [NW-1:0]        n,
  input  logic [NW-1:0]        np,
  input  logic [OW-1:0]        o,
  output logic signed [UW-1:0] uct
);

  // round(65536 * log2(1 + i/16)), i = 0..16
  localparam logic [16:0] LOG2_TAB [17] = '{
    17'd0,     17'd5732,  17'd11136, 17'd16248, 17'd21098, 17'd25711,
    17'd30109, 17'd34312, 17'd38336, 17'd42196, 17'd45904, 17'd49472,
    17'd52911, 17'd56229, 17'd59434, 17'd62534, 17'd65536
  };
  localparam logic [16:0] LN2_Q16 = 17'd45426;  // round(65536 * ln 2)

  // log2 of an NW-bit integer >= 1, Q16
  function automatic logic [31:0] log2_q16(input logic [NW-1:0] x);
    int unsigned m;
    logic [NW-1:0] norm;
    logic [14:0] fr;
    logic [3:0]  seg;
    logic [10:0] t;
    logic [16:0] lo, hi;
    logic [31:0] interp;
    m = 0;
    for (int unsigned i = 0; i < NW; i++) if (x[i]) m = i;
    norm = x << (NW - 1 - m);               // leading one at the top
    fr   = norm[NW-2 -: 15];                // fraction below the leading one
    seg  = fr[14:11];
    t    = fr[10:0];
    lo   = LOG2_TAB[5'(seg)];
    hi   = LOG2_TAB[5'(seg) + 5'd1];
    interp = 32'(lo) + ((32'(hi - lo) * 32'(t)) >> 11);
    return (32'(m) << 16) + interp;
  endfunction

  // floor(sqrt(x)) of a 40-bit integer
  function automatic logic [19:0] isqrt40(input logic [39:0] x);
    logic [39:0] rem;
    logic [39:0] root;
    logic [39:0] bitv;
    rem  = x;
    root = '0;
    bitv = 40'd1 << 38;
    for (int i = 0; i < 20; i++) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[19:0];
  endfunction

  logic [31:0]  lg2, ln_q16;
  logic [39:0]  ratio_q32;   // ln(Np)/N with 32 fractional bits
  logic [19:0]  sq_q16;      // sqrt(ln(Np)/N), Q16
  logic [63:0]  explore;     // beta * sqrt(...), Q16
  logic [WW-1:0] wabs;
  logic [WW-1:0] mabs;
  logic signed [WW+1:0] mean, total, vloss;

  always_comb begin
    lg2    = (np == '0) ? 32'd0 : log2_q16(np);
    ln_q16 = 32'((64'(lg2) * 64'(LN2_Q16)) >> 16);
    ratio_q32 = (n == '0) ? 40'd0 : 40'((64'(ln_q16) << 16) / 64'(n));
    sq_q16  = isqrt40(ratio_q32);
    explore = (64'(sq_q16) * 64'(BETA)) >> 16;
    wabs  = w[WW-1] ? WW'(-w) : WW'(w);
    mabs  = (n == '0) ? '0 : WW'(wabs / WW'(n));
    mean  = w[WW-1] ? -$signed({2'b00, mabs}) : $signed({2'b00, mabs});
    vloss = $signed({2'b00, WW'(o) * WW'(VL)});
    total = mean + $signed((WW+2)'(explore)) - vloss;
    if (n == '0)
      uct = UCT_MAX - UW'(vloss);
    else if (total > $signed((WW+2)'(UCT_MAX)))
      uct = UCT_MAX;
    else if (total < (WW+2)'(UCT_MIN))
      uct = UCT_MIN;
    else
      uct = UW'(total);
  end

endmodule
