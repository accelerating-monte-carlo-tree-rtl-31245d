// clut -- one Comparison Look-Up Table (CLUT) of the Worker Distributor.
//
// Finds the largest of FI edge weights in one clock cycle, as in Sec. IV-D of
// the paper: C(FI,2) two-input comparators each compare one distinct pair of
// weights and give one bit; the concatenated C(FI,2)-bit word indexes a table
// of 2**C(FI,2) entries that holds the index of the winning input.
// Comparator (a,b), a < b, gives 1 when w[a] >= w[b], so ties go to the lower
// index. Its bit position is the rank of the pair in the order
// (0,1),(0,2)..(0,FI-1),(1,2)...  The table entry of address k is the input i
// that wins all its pairs in k; addresses that no set of weights can produce
// (cyclic outcomes) hold 0. The table is written as the function
// table_entry() of its address, so synthesis turns it into the same
// read-only look-up logic it would build from a stored 2**C(FI,2)-entry array
// (a stored array filled by an initial loop exceeds the constant-evaluation
// limits of some tools at FI = 6).
//
// Purely combinational: weights in, index and maximum weight out.
module clut
  import mcts_pkg::*;
#(
  parameter int unsigned FI = CLUT_F_DEF,   // number of weights compared, 2..8
  localparam int unsigned NC = FI * (FI - 1) / 2,
  localparam int unsigned IW = (FI > 1) ? $clog2(FI) : 1
) (
  input  logic signed [UW-1:0] w [FI],
  output logic [IW-1:0]        idx,
  output logic signed [UW-1:0] wmax
);

  logic [NC-1:0] cmp;

  // bit position of pair (a,b), a < b
  function automatic int unsigned pair_bit(input int unsigned a, input int unsigned b);
    return a * (2 * FI - a - 1) / 2 + (b - a - 1);
  endfunction

  // content of table address k: the input that wins all of its comparisons
  function automatic logic [IW-1:0] table_entry(input logic [NC-1:0] k);
    logic [IW-1:0] r;
    r = '0;
    for (int unsigned i = 0; i < FI; i++) begin
      automatic logic wins = 1'b1;
      for (int unsigned j = 0; j < FI; j++) begin
        if (j > i && !k[pair_bit(i, j)]) wins = 1'b0;
        if (j < i &&  k[pair_bit(j, i)]) wins = 1'b0;
      end
      if (wins) r = IW'(i);
    end
    return r;
  endfunction

  always_comb begin
    cmp = '0;
    for (int unsigned a = 0; a < FI; a++)
      for (int unsigned b = a + 1; b < FI; b++)
        cmp[pair_bit(a, b)] = (w[a] >= w[b]);
  end

  assign idx  = table_entry(cmp);
  assign wmax = w[idx];

  initial assert (FI >= 2 && FI <= 8) else $error("clut: FI must be 2..8");

endmodule
