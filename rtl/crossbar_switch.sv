// crossbar_switch -- the 1-to-n crossbar of Fig. 3.
//
// Takes worker tokens from the Worker Distributor's FIFO and hands each to the
// FIFO of the sub-tree pipeline that owns the token's root child. The paper
// gives the crossbar's place and width but not its mapping; here root child c
// belongs to pipeline c mod n and sits at entry c div n of that pipeline's
// first-level bank (the token's addr, set by the distributor). With n = F, as
// in the paper's configurations, every pipeline owns exactly one root child.
// Combinational valid/ready routing: the input is ready when the selected
// output is. Only the valid signals are steered; every output carries the
// input token, so the token outputs are wires from the input.
module crossbar_switch
  import mcts_pkg::*;
#(
  parameter int unsigned NPIPE = F_DEF
) (
  input  logic   in_valid,
  output logic   in_ready,
  input  token_t in_tok,
  output logic   out_valid [NPIPE],
  input  logic   out_ready [NPIPE],
  output token_t out_tok   [NPIPE],
  output logic [SW-1:0] sel
);

  always_comb begin
    sel = SW'(in_tok.pos % IXW'(NPIPE));
    in_ready = 1'b0;
    for (int i = 0; i < NPIPE; i++) begin
      out_tok[i]   = in_tok;
      out_valid[i] = in_valid && (sel == SW'(i));
      if (sel == SW'(i)) in_ready = out_ready[i];
    end
  end

endmodule
