// sync_fifo -- single-clock FIFO used between the Worker Distributor, the
// crossbar switch and the sub-tree pipelines (the FIFOs of Fig. 3) and for the
// pipelines' pending node insertions.
//
// The paper draws the FIFOs but gives no depth or handshake; this is a plain
// circular buffer with valid/ready on both sides. A word written while the
// FIFO is empty can be read in the next cycle (no fall-through). Depth is a
// power of two. Synchronous, active-high reset empties it.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= in_data;

  // a full FIFO is never written, an empty one never read
  always_ff @(posedge clk) if (!rst) begin
    assert (count <= (AW+1)'(DEPTH)) else $error("sync_fifo: count overflow");
  end

endmodule
