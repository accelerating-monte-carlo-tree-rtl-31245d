// memo_buffer -- one level of the BackUp Memoization Buffers (Fig. 3, Sec. IV-E).
//
// During Selection the stage of one tree level writes, for worker wid, the
// entry address and edge slot it chose, together with a valid bit. During
// BackUp all levels are read at the same worker number in the same cycle, so
// the worker's whole path is available at once and every level is updated in
// parallel instead of tracing back from the leaf. The paper gives each worker
// D-1 words; here the words of one level of one pipeline form one array
// indexed by worker number (P words), one array per level and pipeline.
// clr_en invalidates the entry of worker clr_wid (used by the path end).
// Asynchronous read, synchronous write; write wins over clear.
module memo_buffer
  import mcts_pkg::*;
#(
  parameter int unsigned P  = P_DEF,
  parameter int unsigned AW = 1            // width of the stored entry address
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            we,
  input  logic [WIDW-1:0] wwid,
  input  logic [AW-1:0]   waddr,
  input  logic [SW-1:0]   wslot,
  input  logic            clr_en,
  input  logic [WIDW-1:0] clr_wid,
  input  logic [WIDW-1:0] rwid,
  output logic            rvalid,
  output logic [AW-1:0]   raddr,
  output logic [SW-1:0]   rslot
);

  logic [AW-1:0] addr_m [P];
  logic [SW-1:0] slot_m [P];
  logic [P-1:0]  valid_m;

  always_ff @(posedge clk) begin
    if (we) begin
      addr_m[wwid] <= waddr;
      slot_m[wwid] <= wslot;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) valid_m <= '0;
    else begin
      if (clr_en) valid_m[clr_wid] <= 1'b0;
      if (we)     valid_m[wwid]    <= 1'b1;
    end
  end

  assign rvalid = valid_m[rwid];
  assign raddr  = addr_m[rwid];
  assign rslot  = slot_m[rwid];

endmodule
