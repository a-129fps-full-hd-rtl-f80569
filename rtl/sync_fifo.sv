// sync_fifo: single-clock first-in first-out buffer on a memory array.
//
// Used for three buffers of the accelerator: the View SRAM (position records
// waiting for near-plane culling), the Projection FIFO (indices of Gaussians
// that survived culling) and the Preprocess SRAM (full Gaussian records
// waiting for Stage 1). The reference design gives the View and Preprocess
// SRAM sizes (12 KB each) but not their organisation; using them as FIFOs is
// this design's choice.
//
// Interface: push/wdata written when not full; rdata always shows the oldest
// entry (first-word fall-through) and pop removes it when not empty.
// count is the number of stored entries. Synchronous active-high reset
// empties the FIFO; the array itself is not cleared.
module sync_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rp];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));
endmodule
