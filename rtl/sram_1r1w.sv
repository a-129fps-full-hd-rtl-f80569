// sram_1r1w: simple dual-port memory, one synchronous write port and one
// synchronous read port (read data valid the cycle after the address).
//
// Stands for the on-chip SRAM macros of the accelerator that are addressed
// randomly: the per-sub-sorter key/value buffers of the Sorting SRAM
// (2000 entries), the shared global key/value buffer and the Feature SRAM.
// Written as an array so that synthesis can map it to a macro. No reset: the
// contents are undefined until written, and the controllers never read an
// entry they did not write.
module sram_1r1w #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 2000
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
