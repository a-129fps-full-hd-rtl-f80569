// cull_mask: the culling-mask buffer of Stage 0.
//
// Collects one bit per Gaussian (1 = culled) in the order the culling unit
// decides them and writes each full 32-bit word to DRAM at
// MASK_BASE + g/32 (bit g%32 holds Gaussian g). flush writes a partially
// filled word at the end of a frame. The mask format is this design's own;
// the reference only shows a "Culling Mask" buffer between the culling unit
// and the bus.
//
// Interface: bit_valid/bit_val/bit_gidx from the culling unit (indices must
// arrive in increasing order starting at 0 after clear); the memory side is a
// req/gnt write port. busy is high while a word waits for its grant; a new
// bit must not arrive while busy (the culling unit produces one bit every
// 4 cycles, and the word is held only until granted). done pulses when a
// flush has been written.
module cull_mask
  import gs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        bit_valid,
  input  logic        bit_val,
  input  gidx_t       bit_gidx,
  input  logic        flush,
  output logic        busy,
  output logic        done,
  output logic        mreq,
  output logic [31:0] maddr,
  output logic [31:0] mwdata,
  input  logic        mgnt
);
  logic [31:0] word;
  logic [31:0] pend_word;
  logic [31:0] pend_addr;
  logic        pend, pend_flush, have_bits;

  assign busy   = pend;
  assign mreq   = pend;
  assign maddr  = pend_addr;
  assign mwdata = pend_word;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      word <= '0; pend <= 1'b0; pend_flush <= 1'b0; have_bits <= 1'b0; done <= 1'b0;
      pend_word <= '0; pend_addr <= '0;
    end else begin
      done <= 1'b0;
      if (pend && mgnt) begin
        pend <= 1'b0;
        if (pend_flush) begin done <= 1'b1; pend_flush <= 1'b0; end
      end
      if (bit_valid) begin
        if (bit_gidx[4:0] == 5'd31) begin
          pend      <= 1'b1;
          pend_word <= word | (32'(bit_val) << 31);
          pend_addr <= MASK_BASE + 32'(bit_gidx >> 5);
          word      <= '0;
          have_bits <= 1'b0;
        end else begin
          word      <= word | (32'(bit_val) << bit_gidx[4:0]);
          have_bits <= 1'b1;
        end
        pend_addr <= MASK_BASE + 32'(bit_gidx >> 5);
      end else if (flush) begin
        if (have_bits) begin
          pend <= 1'b1; pend_flush <= 1'b1; pend_word <= word; word <= '0; have_bits <= 1'b0;
        end else begin
          done <= 1'b1;
        end
      end
    end
  end
endmodule
