// mac_pe: multiply-accumulate processing element.
//
// Structure from the reference's culling MAC: multiplier, register, adder,
// register with feedback. The adder adds the registered product either to a
// start value (first = 1, e.g. the translation column of a matrix) or to its
// own output (accumulate). Used alone by the near-plane culling unit and six
// times in the Stage 1 PE array, where the weight w is broadcast.
//
// Timing: an operand pair (a, w) presented with en in cycle t is multiplied
// into the product register at the end of t; the accumulator takes it at the
// end of t+1, so acc holds a result 2 cycles after its last operand.
module mac_pe
  import gs_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic en,       // operand valid
  input  logic first,    // this operand starts a new sum
  input  fx_t  a,        // streamed input (in_i)
  input  fx_t  w,        // broadcast weight
  input  fx_t  init,     // start value added to the first product
  output fx_t  acc
);
  fx_t  prod;
  logic en_q, first_q;
  fx_t  init_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      en_q <= 1'b0; first_q <= 1'b0; prod <= '0; init_q <= '0; acc <= '0;
    end else begin
      en_q    <= en;
      first_q <= first;
      init_q  <= init;
      if (en) prod <= fx_mul(a, w);
      if (en_q) acc <= fx_add(first_q ? init_q : acc, prod);
    end
  end
endmodule
