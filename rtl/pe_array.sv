// pe_array: the 6x1 one-dimensional MAC array of Stage 1 with its
// adder-or-bypass output unit.
//
// One weight w is broadcast to all NPE processing elements each cycle; each PE
// i multiplies its own input in[i] and accumulates (weight broadcasting, as in
// the reference). en[i] and first[i] control each PE separately, so idle PEs
// keep their results; a zero input is simply never issued (this is how the
// zero Jacobian terms are skipped). The output unit either passes the NPE
// accumulators through (bypass, out_vec) or adds them (out_sum).
//
// Timing: results are valid 2 cycles after the last issued operand.
module pe_array
  import gs_pkg::*;
#(
  parameter int NPE = 6
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [NPE-1:0]  en,
  input  logic [NPE-1:0]  first,
  input  fx_t             w,
  input  fx_t [NPE-1:0]   in,
  input  fx_t [NPE-1:0]   init,
  output fx_t [NPE-1:0]   out_vec,
  output fx_t             out_sum
);
  for (genvar i = 0; i < NPE; i++) begin : g_pe
    mac_pe u_pe (
      .clk, .rst, .en(en[i]), .first(first[i]), .a(in[i]), .w(w),
      .init(init[i]), .acc(out_vec[i])
    );
  end

  always_comb begin
    out_sum = '0;
    for (int i = 0; i < NPE; i++) out_sum = fx_add(out_sum, out_vec[i]);
  end
endmodule
