// cf_subsorter: comparison-free sub-sorter for N keys of KW bits (Stage 2).
//
// The Element Vector Table (EVT) has one bit per loaded key, 1 while the key is
// still unsorted. To find the largest unsorted key, a chain of bit blocks
// walks the key bits from the MSB down: block b keeps the candidates whose bit
// b is 1 if there is any (an N-input OR decides), otherwise passes all
// candidates on. After the last block only copies of the largest key remain;
// Fo & (~Fo + 1) keeps the lowest-numbered one (the reference's duplicate
// resolution), which is encoded into the slot address and cleared from the
// EVT. The blocks are grouped (3, 4, 4, 4) as in the reference; groups 3 and 2
// (bits 14..8) are evaluated in the first cycle and registered, groups 1 and
// 0 with the detector in the second, so one largest element leaves every 2
// cycles with no comparator. How the reference combines its concurrently
// evaluated clusters is not given, so the groups are simply cascaded here.
//
// Interface:
//   ld_valid/ld_slot/ld_key write a key and set its EVT bit;
//   clear empties the EVT (also used to abandon a tile on early termination);
//   go (level) allows sorting; o_valid/o_slot/o_key present the current
//   largest key and are held until o_ready; empty = nothing left to output.
// Keys of 15 bits hold the depth without its sign bit.
module cf_subsorter #(
  parameter int N  = 256,
  parameter int KW = 15,
  localparam int SW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          clear,
  input  logic          ld_valid,
  input  logic [SW-1:0] ld_slot,
  input  logic [KW-1:0] ld_key,
  input  logic          go,
  output logic          o_valid,
  output logic [SW-1:0] o_slot,
  output logic [KW-1:0] o_key,
  input  logic          o_ready,
  output logic          empty
);
  localparam int SPLIT = KW - 7;   // bits [KW-1:SPLIT] in the first cycle (3 + 4 bits)

  logic [KW-1:0] keys [N];
  logic [N-1:0]  evt, cand, fo, onehot;
  logic [N-1:0]  hi_vec;
  logic          phase;            // 0: upper groups, 1: lower groups + detector

  // bit slice D_b: bit b of every key
  function automatic logic [N-1:0] slice(input int b);
    logic [N-1:0] s;
    for (int i = 0; i < N; i++) s[i] = keys[i][b];
    return s;
  endfunction

  // cascaded BLK b: keep candidates with bit b set, if any
  always_comb begin
    hi_vec = evt;
    for (int b = KW - 1; b >= SPLIT; b--) begin
      logic [N-1:0] t;
      t = hi_vec & slice(b);
      if (|t) hi_vec = t;
    end
    fo = cand;
    for (int b = SPLIT - 1; b >= 0; b--) begin
      logic [N-1:0] t;
      t = fo & slice(b);
      if (|t) fo = t;
    end
    onehot = fo & (~fo + 1'b1);      // duplicate resolution, Eq. (8)
  end

  logic [SW-1:0] enc;
  always_comb begin
    enc = '0;
    for (int i = 0; i < N; i++) if (onehot[i]) enc = SW'(i);
  end

  logic out_free;
  assign out_free = !o_valid || o_ready;
  assign empty    = (evt == '0) && !phase && !o_valid;

  always_ff @(posedge clk) begin
    if (ld_valid) keys[ld_slot] <= ld_key;
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      evt <= '0; phase <= 1'b0; o_valid <= 1'b0; cand <= '0; o_slot <= '0; o_key <= '0;
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      if (ld_valid) evt[ld_slot] <= 1'b1;
      if (go) begin
        if (!phase) begin
          if (evt != '0) begin cand <= hi_vec; phase <= 1'b1; end
        end else if (out_free) begin
          o_valid <= 1'b1;
          o_slot  <= enc;
          o_key   <= keys[enc];
          evt     <= evt & ~onehot;
          phase   <= 1'b0;
        end
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (rst || clear) (go && phase) |-> $onehot(onehot));
endmodule
