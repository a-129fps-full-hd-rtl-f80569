// kv_global_buffer: key/value global buffer shared by the four sub-sorters.
//
// A sub-sorter's own key/value buffers hold 2000 entries; a tile with more
// keys spills the rest into this shared 6000-entry buffer (12 KB of keys and
// 12 KB of values in the reference). Sharing one large buffer instead of
// enlarging all four local ones saves area, because few tiles are that dense.
// How the sharing is arbitrated is not given; here one lane at a time owns the
// whole buffer: a lane raises acq, owns it once gnt[lane] is high, uses it
// for its tile and drops acq to release it. Ownership passes round-robin.
//
// Each lane has a write port and a read port; only the owner's ports reach
// the memory. Reads are synchronous (data the cycle after re). Entries are
// {1'b0, key[14:0], value[15:0]}.
module kv_global_buffer #(
  parameter int NLANE = 4,
  parameter int DEPTH = 6000,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [NLANE-1:0]        acq,
  output logic [NLANE-1:0]        gnt,
  input  logic [NLANE-1:0]        we,
  input  logic [NLANE-1:0][AW-1:0] waddr,
  input  logic [NLANE-1:0][31:0]  wdata,
  input  logic [NLANE-1:0]        re,
  input  logic [NLANE-1:0][AW-1:0] raddr,
  output logic [31:0]             rdata
);
  localparam int LW = (NLANE > 1) ? $clog2(NLANE) : 1;
  logic          locked;
  logic [LW-1:0] owner, last, pick;
  logic          found;

  always_comb begin
    found = 1'b0; pick = '0;
    for (int k = 1; k <= NLANE; k++) begin
      automatic int c;
      c = (int'(last) + k) % NLANE;
      if (!found && acq[c]) begin found = 1'b1; pick = LW'(c); end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0; owner <= '0; last <= LW'(NLANE - 1);
    end else if (!locked) begin
      if (found) begin locked <= 1'b1; owner <= pick; last <= pick; end
    end else if (!acq[owner]) begin
      locked <= 1'b0;
    end
  end

  always_comb begin
    gnt = '0;
    if (locked) gnt[owner] = acq[owner];
  end

  sram_1r1w #(.WIDTH(32), .DEPTH(DEPTH)) u_mem (
    .clk,
    .we(locked && we[owner]), .waddr(waddr[owner]), .wdata(wdata[owner]),
    .re(locked && re[owner]), .raddr(raddr[owner]), .rdata(rdata)
  );
endmodule
