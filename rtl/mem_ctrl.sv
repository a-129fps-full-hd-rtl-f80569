// mem_ctrl: memory controller between the accelerator's clients and the single
// off-chip DRAM port.
//
// The reference architecture shows a memory controller and one shared bus
// that every SRAM and every stage reaches; how it arbitrates is not given.
// This controller grants one client per cycle in round-robin order. A client
// holds req (with we, addr, wdata) until it sees gnt in the same cycle. Read
// requests are tagged with the client number in a small FIFO; DRAM must
// return reads in order (mem_rvalid/mem_rdata), and each return is steered to
// its client as cli_rvalid with the shared cli_rdata. At most MAXOUT reads may
// be outstanding; further reads wait.
module mem_ctrl #(
  parameter int NCLI   = 8,
  parameter int MAXOUT = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [NCLI-1:0]        cli_req,
  input  logic [NCLI-1:0]        cli_we,
  input  logic [NCLI-1:0][31:0]  cli_addr,
  input  logic [NCLI-1:0][31:0]  cli_wdata,
  output logic [NCLI-1:0]        cli_gnt,
  output logic [NCLI-1:0]        cli_rvalid,
  output logic [31:0]            cli_rdata,
  // DRAM port
  output logic                   mem_req,
  output logic                   mem_we,
  output logic [31:0]            mem_addr,
  output logic [31:0]            mem_wdata,
  input  logic                   mem_rvalid,
  input  logic [31:0]            mem_rdata
);
  localparam int IW = (NCLI > 1) ? $clog2(NCLI) : 1;
  logic [IW-1:0] last, pick;
  logic          found;
  logic [IW-1:0] tag_q [MAXOUT];
  logic [$clog2(MAXOUT)-1:0] tw, tr;
  logic [$clog2(MAXOUT+1)-1:0] outstanding;
  logic can_read;

  assign can_read = (outstanding < MAXOUT[$clog2(MAXOUT+1)-1:0]) || mem_rvalid;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= NCLI; k++) begin
      automatic int c;
      c = (int'(last) + k) % NCLI;
      if (!found && cli_req[c] && (cli_we[c] || can_read)) begin
        found = 1'b1;
        pick  = IW'(c);
      end
    end
  end

  always_comb begin
    cli_gnt = '0;
    if (found) cli_gnt[pick] = 1'b1;
    mem_req   = found;
    mem_we    = cli_we[pick];
    mem_addr  = cli_addr[pick];
    mem_wdata = cli_wdata[pick];
  end

  logic issue_rd;
  assign issue_rd = found && !cli_we[pick];

  always_ff @(posedge clk) begin
    if (rst) begin
      last <= IW'(NCLI-1); tw <= '0; tr <= '0; outstanding <= '0;
    end else begin
      if (found) last <= pick;
      if (issue_rd) begin
        tag_q[tw] <= pick;
        tw <= (tw == $clog2(MAXOUT)'(MAXOUT-1)) ? '0 : tw + 1'b1;
      end
      if (mem_rvalid) tr <= (tr == $clog2(MAXOUT)'(MAXOUT-1)) ? '0 : tr + 1'b1;
      outstanding <= outstanding + (issue_rd ? 1'b1 : 1'b0) - (mem_rvalid ? 1'b1 : 1'b0);
    end
  end

  always_comb begin
    cli_rvalid = '0;
    if (mem_rvalid) cli_rvalid[tag_q[tr]] = 1'b1;
  end
  assign cli_rdata = mem_rdata;

  a_onehot_gnt: assert property (@(posedge clk) disable iff (rst) $onehot0(cli_gnt));
  a_no_spurious_return: assert property (@(posedge clk) disable iff (rst) mem_rvalid |-> outstanding != 0);
endmodule
