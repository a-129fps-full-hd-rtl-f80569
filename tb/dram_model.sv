// dram_model: behavioural model of the off-chip DRAM for simulation only.
//
// Sparse word memory (associative array of 32-bit words, unwritten words read
// as 0). Accepts one request per cycle; read data returns in order exactly
// LAT cycles after the request with mem_rvalid. Testbenches preload and
// inspect the contents through the mem array.
module dram_model #(
  parameter int LAT = 4
) (
  input  logic        clk,
  input  logic        mem_req,
  input  logic        mem_we,
  input  logic [31:0] mem_addr,
  input  logic [31:0] mem_wdata,
  output logic        mem_rvalid,
  output logic [31:0] mem_rdata
);
  logic [31:0] mem [logic [31:0]];
  logic [LAT-1:0] vpipe = '0;
  logic [31:0]    dpipe [LAT];
  int unsigned    n_reads = 0, n_writes = 0;

  // behavioural: blocking update of the sparse array (read before write)
  always @(posedge clk) begin
    vpipe <= {vpipe[LAT-2:0], mem_req && !mem_we};
    dpipe[0] <= (mem_req && !mem_we && mem.exists(mem_addr)) ? mem[mem_addr] : 32'h0;
    for (int i = 1; i < LAT; i++) dpipe[i] <= dpipe[i-1];
    if (mem_req && mem_we) begin mem[mem_addr] = mem_wdata; n_writes <= n_writes + 1; end
    if (mem_req && !mem_we) n_reads <= n_reads + 1;
  end
  assign mem_rvalid = vpipe[LAT-1];
  assign mem_rdata  = dpipe[LAT-1];
endmodule
