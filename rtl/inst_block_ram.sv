// inst_block_ram: the micro code store of one PE.
//
// DEPTH micro instructions (mldf_pkg::inst_t). The context router writes
// one instruction per cycle (we/waddr/wdata); each of the four function
// units has its own read port with one cycle of latency (raddr[u] in,
// rdata[u] on the next edge). The paper draws the store as single-port
// RAM slices holding micro code blocks A, B, C, D; giving every unit its
// own read port instead is this design's simplification.
module inst_block_ram
  import mldf_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic                                   clk,
  input  logic                                   we,
  input  logic [$clog2(DEPTH)-1:0]               waddr,
  input  inst_t                                  wdata,
  input  logic [NUNIT-1:0][$clog2(DEPTH)-1:0]    raddr,
  output inst_t [NUNIT-1:0]                      rdata
);
  inst_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int u = 0; u < NUNIT; u++) rdata[u] <= mem[raddr[u]];
  end
endmodule
