// simd_ram: the vector register storage of one PE.
//
// DEPTH vectors of VW bits, spread over NSLICE single-port RAM slices
// (slice = address mod NSLICE), as in the "SIMD Slice #0..#(N-1)" RAMs of
// the PE. A conflict arbiter gives each slice to at most one of NP request
// ports per cycle; port 0 has the highest priority, so the network port
// (index 0 in the PE) is always granted and never blocks the mesh.
//
// Interface, per port p: req/we/addr/wdata in, gnt out in the same cycle.
// A granted read returns rdata[p] on the next clock edge (valid the cycle
// after the grant). The paper names the slices and the arbitration; the
// slice count, the depth and the fixed-priority order are this design's.
module simd_ram #(
  parameter int DEPTH  = 128,
  parameter int NSLICE = 4,
  parameter int NP     = 5,
  parameter int W      = 256
) (
  input  logic                              clk,
  input  logic [NP-1:0]                     req,
  input  logic [NP-1:0]                     we,
  input  logic [NP-1:0][$clog2(DEPTH)-1:0]  addr,
  input  logic [NP-1:0][W-1:0]              wdata,
  output logic [NP-1:0]                     gnt,
  output logic [NP-1:0][W-1:0]              rdata
);
  localparam int AW = $clog2(DEPTH);
  localparam int SW = $clog2(NSLICE);
  localparam int ROWS = DEPTH / NSLICE;

  logic [W-1:0] mem [NSLICE][ROWS];
  logic [NSLICE-1:0] busy;

  always_comb begin
    busy = '0;
    gnt  = '0;
    for (int p = 0; p < NP; p++) begin
      if (req[p] && !busy[addr[p][SW-1:0]]) begin
        gnt[p] = 1'b1;
        busy[addr[p][SW-1:0]] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (gnt[p]) begin
        if (we[p]) mem[addr[p][SW-1:0]][addr[p][AW-1:SW]] <= wdata[p];
        else       rdata[p] <= mem[addr[p][SW-1:0]][addr[p][AW-1:SW]];
      end
    end
  end
endmodule
