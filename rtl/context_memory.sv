// context_memory: configuration store on the west edge of the array.
//
// The host writes context packets (mldf_pkg::ctx_pkt_t) into DEPTH words
// (wr_en/wr_addr/wr_data). A pulse on go with base/count streams words
// base .. base+count-1, in order, into the context network: each word is
// sent to the router chain of the row its PE index names (row = pe / NX).
// One word leaves per cycle at best; a word waits while its row is not
// ready. busy is high from go until the last word has been accepted.
// The paper shows the context memory feeding the rows of PEs (Fig. 7);
// depth, host port and streaming order are this design's.
module context_memory
  import mldf_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  ctx_pkt_t                  wr_data,
  input  logic                      go,
  input  logic [$clog2(DEPTH)-1:0]  base,
  input  logic [$clog2(DEPTH):0]    count,
  output logic                      busy,
  output logic [NY-1:0]             row_vld,
  input  logic [NY-1:0]             row_rdy,
  output ctx_pkt_t                  row_pkt
);
  localparam int AW = $clog2(DEPTH);
  ctx_pkt_t       mem [DEPTH];
  logic [AW-1:0]  rd_addr;
  logic [AW:0]    left;
  logic           have;          // row_pkt holds a word read from mem
  ctx_pkt_t       word;
  logic [1:0]     row;

  assign row_pkt = word;
  assign row     = word.pe[3:2];
  assign busy    = (left != 0) || have;

  always_comb begin
    row_vld = '0;
    if (have) row_vld[row] = 1'b1;
  end

  logic sent;
  assign sent = have && row_rdy[row];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr <= '0;
      left    <= '0;
      have    <= 1'b0;
      word    <= '0;
    end else if (go) begin
      rd_addr <= base;
      left    <= count;
      have    <= 1'b0;
    end else begin
      if (sent) have <= 1'b0;
      if ((!have || sent) && left != 0) begin
        word    <= mem[rd_addr];
        have    <= 1'b1;
        rd_addr <= rd_addr + 1'b1;
        left    <= left - 1'b1;
      end
    end
  end
endmodule
