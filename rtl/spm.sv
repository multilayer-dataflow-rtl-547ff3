// spm: the multi-line scratchpad memory.
//
// Capacity NBANK*NLINE*ROWS entries of SIMD fp16 elements (4 MB at the
// defaults: 4 banks x 8 lines x 4096 rows x 32 B). Every line is a
// single-port SRAM whose entry is one SIMD16 vector. Entry address mapping:
// bank = addr[1:0] (entries interleaved over the banks), line = addr[4:2],
// row = addr[16:5].
//
// Two access shapes, as the paper describes for transpose-free SIMD:
//  row-wise    (col=0): one whole entry of one line.
//  column-wise (col=1): element e of the vector lives in bank
//              (addr[1:0] + e/8) mod 4, line e mod 8, row addr[16:5],
//              lane `lane` of that entry; a gather reads 16 lines of two
//              banks, a scatter writes one lane in each of them.
//
// Ports: NX network ports (one per array column, at the top of the mesh)
// take PK_LDREQ and PK_ST packets; a load answers with a PK_LDRSP packet
// routed back to the requesting PE. One external port (host or DMA) does
// row-wise entry reads and writes and has priority. A bank serves one
// request per cycle; network ports compete in round robin, a column-wise
// request needs both of its banks free. Latency: a request accepted into
// a port's register is served in the next cycle at the earliest, and its
// response is offered on the following cycle. ext_rdata is valid the
// cycle after ext_gnt. The bank mapping bits, port placement and
// arbitration are this design's; lines, banks, SIMD16 entries, the
// element-to-line scatter and 4 MB follow the paper.
module spm
  import mldf_pkg::*;
#(
  parameter int NBANK = 4,
  parameter int NLINE = 8,
  parameter int ROWS  = 4096,
  parameter int NP    = NX
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NP-1:0]           in_vld,
  output logic [NP-1:0]           in_rdy,
  input  dpkt_t [NP-1:0]          in_pkt,
  output logic [NP-1:0]           out_vld,
  input  logic [NP-1:0]           out_rdy,
  output dpkt_t [NP-1:0]          out_pkt,
  input  logic                    ext_req,
  input  logic                    ext_we,
  input  logic [SPM_AW-1:0]       ext_addr,
  input  logic [VW-1:0]           ext_wdata,
  output logic                    ext_gnt,
  output logic [VW-1:0]           ext_rdata,
  output logic                    idle,
  output logic                    conflict   // a ready request waited for a bank
);
  localparam int BW = $clog2(NBANK);
  localparam int LW = $clog2(NLINE);
  localparam int RW = $clog2(ROWS);

  logic [VW-1:0] mem [NBANK][NLINE][ROWS];

  logic [NP-1:0] req_full, rsp_full;
  dpkt_t [NP-1:0] req;
  logic [NP-1:0] serve;
  logic [$clog2(NP)-1:0] rr;

  function automatic logic [BW-1:0] bank_of(logic [SPM_AW-1:0] a);
    return a[BW-1:0];
  endfunction
  function automatic logic [LW-1:0] line_of(logic [SPM_AW-1:0] a);
    return a[BW +: LW];
  endfunction
  function automatic logic [RW-1:0] row_of(logic [SPM_AW-1:0] a);
    return a[BW + LW +: RW];
  endfunction
  function automatic logic [NBANK-1:0] banks_of(dpkt_t p);
    logic [NBANK-1:0] m;
    m = '0;
    m[bank_of(p.addr)] = 1'b1;
    if (p.col) m[BW'((int'(bank_of(p.addr)) + 1) % NBANK)] = 1'b1;
    return m;
  endfunction

  assign in_rdy  = ~req_full;
  assign out_vld = rsp_full;

  always_comb begin
    logic [NBANK-1:0] used;
    used     = '0;
    serve    = '0;
    conflict = 1'b0;
    ext_gnt  = ext_req;
    if (ext_req) used[bank_of(ext_addr)] = 1'b1;
    for (int k = 0; k < NP; k++) begin
      int p;
      logic can;
      p   = (int'(rr) + k) % NP;
      can = req_full[p] && (req[p].kind != PK_LDREQ || !rsp_full[p] || out_rdy[p]);
      if (can) begin
        if ((banks_of(req[p]) & used) == '0) begin
          serve[p] = 1'b1;
          used     = used | banks_of(req[p]);
        end else conflict = 1'b1;
      end
    end
    idle = (req_full == '0) && (rsp_full == '0);
  end

  always_ff @(posedge clk) begin
    if (ext_req) begin
      if (ext_we) mem[bank_of(ext_addr)][line_of(ext_addr)][row_of(ext_addr)] <= ext_wdata;
      else        ext_rdata <= mem[bank_of(ext_addr)][line_of(ext_addr)][row_of(ext_addr)];
    end
    for (int p = 0; p < NP; p++) begin
      if (serve[p]) begin
        if (req[p].kind == PK_ST) begin
          if (!req[p].col)
            mem[bank_of(req[p].addr)][line_of(req[p].addr)][row_of(req[p].addr)] <= req[p].data;
          else
            for (int e = 0; e < SIMD; e++)
              mem[(int'(bank_of(req[p].addr)) + e / NLINE) % NBANK][e % NLINE][row_of(req[p].addr)]
                 [req[p].lane * DW +: DW] <= req[p].data[e * DW +: DW];
        end else begin
          out_pkt[p].rt   <= route_to_pe(req[p].src_pe);
          out_pkt[p].kind <= PK_LDRSP;
          out_pkt[p].src_pe <= req[p].src_pe;
          out_pkt[p].node <= req[p].node;
          out_pkt[p].rg   <= req[p].rg;
          out_pkt[p].col  <= req[p].col;
          out_pkt[p].lane <= req[p].lane;
          out_pkt[p].addr <= req[p].addr;
          if (!req[p].col)
            out_pkt[p].data <= mem[bank_of(req[p].addr)][line_of(req[p].addr)][row_of(req[p].addr)];
          else
            for (int e = 0; e < SIMD; e++)
              out_pkt[p].data[e * DW +: DW] <=
                mem[(int'(bank_of(req[p].addr)) + e / NLINE) % NBANK][e % NLINE][row_of(req[p].addr)]
                   [req[p].lane * DW +: DW];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_full <= '0;
      rsp_full <= '0;
      req      <= '0;
      rr       <= '0;
    end else begin
      for (int p = 0; p < NP; p++) begin
        if (rsp_full[p] && out_rdy[p]) rsp_full[p] <= 1'b0;
        if (serve[p]) begin
          req_full[p] <= 1'b0;
          if (req[p].kind == PK_LDREQ) rsp_full[p] <= 1'b1;
        end
        if (in_vld[p] && !req_full[p]) begin
          req_full[p] <= 1'b1;
          req[p]      <= in_pkt[p];
        end
      end
      rr <= (int'(rr) == NP - 1) ? '0 : rr + 1'b1;
    end
  end
endmodule
