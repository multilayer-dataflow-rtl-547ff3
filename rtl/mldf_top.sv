// mldf_top: the multilayer-dataflow array.
//
// A NY x NX (4x4) mesh of PEs, each beside two mesh routers: the data
// network (loads, stores, COPY_T vectors) and the req/ack network (credits
// that let a sender reuse a remote register slot). The multi-line SPM sits
// on the north edge: the north port of every row-0 data router is one SPM
// port. The context memory on the west edge feeds one chain of context
// routers per PE row.
//
// Host side (plain ports): context memory writes and a go/base/count
// command that streams context words into the PEs; a row-wise SPM port
// for the DMA/host to fill inputs and read results. done is the
// synchronization barrier between DFG stages: every PE has finished all
// iterations of its nodes and the networks, the SPM and the context path
// are idle. A multi-stage computation loads the next DFG's context after
// done and starts again.
module mldf_top
  import mldf_pkg::*;
#(
  parameter int CM_DEPTH = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cm_wr_en,
  input  logic [$clog2(CM_DEPTH)-1:0] cm_wr_addr,
  input  ctx_pkt_t                    cm_wr_data,
  input  logic                        cm_go,
  input  logic [$clog2(CM_DEPTH)-1:0] cm_base,
  input  logic [$clog2(CM_DEPTH):0]   cm_count,
  output logic                        cm_busy,
  input  logic                        ext_req,
  input  logic                        ext_we,
  input  logic [SPM_AW-1:0]           ext_addr,
  input  logic [VW-1:0]               ext_wdata,
  output logic                        ext_gnt,
  output logic [VW-1:0]               ext_rdata,
  output logic                        done,
  output logic [NPE-1:0]              pe_running
);
  localparam int PL = 0, PN = 1, PE = 2, PS = 3, PW = 4;

  // router port bundles
  logic  [4:0]              d_iv [NY][NX], d_ir [NY][NX], d_ov [NY][NX], d_or [NY][NX];
  logic  [4:0][DPKT_W-1:0]  d_ip [NY][NX], d_op [NY][NX];
  logic  [4:0]              a_iv [NY][NX], a_ir [NY][NX], a_ov [NY][NX], a_or [NY][NX];
  logic  [4:0][APKT_W-1:0]  a_ip [NY][NX], a_op [NY][NX];
  logic                     d_idle [NY][NX], a_idle [NY][NX];

  // context chains
  logic                     c_vld [NY][NX+1], c_rdy [NY][NX+1];
  ctx_pkt_t                 c_pkt [NY][NX+1];
  logic [NY-1:0]            row_vld, row_rdy;
  ctx_pkt_t                 row_pkt;
  logic [NPE-1:0]           pe_done, c_idle, ram_conflict;

  // SPM
  logic  [NX-1:0]           s_iv, s_ir, s_ov, s_or;
  dpkt_t [NX-1:0]           s_ip, s_op;
  logic                     spm_idle;
  logic                     spm_conflict;

  context_memory #(.DEPTH(CM_DEPTH)) u_cm (
    .clk, .rst_n, .wr_en(cm_wr_en), .wr_addr(cm_wr_addr), .wr_data(cm_wr_data),
    .go(cm_go), .base(cm_base), .count(cm_count), .busy(cm_busy),
    .row_vld, .row_rdy, .row_pkt);

  spm u_spm (
    .clk, .rst_n, .in_vld(s_iv), .in_rdy(s_ir), .in_pkt(s_ip),
    .out_vld(s_ov), .out_rdy(s_or), .out_pkt(s_op),
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rdata,
    .idle(spm_idle), .conflict(spm_conflict));

  for (genvar y = 0; y < NY; y++) begin : g_row
    assign c_vld[y][0]  = row_vld[y];
    assign c_pkt[y][0]  = row_pkt;
    assign row_rdy[y]   = c_rdy[y][0];
    assign c_rdy[y][NX] = 1'b1;            // east end: nothing is addressed past it

    for (genvar x = 0; x < NX; x++) begin : g_col
      localparam int ID = y * NX + x;

      noc_router #(.W(DPKT_W)) u_dr (
        .clk, .rst_n, .pos_x(2'(x)), .pos_y(2'(y)), .in_vld(d_iv[y][x]), .in_rdy(d_ir[y][x]), .in_pkt(d_ip[y][x]),
        .out_vld(d_ov[y][x]), .out_rdy(d_or[y][x]), .out_pkt(d_op[y][x]), .idle(d_idle[y][x]));
      noc_router #(.W(APKT_W)) u_ar (
        .clk, .rst_n, .pos_x(2'(x)), .pos_y(2'(y)), .in_vld(a_iv[y][x]), .in_rdy(a_ir[y][x]), .in_pkt(a_ip[y][x]),
        .out_vld(a_ov[y][x]), .out_rdy(a_or[y][x]), .out_pkt(a_op[y][x]), .idle(a_idle[y][x]));

      dpkt_t dinj_pkt;
      apkt_t ainj_pkt;
      pe u_pe (
        .clk, .rst_n, .pe_id(PE_AW'(ID)),
        .ctx_in_vld(c_vld[y][x]), .ctx_in_rdy(c_rdy[y][x]), .ctx_in_pkt(c_pkt[y][x]),
        .ctx_out_vld(c_vld[y][x+1]), .ctx_out_rdy(c_rdy[y][x+1]), .ctx_out_pkt(c_pkt[y][x+1]),
        .dinj_vld(d_iv[y][x][PL]), .dinj_rdy(d_ir[y][x][PL]), .dinj_pkt,
        .dej_vld(d_ov[y][x][PL]), .dej_rdy(d_or[y][x][PL]), .dej_pkt(dpkt_t'(d_op[y][x][PL])),
        .ainj_vld(a_iv[y][x][PL]), .ainj_rdy(a_ir[y][x][PL]), .ainj_pkt,
        .aej_vld(a_ov[y][x][PL]), .aej_rdy(a_or[y][x][PL]), .aej_pkt(apkt_t'(a_op[y][x][PL])),
        .running(pe_running[ID]), .pe_done(pe_done[ID]), .ctx_idle(c_idle[ID]),
        .ram_conflict(ram_conflict[ID]));
      assign d_ip[y][x][PL] = dinj_pkt;
      assign a_ip[y][x][PL] = ainj_pkt;

      // north links
      if (y == 0) begin : g_top
        assign s_iv[x]        = d_ov[y][x][PN];
        assign s_ip[x]        = dpkt_t'(d_op[y][x][PN]);
        assign d_or[y][x][PN] = s_ir[x];
        assign d_iv[y][x][PN] = s_ov[x];
        assign d_ip[y][x][PN] = s_op[x];
        assign s_or[x]        = d_ir[y][x][PN];
        assign a_iv[y][x][PN] = 1'b0;
        assign a_ip[y][x][PN] = '0;
        assign a_or[y][x][PN] = 1'b1;
      end else begin : g_n
        assign d_iv[y][x][PN] = d_ov[y-1][x][PS];
        assign d_ip[y][x][PN] = d_op[y-1][x][PS];
        assign d_or[y][x][PN] = d_ir[y-1][x][PS];
        assign a_iv[y][x][PN] = a_ov[y-1][x][PS];
        assign a_ip[y][x][PN] = a_op[y-1][x][PS];
        assign a_or[y][x][PN] = a_ir[y-1][x][PS];
      end
      // south links
      if (y == NY - 1) begin : g_bot
        assign d_iv[y][x][PS] = 1'b0;
        assign d_ip[y][x][PS] = '0;
        assign d_or[y][x][PS] = 1'b1;
        assign a_iv[y][x][PS] = 1'b0;
        assign a_ip[y][x][PS] = '0;
        assign a_or[y][x][PS] = 1'b1;
      end else begin : g_s
        assign d_iv[y][x][PS] = d_ov[y+1][x][PN];
        assign d_ip[y][x][PS] = d_op[y+1][x][PN];
        assign d_or[y][x][PS] = d_ir[y+1][x][PN];
        assign a_iv[y][x][PS] = a_ov[y+1][x][PN];
        assign a_ip[y][x][PS] = a_op[y+1][x][PN];
        assign a_or[y][x][PS] = a_ir[y+1][x][PN];
      end
      // west links
      if (x == 0) begin : g_w0
        assign d_iv[y][x][PW] = 1'b0;
        assign d_ip[y][x][PW] = '0;
        assign d_or[y][x][PW] = 1'b1;
        assign a_iv[y][x][PW] = 1'b0;
        assign a_ip[y][x][PW] = '0;
        assign a_or[y][x][PW] = 1'b1;
      end else begin : g_w
        assign d_iv[y][x][PW] = d_ov[y][x-1][PE];
        assign d_ip[y][x][PW] = d_op[y][x-1][PE];
        assign d_or[y][x][PW] = d_ir[y][x-1][PE];
        assign a_iv[y][x][PW] = a_ov[y][x-1][PE];
        assign a_ip[y][x][PW] = a_op[y][x-1][PE];
        assign a_or[y][x][PW] = a_ir[y][x-1][PE];
      end
      // east links
      if (x == NX - 1) begin : g_e0
        assign d_iv[y][x][PE] = 1'b0;
        assign d_ip[y][x][PE] = '0;
        assign d_or[y][x][PE] = 1'b1;
        assign a_iv[y][x][PE] = 1'b0;
        assign a_ip[y][x][PE] = '0;
        assign a_or[y][x][PE] = 1'b1;
      end else begin : g_e
        assign d_iv[y][x][PE] = d_ov[y][x+1][PW];
        assign d_ip[y][x][PE] = d_op[y][x+1][PW];
        assign d_or[y][x][PE] = d_ir[y][x+1][PW];
        assign a_iv[y][x][PE] = a_ov[y][x+1][PW];
        assign a_ip[y][x][PE] = a_op[y][x+1][PW];
        assign a_or[y][x][PE] = a_ir[y][x+1][PW];
      end
    end
  end

  always_comb begin
    done = !cm_busy && spm_idle && (&pe_done) && (&c_idle);
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        if (!d_idle[y][x] || !a_idle[y][x]) done = 1'b0;
    for (int y = 0; y < NY; y++) if (c_vld[y][0]) done = 1'b0;
  end
endmodule
