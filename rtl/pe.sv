// pe: one processing element of the dataflow array.
//
// Contents (after the PE diagram of the paper): a context router, the
// control unit with graph node table and block scheduler, the instruction
// block RAM, the SIMD RAM with its slice arbiter, and four decoupled
// function units - Load, Cal, Flow and Store - each running whole micro
// code blocks. The data and req/ack mesh routers sit next to the PE in the
// array; this module has one local injection and one ejection port for
// each network.
//
// SIMD RAM ports, highest priority first: 0 network ejection (load
// responses and incoming COPY_T vectors, always granted so the mesh never
// stalls on a PE), 1 context (static weights), 2 Flow, 3 Cal, 4 Store.
// Data injection is shared by Flow, Store and Load in that fixed priority.
// Context packets: CTX_NODE writes the node table, CTX_INST the
// instruction RAM, CTX_SIMD a SIMD RAM vector, CTX_START starts the PE
// with the given number of nodes. pe_done rises when every node finished.
module pe
  import mldf_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic [PE_AW-1:0] pe_id,  // position in the array, y*NX + x
  // context chain
  input  logic      ctx_in_vld,
  output logic      ctx_in_rdy,
  input  ctx_pkt_t  ctx_in_pkt,
  output logic      ctx_out_vld,
  input  logic      ctx_out_rdy,
  output ctx_pkt_t  ctx_out_pkt,
  // data network local port
  output logic      dinj_vld,
  input  logic      dinj_rdy,
  output dpkt_t     dinj_pkt,
  input  logic      dej_vld,
  output logic      dej_rdy,
  input  dpkt_t     dej_pkt,
  // req/ack network local port
  output logic      ainj_vld,
  input  logic      ainj_rdy,
  output apkt_t     ainj_pkt,
  input  logic      aej_vld,
  output logic      aej_rdy,
  input  apkt_t     aej_pkt,
  output logic      running,
  output logic      pe_done,
  output logic      ctx_idle,
  output logic      ram_conflict   // a function unit waited for a SIMD RAM slice
);

  // ---------------- context ----------------
  logic     loc_vld, loc_rdy;
  ctx_pkt_t loc_pkt;
  context_router u_ctx (
    .clk, .rst_n, .pe_id(pe_id),
    .in_vld(ctx_in_vld), .in_rdy(ctx_in_rdy), .in_pkt(ctx_in_pkt),
    .out_vld(ctx_out_vld), .out_rdy(ctx_out_rdy), .out_pkt(ctx_out_pkt),
    .loc_vld, .loc_rdy, .loc_pkt, .idle(ctx_idle));

  // ---------------- SIMD RAM ----------------
  localparam int NP = 5;
  logic [NP-1:0]              rq, rwe, rgnt;
  logic [NP-1:0][REG_AW-1:0]  raddr;
  logic [NP-1:0][VW-1:0]      rwdata, rrdata;
  simd_ram #(.DEPTH(1 << REG_AW), .NSLICE(4), .NP(NP), .W(VW)) u_ram (
    .clk, .req(rq), .we(rwe), .addr(raddr), .wdata(rwdata), .gnt(rgnt), .rdata(rrdata));
  assign ram_conflict = |(rq[4:2] & ~rgnt[4:2]);

  // port 0: network ejection
  assign dej_rdy   = 1'b1;
  assign rq[0]     = dej_vld && (dej_pkt.kind == PK_FLOW || dej_pkt.kind == PK_LDRSP);
  assign rwe[0]    = 1'b1;
  assign raddr[0]  = dej_pkt.rg;
  assign rwdata[0] = dej_pkt.data;
  // port 1: context weights
  assign rq[1]     = loc_vld && loc_pkt.kind == CTX_SIMD;
  assign rwe[1]    = 1'b1;
  assign raddr[1]  = loc_pkt.addr[REG_AW-1:0];
  assign rwdata[1] = loc_pkt.data;
  assign loc_rdy   = (loc_pkt.kind == CTX_SIMD) ? rgnt[1] : 1'b1;

  // ---------------- instruction RAM ----------------
  logic [NUNIT-1:0][IRAM_AW-1:0] iaddr;
  inst_t [NUNIT-1:0]             idata;
  inst_block_ram #(.DEPTH(1 << IRAM_AW)) u_iram (
    .clk, .we(loc_vld && loc_pkt.kind == CTX_INST), .waddr(loc_pkt.addr[IRAM_AW-1:0]),
    .wdata(inst_t'(loc_pkt.data[$bits(inst_t)-1:0])), .raddr(iaddr), .rdata(idata));

  // ---------------- control unit ----------------
  logic [NUNIT-1:0]              issue_vld, unit_busy, unit_done;
  logic [NUNIT-1:0][NODE_AW-1:0] issue_node;
  logic [NUNIT-1:0][ITER_W-1:0]  issue_iter;
  logic [NUNIT-1:0][IRAM_AW-1:0] issue_head, issue_len;
  logic [NUNIT-1:0][SPM_AW-1:0]  issue_base;
  logic [NUNIT-1:0][SLOT_AW-1:0] issue_slot;
  logic                          ack_out_vld;
  logic [PE_AW-1:0]              ack_out_pe;
  logic [NODE_AW-1:0]            ack_out_node;
  logic                          ld_rsp;

  control_unit u_cu (
    .clk, .rst_n,
    .nw_en(loc_vld && loc_pkt.kind == CTX_NODE), .nw_idx(loc_pkt.addr[NODE_AW-1:0]),
    .nw_info(node_info_t'(loc_pkt.data[$bits(node_info_t)-1:0])),
    .start(loc_vld && loc_pkt.kind == CTX_START), .start_nnodes(loc_pkt.data[NODE_AW:0]),
    .issue_vld, .issue_node, .issue_iter, .issue_head, .issue_len, .issue_base, .issue_slot,
    .unit_busy, .unit_done,
    .arr_pulse(dej_vld && dej_pkt.kind == PK_FLOW), .arr_node(dej_pkt.node),
    .ack_in_pulse(aej_vld), .ack_in_node(aej_pkt.node),
    .ack_out_vld, .ack_out_pe, .ack_out_node, .ack_out_rdy(ainj_rdy),
    .running, .pe_done);
  assign ld_rsp = dej_vld && dej_pkt.kind == PK_LDRSP;

  // ---------------- req/ack network ----------------
  assign ainj_vld      = ack_out_vld;
  assign ainj_pkt.rt   = route_to_pe(ack_out_pe);
  assign ainj_pkt.node = ack_out_node;
  assign aej_rdy       = 1'b1;

  // ---------------- function units ----------------
  logic  ld_nv, fl_nv, st_nv, ld_nr, fl_nr, st_nr;
  dpkt_t ld_pkt, fl_pkt, st_pkt;

  load_unit u_load (
    .clk, .rst_n, .pe_id(pe_id),
    .issue_vld(issue_vld[U_LOAD]), .issue_head(issue_head[U_LOAD]), .issue_len(issue_len[U_LOAD]),
    .issue_base(issue_base[U_LOAD]), .issue_slot(issue_slot[U_LOAD]),
    .busy(unit_busy[U_LOAD]), .done(unit_done[U_LOAD]),
    .iaddr(iaddr[U_LOAD]), .idata(idata[U_LOAD]),
    .nv(ld_nv), .nr(ld_nr), .npkt(ld_pkt), .rsp(ld_rsp));

  cal_unit u_cal (
    .clk, .rst_n,
    .issue_vld(issue_vld[U_CAL]), .issue_head(issue_head[U_CAL]), .issue_len(issue_len[U_CAL]),
    .issue_slot(issue_slot[U_CAL]),
    .busy(unit_busy[U_CAL]), .done(unit_done[U_CAL]),
    .iaddr(iaddr[U_CAL]), .idata(idata[U_CAL]),
    .rq(rq[3]), .rwe(rwe[3]), .raddr(raddr[3]), .rwdata(rwdata[3]), .rgnt(rgnt[3]), .rrdata(rrdata[3]));

  flow_unit u_flow (
    .clk, .rst_n, .pe_id(pe_id),
    .issue_vld(issue_vld[U_FLOW]), .issue_head(issue_head[U_FLOW]), .issue_len(issue_len[U_FLOW]),
    .issue_slot(issue_slot[U_FLOW]),
    .busy(unit_busy[U_FLOW]), .done(unit_done[U_FLOW]),
    .iaddr(iaddr[U_FLOW]), .idata(idata[U_FLOW]),
    .rq(rq[2]), .rwe(rwe[2]), .raddr(raddr[2]), .rwdata(rwdata[2]), .rgnt(rgnt[2]), .rrdata(rrdata[2]),
    .nv(fl_nv), .nr(fl_nr), .npkt(fl_pkt));

  store_unit u_store (
    .clk, .rst_n, .pe_id(pe_id),
    .issue_vld(issue_vld[U_STORE]), .issue_head(issue_head[U_STORE]), .issue_len(issue_len[U_STORE]),
    .issue_base(issue_base[U_STORE]), .issue_slot(issue_slot[U_STORE]),
    .busy(unit_busy[U_STORE]), .done(unit_done[U_STORE]),
    .iaddr(iaddr[U_STORE]), .idata(idata[U_STORE]),
    .rq(rq[4]), .raddr(raddr[4]), .rgnt(rgnt[4]), .rrdata(rrdata[4]),
    .nv(st_nv), .nr(st_nr), .npkt(st_pkt));
  assign rwe[4]    = 1'b0;
  assign rwdata[4] = '0;

  // data injection: Flow > Store > Load
  always_comb begin
    fl_nr = 1'b0;
    st_nr = 1'b0;
    ld_nr = 1'b0;
    dinj_vld = fl_nv || st_nv || ld_nv;
    if (fl_nv)      begin dinj_pkt = fl_pkt; fl_nr = dinj_rdy; end
    else if (st_nv) begin dinj_pkt = st_pkt; st_nr = dinj_rdy; end
    else            begin dinj_pkt = ld_pkt; ld_nr = dinj_rdy; end
  end

  // the network write port is never refused
  assert property (@(posedge clk) disable iff (!rst_n) rq[0] |-> rgnt[0]);
endmodule
