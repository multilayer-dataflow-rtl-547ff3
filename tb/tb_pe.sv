// tb_pe: one PE (id 5) with behavioural networks around it. The context
// chain loads a two-node program: node 0 loads two vectors per iteration
// (LDN), multiplies by a weight held in an absolute register (MUL), keeps
// a copy (COPY_I) and sends the product to node 1 of the same PE (COPY_T),
// then stores the copy (STN);
// node 1 doubles it (ADD) and stores it (STN). The testbench network answers
// load requests from a model SPM after a random delay, loops data packets
// addressed to this PE back into the local ejection port, and loops acks
// back. A context packet for another PE must pass straight through.
// Checks the stored results against real-number fp16 arithmetic, the
// request/store counts, the forwarded context packet, and pe_done.
module tb_pe;
  import mldf_pkg::*;
  import tb_fp_pkg::*;
  localparam int IT = 10;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [3:0] pe_id = 4'd5;
  logic ctx_in_vld = 0, ctx_in_rdy, ctx_out_vld, ctx_out_rdy = 1;
  ctx_pkt_t ctx_in_pkt = '0, ctx_out_pkt;
  logic dinj_vld, dinj_rdy, dej_vld = 0, dej_rdy;
  dpkt_t dinj_pkt, dej_pkt = '0;
  logic ainj_vld, ainj_rdy, aej_vld = 0, aej_rdy;
  apkt_t ainj_pkt, aej_pkt = '0;
  logic running, pe_done, ctx_idle, ram_conflict;
  logic [VW-1:0] spm_m [4096], st_m [4096];
  logic [3:0] st_wr [4096];
  dpkt_t rsp_q [$], loop_q [$];
  apkt_t ack_q [$];
  int checks = 0, failures = 0, nld = 0, nst = 0, nfwd = 0, nack = 0;
  pe dut (.*);
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end endtask

  // network model: accept injections at random, deliver one packet per cycle
  always @(negedge clk) begin
    dinj_rdy = 1'($urandom);
    ainj_rdy = 1'($urandom);
    ctx_out_rdy = 1'($urandom);
  end
  always @(posedge clk) if (rst_n) begin
    if (dinj_vld && dinj_rdy) begin
      dpkt_t p;
      p = dinj_pkt;
      case (p.kind)
        PK_LDREQ: begin
          dpkt_t r;
          nld++;
          chk(p.rt.to_spm && p.rt.dx == 2'd1 && p.src_pe == pe_id, "load request route");
          r = '0; r.kind = PK_LDRSP; r.rg = p.rg; r.data = spm_m[p.addr[11:0]];
          rsp_q.push_back(r);
        end
        PK_ST: begin nst++; st_m[p.addr[11:0]] = p.data; st_wr[p.addr[11:0]]++; end
        PK_FLOW: begin chk(p.rt.dx == 2'd1 && p.rt.dy == 2'd1 && p.node == 4'd1, "flow target"); loop_q.push_back(p); end
        default: chk(0, "unknown packet");
      endcase
    end
    if (ainj_vld && ainj_rdy) begin
      nack++;
      chk(ainj_pkt.rt.dx == 2'd1 && ainj_pkt.rt.dy == 2'd1 && ainj_pkt.node == 4'd0, "ack target");
      ack_q.push_back(ainj_pkt);
    end
    if (ctx_out_vld && ctx_out_rdy) begin
      nfwd++;
      chk(ctx_out_pkt.pe == 4'd7 && ctx_out_pkt.data == 256'hFEED, "forwarded context packet");
    end
  end
  always @(negedge clk) begin
    dej_vld = 0; aej_vld = 0;
    if ($urandom_range(0, 1) == 0) begin
      if (rsp_q.size() > 0 && $urandom_range(0, 1) == 0) begin dej_vld = 1; dej_pkt = rsp_q.pop_front(); end
      else if (loop_q.size() > 0) begin dej_vld = 1; dej_pkt = loop_q.pop_front(); end
    end
    if (ack_q.size() > 0 && $urandom_range(0, 2) == 0) begin aej_vld = 1; aej_pkt = ack_q.pop_front(); end
  end

  task automatic ctx(ctx_kind_e k, int pe, int addr, logic [VW-1:0] d);
    @(negedge clk);
    ctx_in_vld = 1; ctx_in_pkt = '{pe: 4'(pe), kind: k, addr: 8'(addr), data: d};
    @(posedge clk); while (!ctx_in_rdy) @(posedge clk);
    @(negedge clk); ctx_in_vld = 0;
  endtask
  function automatic inst_t mk(op_e op, int rd, int ra, int rb, int imm, int tpe, int tnode);
    inst_t t;
    t = '0; t.op = op; t.rd = 8'(rd); t.ra = 8'(ra); t.rb = 8'(rb); t.imm = 17'(imm); t.tpe = 4'(tpe); t.tnode = 4'(tnode);
    return t;
  endfunction

  initial begin
    node_info_t n0, n1;
    logic [VW-1:0] w;
    inst_t prog [8];
    for (int a = 0; a < 4096; a++) begin
      for (int l = 0; l < 16; l++) spm_m[a][l*16 +: 16] = rand_h(4);
      st_wr[a] = 0;
    end
    for (int l = 0; l < 16; l++) w[l*16 +: 16] = rand_h(3);
    repeat (3) @(negedge clk); rst_n = 1;
    // node 0: Load 0..1, Cal 2, Flow 3..4, Store 7; node 1: Cal 5, Store 6
    prog[0] = mk(OP_LDN, 0, 0, 0, 0, 0, 0);
    prog[1] = mk(OP_LDN, 1, 0, 0, 1, 0, 0);
    prog[2] = mk(OP_MUL, 2, 0, 8'h80 | 31, 0, 0, 0);
    prog[3] = mk(OP_COPY_I, 4, 1, 0, 0, 0, 0);
    prog[4] = mk(OP_COPY_T, 3, 2, 0, 0, 5, 1);
    prog[5] = mk(OP_ADD, 5, 3, 3, 0, 0, 0);
    prog[6] = mk(OP_STN, 0, 5, 0, 0, 0, 0);
    prog[7] = mk(OP_STN, 0, 4, 0, 1, 0, 0);
    for (int k = 0; k < 8; k++) ctx(CTX_INST, 5, k, VW'(prog[k]));
    ctx(CTX_SIMD, 5, 8'h80 | 31, w);
    ctx(CTX_SIMD, 7, 0, 256'hFEED);
    n0 = '0; n0.total_iter = IT; n0.spm_base = 0; n0.spm_stride = 2;
    n0.head = {8'd7, 8'd3, 8'd2, 8'd0}; n0.len = {8'd1, 8'd2, 8'd1, 8'd2};
    n0.down_local = 0; n0.down_remote = 1;
    n1 = '0; n1.total_iter = IT; n1.spm_base = 2000; n1.spm_stride = 1;
    n1.head = {8'd6, 8'd0, 8'd5, 8'd0}; n1.len = {8'd1, 8'd0, 8'd1, 8'd0};
    n1.arr_per_iter = 1; n1.up_pe = 5; n1.up_node = 0;
    ctx(CTX_NODE, 5, 0, VW'(n0));
    ctx(CTX_NODE, 5, 1, VW'(n1));
    ctx(CTX_START, 5, 0, VW'(2));
    while (!pe_done) @(negedge clk);
    repeat (10) @(negedge clk);
    chk(nld == 2 * IT, $sformatf("load requests %0d", nld));
    chk(nst == 2 * IT, $sformatf("stores %0d", nst));
    chk(nack == IT, $sformatf("acks %0d", nack));
    chk(nfwd == 1, "one packet forwarded");
    for (int i = 0; i < IT; i++) begin
      logic [VW-1:0] e;
      for (int l = 0; l < 16; l++) begin
        logic [15:0] m;
        m = r2h(h2r(spm_m[2 * i][l*16 +: 16]) * h2r(w[l*16 +: 16]));
        e[l*16 +: 16] = r2h(h2r(m) + h2r(m));
      end
      chk(st_wr[2000 + i] == 1 && st_m[2000 + i] == e, $sformatf("result iteration %0d wr=%0d got=%h exp=%h", i, st_wr[2000+i], st_m[2000+i][15:0], e[15:0]));
    end
    // node 0 stores its COPY_I copy back next to the input
    for (int i = 0; i < IT; i++) chk(st_wr[2 * i + 1] == 1 && st_m[2 * i + 1] == spm_m[2 * i + 1], "COPY_I result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
