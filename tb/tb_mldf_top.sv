// tb_mldf_top: end-to-end test of the whole array at its default size.
//
// Stage 1 runs a 32-point real butterfly product (BPMM: five butterfly
// matrices with random fp16 weights) on the 4x4 PE array: every PE holds
// one butterfly node per layer (5 layer nodes), loads its two input
// elements row-wise from the SPM, swaps half of each layer's outputs with
// the PE at distance 1, 2, 4, 8 by COPY_T and keeps the other half by
// COPY_I, and stores the final pair. Each element is a SIMD16 vector (16
// batch lanes) and ITER iterations stream through the graph. After the
// done barrier, stage 2 is an element-wise (twiddle-style) layer that
// gathers the stage-1 result column-wise (LDC), multiplies by per-element
// factors and scatters it back column-wise (STC).
//
// The expected values come from a testbench model: real arithmetic with
// fp16 rounding after every multiply and add, and the SPM line mapping
// written out independently. Results are read back through the external
// SPM port. The testbench also counts the mechanisms the run must exercise
// (row/column loads and stores, COPY_I, COPY_T, credits on the req/ack
// network, iterations overlapping in a PE, SIMD RAM and SPM bank conflicts,
// two barriers) and counts a failure for any that never happened.
module tb_mldf_top;
  import mldf_pkg::*;
  import tb_fp_pkg::*;

  localparam int ITER  = 8;
  localparam int NPT   = 32;
  localparam int NL    = 5;                 // butterfly layers
  localparam int IN_B  = 0;
  localparam int OUT_B = 1024;
  localparam int OUT2  = 2048;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic                cm_wr_en = 0, cm_go = 0, ext_req = 0, ext_we = 0;
  logic [9:0]          cm_wr_addr = 0, cm_base = 0;
  logic [10:0]         cm_count = 0;
  ctx_pkt_t            cm_wr_data = '0;
  logic [SPM_AW-1:0]   ext_addr = 0;
  logic [VW-1:0]       ext_wdata = 0, ext_rdata;
  logic                ext_gnt, cm_busy, done;
  logic [NPE-1:0]      pe_running;

  mldf_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- testbench model ----------------
  logic [15:0] spm_model [int];          // key: entry*16 + lane
  logic [15:0] w [NPE][NL][4];
  logic [15:0] tw [NPE][2];

  function automatic logic [15:0] fmul(logic [15:0] a, logic [15:0] b);
    return r2h(h2r(a) * h2r(b));
  endfunction
  function automatic logic [15:0] fadd(logic [15:0] a, logic [15:0] b);
    return r2h(h2r(a) + h2r(b));
  endfunction
  function automatic int ins_bit(int p, int l, int b);
    return ((p >> l) << (l + 1)) | (b << l) | (p & ((1 << l) - 1));
  endfunction
  function automatic int rem_bit(int e, int l);
    return ((e >> (l + 1)) << l) | (e & ((1 << l) - 1));
  endfunction
  function automatic logic [15:0] rand_w();
    return {1'($urandom_range(0, 1)), 5'($urandom_range(13, 14)), 10'($urandom_range(0, 1023))};
  endfunction

  // ---------------- context building ----------------
  ctx_pkt_t ctxq[$];
  int       ipc;

  function automatic rfield_t R(int r);  return 8'(r); endfunction
  function automatic rfield_t WABS(int idx);
    return 8'h80 | 8'((idx / 12) * 32 + 20 + idx % 12);
  endfunction
  task automatic put_inst(int p, inst_t i);
    ctx_pkt_t c;
    c = '0; c.pe = 4'(p); c.kind = CTX_INST; c.addr = 8'(ipc); c.data = VW'(i);
    ctxq.push_back(c);
    ipc++;
  endtask
  function automatic inst_t I(op_e op, rfield_t rd, rfield_t ra, rfield_t rb,
                              int tpe = 0, int tnode = 0, int imm = 0, int lane = 0);
    inst_t i;
    i = '0; i.op = op; i.rd = rd; i.ra = ra; i.rb = rb;
    i.tpe = 4'(tpe); i.tnode = 4'(tnode); i.imm = SPM_AW'(imm); i.lane = 4'(lane);
    return i;
  endfunction
  task automatic put_node(int p, int n, node_info_t ni);
    ctx_pkt_t c;
    c = '0; c.pe = 4'(p); c.kind = CTX_NODE; c.addr = 8'(n); c.data = VW'(ni);
    ctxq.push_back(c);
  endtask
  task automatic put_vec(int p, int a, logic [15:0] v);
    ctx_pkt_t c;
    c = '0; c.pe = 4'(p); c.kind = CTX_SIMD; c.addr = 8'(a); c.data = {SIMD{v}};
    ctxq.push_back(c);
  endtask
  task automatic put_start(int p, int nn);
    ctx_pkt_t c;
    c = '0; c.pe = 4'(p); c.kind = CTX_START; c.data = VW'(nn);
    ctxq.push_back(c);
  endtask

  task automatic build_stage1();
    ctxq.delete();
    for (int p = 0; p < NPE; p++) begin
      ipc = 0;
      for (int l = 0; l < NL; l++)
        for (int k = 0; k < 4; k++) begin
          w[p][l][k] = rand_w();
          put_vec(p, int'(WABS(l * 4 + k) & 8'h7f), w[p][l][k]);
        end
      for (int l = 0; l < NL; l++) begin
        node_info_t ni;
        int x1, x2, y1, y2;
        x1 = 4 * l; x2 = 4 * l + 1; y1 = 4 * l + 2; y2 = 4 * l + 3;
        ni = '0;
        ni.total_iter = ITER;
        ni.spm_stride = NPT;
        if (l == 0) begin
          ni.spm_base = IN_B;
          ni.head[U_LOAD] = 8'(ipc); ni.len[U_LOAD] = 2;
          put_inst(p, I(OP_LDN, R(x1), 0, 0, 0, 0, ins_bit(p, 0, 0)));
          put_inst(p, I(OP_LDN, R(x2), 0, 0, 0, 0, ins_bit(p, 0, 1)));
        end
        ni.head[U_CAL] = 8'(ipc); ni.len[U_CAL] = 4;
        put_inst(p, I(OP_MUL,  R(y1), R(x1), WABS(4 * l + 0)));
        put_inst(p, I(OP_MADD, R(y1), R(x2), WABS(4 * l + 1)));
        put_inst(p, I(OP_MUL,  R(y2), R(x1), WABS(4 * l + 2)));
        put_inst(p, I(OP_MADD, R(y2), R(x2), WABS(4 * l + 3)));
        if (l < NL - 1) begin
          ni.head[U_FLOW] = 8'(ipc); ni.len[U_FLOW] = 2;
          ni.down_local = 1'b1; ni.down_remote = 1'b1;
          for (int b = 0; b < 2; b++) begin
            int e, q, pos;
            e   = ins_bit(p, l, b);
            q   = rem_bit(e, l + 1);
            pos = (e >> (l + 1)) & 1;
            if (q == p) put_inst(p, I(OP_COPY_I, R(4 * (l + 1) + pos), R(b ? y2 : y1), 0));
            else        put_inst(p, I(OP_COPY_T, R(4 * (l + 1) + pos), R(b ? y2 : y1), 0, q, l + 1));
          end
        end else begin
          ni.spm_base = OUT_B;
          ni.head[U_STORE] = 8'(ipc); ni.len[U_STORE] = 2;
          put_inst(p, I(OP_STN, 0, R(y1), 0, 0, 0, ins_bit(p, l, 0)));
          put_inst(p, I(OP_STN, 0, R(y2), 0, 0, 0, ins_bit(p, l, 1)));
        end
        if (l > 0) begin
          ni.arr_per_iter = 1;
          ni.up_pe   = 4'(p ^ (1 << (l - 1)));
          ni.up_node = 4'(l - 1);
        end
        put_node(p, l, ni);
      end
    end
    for (int p = 0; p < NPE; p++) put_start(p, NL);
  endtask

  // stage 2: PE p handles lane p; iteration it gathers row (OUT_B/32 + it),
  // bank pairs {0,1} and {2,3}
  task automatic build_stage2();
    ctxq.delete();
    for (int p = 0; p < NPE; p++) begin
      node_info_t ni;
      ipc = 0;
      for (int k = 0; k < 2; k++) begin
        tw[p][k] = rand_w();
        put_vec(p, int'(WABS(k) & 8'h7f), tw[p][k]);
      end
      ni = '0;
      ni.total_iter = 2;
      ni.spm_base   = OUT_B;
      ni.spm_stride = NPT;
      ni.head[U_LOAD] = 8'(ipc); ni.len[U_LOAD] = 2;
      put_inst(p, I(OP_LDC, R(0), 0, 0, 0, 0, 0, p));
      put_inst(p, I(OP_LDC, R(1), 0, 0, 0, 0, 2, p));
      ni.head[U_CAL] = 8'(ipc); ni.len[U_CAL] = 2;
      put_inst(p, I(OP_MUL, R(2), R(0), WABS(0)));
      put_inst(p, I(OP_MUL, R(3), R(1), WABS(1)));
      ni.head[U_STORE] = 8'(ipc); ni.len[U_STORE] = 2;
      put_inst(p, I(OP_STC, 0, R(2), 0, 0, 0, OUT2 - OUT_B, p));
      put_inst(p, I(OP_STC, 0, R(3), 0, 0, 0, OUT2 - OUT_B + 2, p));
      put_node(p, 0, ni);
    end
    for (int p = 0; p < NPE; p++) put_start(p, 1);
  endtask

  task automatic send_ctx();
    foreach (ctxq[i]) begin
      @(negedge clk);
      cm_wr_en = 1; cm_wr_addr = 10'(i); cm_wr_data = ctxq[i];
    end
    @(negedge clk);
    cm_wr_en = 0;
    cm_go = 1; cm_base = 0; cm_count = 11'(ctxq.size());
    @(negedge clk);
    cm_go = 0;
    @(negedge clk);
    while (cm_busy) @(negedge clk);
  endtask

  task automatic ext_write(int a, logic [VW-1:0] d);
    @(negedge clk);
    ext_req = 1; ext_we = 1; ext_addr = SPM_AW'(a); ext_wdata = d;
    @(negedge clk);
    ext_req = 0; ext_we = 0;
  endtask
  task automatic ext_read(int a, output logic [VW-1:0] d);
    @(negedge clk);
    ext_req = 1; ext_we = 0; ext_addr = SPM_AW'(a);
    @(negedge clk);
    ext_req = 0;
    @(negedge clk);
    d = ext_rdata;
  endtask

  // ---------------- mechanism counters ----------------
  int n_ldn = 0, n_ldc = 0, n_stn = 0, n_stc = 0, n_copy_i = 0, n_copy_t = 0, n_ack = 0;
  int n_ram_conf = 0, n_bank_conf = 0, n_overlap = 0, n_barrier = 0;
  logic done_q = 0;
  always @(posedge clk) if (rst_n) begin
    for (int x = 0; x < NX; x++) if (dut.s_iv[x] && dut.s_ir[x]) begin
      if (dut.s_ip[x].kind == PK_LDREQ) begin if (dut.s_ip[x].col) n_ldc++; else n_ldn++; end
      if (dut.s_ip[x].kind == PK_ST)    begin if (dut.s_ip[x].col) n_stc++; else n_stn++; end
    end
    if (dut.spm_conflict) n_bank_conf++;
    done_q <= done;
    if (done && !done_q) n_barrier++;
  end
  for (genvar g = 0; g < NPE; g++) begin : g_mon
    logic [NUNIT-1:0][ITER_W-1:0] it;
    always @(posedge clk) if (rst_n) begin
      automatic logic ov = 1'b0;
      if (dut.g_row[g / NX].g_col[g % NX].u_pe.rq[2] && dut.g_row[g / NX].g_col[g % NX].u_pe.rwe[2] &&
          dut.g_row[g / NX].g_col[g % NX].u_pe.rgnt[2]) n_copy_i++;
      if (dut.g_row[g / NX].g_col[g % NX].u_pe.fl_nv && dut.g_row[g / NX].g_col[g % NX].u_pe.fl_nr) n_copy_t++;
      if (dut.g_row[g / NX].g_col[g % NX].u_pe.ainj_vld && dut.g_row[g / NX].g_col[g % NX].u_pe.ainj_rdy) n_ack++;
      if (dut.g_row[g / NX].g_col[g % NX].u_pe.ram_conflict) n_ram_conf++;
      for (int u = 0; u < NUNIT; u++)
        if (dut.g_row[g / NX].g_col[g % NX].u_pe.issue_vld[u]) it[u] <= dut.g_row[g / NX].g_col[g % NX].u_pe.issue_iter[u];
      for (int u = 0; u < NUNIT; u++)
        for (int v = u + 1; v < NUNIT; v++)
          if (dut.g_row[g / NX].g_col[g % NX].u_pe.unit_busy[u] && dut.g_row[g / NX].g_col[g % NX].u_pe.unit_busy[v] &&
              it[u] != it[v]) ov = 1'b1;
      if (ov) n_overlap++;
    end
  end

  task automatic need(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    else $display("  %-28s %0d", name, n);
  endtask

  // ---------------- the run ----------------
  logic [15:0] x   [ITER][NPT][SIMD];
  logic [15:0] ref1[ITER][NPT][SIMD];

  initial begin
    logic [VW-1:0] d;
    longint t0, t1;
    repeat (5) @(negedge clk);
    rst_n = 1;

    // inputs: entry IN_B + it*32 + e, lane = batch
    for (int it = 0; it < ITER; it++)
      for (int e = 0; e < NPT; e++) begin
        for (int l = 0; l < SIMD; l++) begin
          x[it][e][l] = rand_h(2);
          d[l * DW +: DW] = x[it][e][l];
        end
        ext_write(IN_B + it * NPT + e, d);
      end

    build_stage1();
    send_ctx();
    t0 = cyc;
    while (!done) @(negedge clk);
    t1 = cyc;
    $display("stage 1: %0d context words, %0d cycles after context", ctxq.size(), t1 - t0);

    // reference of stage 1
    for (int it = 0; it < ITER; it++)
      for (int l = 0; l < SIMD; l++) begin
        logic [15:0] v [NPT];
        logic [15:0] nv[NPT];
        for (int e = 0; e < NPT; e++) v[e] = x[it][e][l];
        for (int ly = 0; ly < NL; ly++) begin
          for (int p = 0; p < NPE; p++) begin
            int e0, e1;
            e0 = ins_bit(p, ly, 0); e1 = ins_bit(p, ly, 1);
            nv[e0] = fadd(fmul(v[e0], w[p][ly][0]), fmul(v[e1], w[p][ly][1]));
            nv[e1] = fadd(fmul(v[e0], w[p][ly][2]), fmul(v[e1], w[p][ly][3]));
          end
          v = nv;
        end
        for (int e = 0; e < NPT; e++) ref1[it][e][l] = v[e];
      end
    for (int it = 0; it < ITER; it++)
      for (int e = 0; e < NPT; e++) begin
        ext_read(OUT_B + it * NPT + e, d);
        for (int l = 0; l < SIMD; l++) begin
          spm_model[(OUT_B + it * NPT + e) * 16 + l] = ref1[it][e][l];
          checks++;
          if (d[l * DW +: DW] !== ref1[it][e][l]) begin
            failures++;
            if (failures < 10) $display("FAIL stage1 it=%0d e=%0d lane=%0d got %h exp %h",
                                        it, e, l, d[l * DW +: DW], ref1[it][e][l]);
          end
        end
      end

    // stage 2 after the barrier
    build_stage2();
    send_ctx();
    t0 = cyc;
    while (!done) @(negedge clk);
    $display("stage 2: %0d cycles after context", cyc - t0);
    for (int p = 0; p < NPE; p++)
      for (int it = 0; it < 2; it++)
        for (int k = 0; k < 2; k++)
          for (int j = 0; j < SIMD; j++) begin
            int row, bank, line, src, dst;
            logic [15:0] expv;
            row  = OUT_B / 32 + it;
            bank = (2 * k + j / 8) % 4;
            line = j % 8;
            src  = (row << 5) | (line << 2) | bank;
            dst  = ((row + (OUT2 - OUT_B) / 32) << 5) | (line << 2) | bank;
            expv = fmul(spm_model[src * 16 + p], tw[p][k]);
            spm_model[dst * 16 + p] = expv;
          end
    for (int it = 0; it < 2; it++)
      for (int e = 0; e < NPT; e++) begin
        ext_read(OUT2 + it * NPT + e, d);
        for (int l = 0; l < SIMD; l++) begin
          checks++;
          if (d[l * DW +: DW] !== spm_model[(OUT2 + it * NPT + e) * 16 + l]) begin
            failures++;
            if (failures < 20) $display("FAIL stage2 entry=%0d lane=%0d got %h exp %h",
                                        OUT2 + it * NPT + e, l, d[l * DW +: DW],
                                        spm_model[(OUT2 + it * NPT + e) * 16 + l]);
          end
        end
      end

    $display("mechanisms:");
    need("row-wise load (LDN)", n_ldn);
    need("column-wise load (LDC)", n_ldc);
    need("row-wise store (STN)", n_stn);
    need("column-wise store (STC)", n_stc);
    need("COPY_I inner flow", n_copy_i);
    need("COPY_T trans flow", n_copy_t);
    need("req/ack credits", n_ack);
    need("iterations overlapping", n_overlap);
    need("SIMD RAM slice conflict", n_ram_conf);
    need("SPM bank conflict", n_bank_conf);
    checks++;
    if (n_barrier != 2) begin failures++; $display("FAIL barriers seen %0d, expected 2", n_barrier); end
    checks++;
    if (n_ldn != ITER * NPT || n_stn != ITER * NPT || n_copy_t != ITER * NPE * 4 ||
        n_copy_i != ITER * NPE * 4 || n_ack != ITER * NPE * 4 || n_ldc != 64 || n_stc != 64) begin
      failures++;
      $display("FAIL counts ldn=%0d stn=%0d copy_t=%0d copy_i=%0d ack=%0d ldc=%0d stc=%0d", n_ldn, n_stn, n_copy_t, n_copy_i, n_ack, n_ldc, n_stc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
