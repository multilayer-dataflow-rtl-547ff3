// tb_flow_unit: random blocks of COPY_I / COPY_T instructions with random
// SIMD RAM grants and network stalls. COPY_I must copy a register inside the
// PE; COPY_T must send the register to the target PE and node. Checks the
// register file against a reference copy and every sent packet (XY route to
// the target, kind, source, node, register, data), and one done per block.
module tb_flow_unit;
  import mldf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic issue_vld = 0, busy, done, rq, rwe, rgnt, g = 0, nv, nr = 0;
  logic [3:0] pe_id = 4'd9;
  logic [7:0] issue_head = 0, issue_len = 0, iaddr;
  logic [1:0] issue_slot = 0;
  inst_t idata, im [256];
  logic [6:0] raddr;
  logic [VW-1:0] rwdata, rrdata, ram [128], model [128];
  dpkt_t npkt, exp_q [$];
  int checks = 0, failures = 0, ndone = 0, nsent = 0;
  flow_unit dut (.*);
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end endtask
  assign rgnt = rq & g;
  always @(negedge clk) begin g = ($urandom_range(0, 3) != 0); nr = 1'($urandom); end
  always @(posedge clk) begin
    idata <= im[iaddr];
    if (rq && rgnt) begin if (rwe) ram[raddr] <= rwdata; else rrdata <= ram[raddr]; end
    if (rst_n && nv && nr) begin
      dpkt_t e;
      e = exp_q.pop_front(); nsent++;
      chk(npkt.kind == PK_FLOW && npkt.src_pe == pe_id && !npkt.rt.to_spm, "header");
      chk(npkt.rt.dx == e.rt.dx && npkt.rt.dy == e.rt.dy && npkt.node == e.node && npkt.rg == e.rg && npkt.data == e.data,
          "packet fields");
    end
    if (done) ndone++;
  end
  initial begin
    for (int r = 0; r < 128; r++) begin ram[r] = {8{$urandom}}; model[r] = ram[r]; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 12; blk++) begin
      int head, len, slot;
      head = $urandom_range(0, 200); len = $urandom_range(1, 16); slot = $urandom_range(0, 3);
      for (int k = 0; k < len; k++) begin
        inst_t t;
        t = '0; t.op = ($urandom_range(0, 1) != 0) ? OP_COPY_I : OP_COPY_T;
        if ($urandom_range(0, 6) == 0) t.op = OP_MUL;
        t.rd = 8'($urandom_range(0, 255)); t.ra = 8'($urandom_range(0, 255));
        t.tpe = 4'($urandom); t.tnode = 4'($urandom);
        im[head + k] = t;
        if (t.op == OP_COPY_I) model[eff_reg(t.rd, 2'(slot))] = model[eff_reg(t.ra, 2'(slot))];
        else if (t.op == OP_COPY_T) begin
          dpkt_t e;
          e = '0; e.rt.dx = t.tpe[1:0]; e.rt.dy = t.tpe[3:2]; e.node = t.tnode; e.rg = eff_reg(t.rd, 2'(slot));
          e.data = model[eff_reg(t.ra, 2'(slot))];
          exp_q.push_back(e);
        end
      end
      ndone = 0;
      @(negedge clk); issue_vld = 1; issue_head = 8'(head); issue_len = 8'(len); issue_slot = 2'(slot);
      @(negedge clk); issue_vld = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      chk(ndone == 1, $sformatf("done pulses %0d", ndone));
      chk(exp_q.size() == 0, "all packets sent");
      for (int r = 0; r < 128; r++) chk(ram[r] == model[r], $sformatf("blk %0d reg %0d", blk, r));
    end
    $display("packets %0d", nsent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
