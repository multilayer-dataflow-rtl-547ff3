// tb_store_unit: random blocks of STN/STC instructions with random SIMD RAM
// grants and network stalls. Checks every store packet (route to the SPM
// port above the PE's column, kind, row/column mode, lane, node base +
// offset, register data) and one done per block.
module tb_store_unit;
  import mldf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic issue_vld = 0, busy, done, rq, rgnt, g = 0, nv, nr = 0;
  logic [3:0] pe_id = 4'd14;
  logic [7:0] issue_head = 0, issue_len = 0, iaddr;
  logic [16:0] issue_base = 0;
  logic [1:0] issue_slot = 0;
  inst_t idata, im [256];
  logic [6:0] raddr;
  logic [VW-1:0] rrdata, ram [128];
  dpkt_t npkt, exp_q [$];
  int checks = 0, failures = 0, ndone = 0, nsent = 0;
  store_unit dut (.*);
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end endtask
  assign rgnt = rq & g;
  always @(negedge clk) begin g = ($urandom_range(0, 3) != 0); nr = 1'($urandom); end
  always @(posedge clk) begin
    idata <= im[iaddr];
    if (rq && rgnt) rrdata <= ram[raddr];
    if (rst_n && nv && nr) begin
      dpkt_t e;
      e = exp_q.pop_front(); nsent++;
      chk(npkt.kind == PK_ST && npkt.rt.to_spm && npkt.rt.dx == pe_id[1:0] && npkt.src_pe == pe_id, "header");
      chk(npkt.col == e.col && npkt.lane == e.lane && npkt.addr == e.addr && npkt.data == e.data, "packet fields");
    end
    if (done) ndone++;
  end
  initial begin
    for (int r = 0; r < 128; r++) ram[r] = {8{$urandom}};
    repeat (3) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 12; blk++) begin
      int head, len, slot, base;
      head = $urandom_range(0, 200); len = $urandom_range(1, 16); slot = $urandom_range(0, 3);
      base = $urandom_range(0, 100000);
      for (int k = 0; k < len; k++) begin
        inst_t t;
        t = '0; t.op = ($urandom_range(0, 1) != 0) ? OP_STC : OP_STN;
        if ($urandom_range(0, 6) == 0) t.op = OP_LDN;
        t.ra = 8'($urandom_range(0, 255)); t.imm = 17'($urandom_range(0, 9000)); t.lane = 4'($urandom);
        im[head + k] = t;
        if (t.op != OP_LDN) begin
          dpkt_t e;
          e = '0; e.col = (t.op == OP_STC); e.lane = t.lane; e.addr = 17'(base) + t.imm;
          e.data = ram[eff_reg(t.ra, 2'(slot))];
          exp_q.push_back(e);
        end
      end
      ndone = 0;
      @(negedge clk); issue_vld = 1; issue_head = 8'(head); issue_len = 8'(len); issue_slot = 2'(slot); issue_base = 17'(base);
      @(negedge clk); issue_vld = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      chk(ndone == 1, $sformatf("done pulses %0d", ndone));
      chk(exp_q.size() == 0, "all packets sent");
    end
    $display("packets %0d", nsent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
