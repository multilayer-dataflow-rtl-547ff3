// tb_load_unit: random blocks of LDN/LDC instructions. The testbench holds
// the instruction RAM model, stalls the network port at random, and returns
// one response pulse per request after a random delay. Checks every request
// packet (route to the SPM port above the PE's column, source PE, target
// register {slot, reg}, row/column mode, lane, node base + offset), and that
// done comes only after the last response has arrived.
module tb_load_unit;
  import mldf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic issue_vld = 0, busy, done, nv, nr = 0, rsp = 0;
  logic [3:0] pe_id = 4'd6;
  logic [7:0] issue_head = 0, issue_len = 0, iaddr;
  logic [16:0] issue_base = 0;
  logic [1:0] issue_slot = 0;
  inst_t idata, im [256];
  dpkt_t npkt, exp_q [$];
  int checks = 0, failures = 0, ndone = 0, pending = 0, rsp_got = 0, nreq = 0;
  load_unit dut (.*);
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end endtask
  always @(posedge clk) idata <= im[iaddr];
  always @(negedge clk) begin
    rsp = 0;
    if (pending > 0 && $urandom_range(0, 2) == 0) begin rsp = 1; pending--; rsp_got++; end
    nr = 1'($urandom);
  end
  always @(posedge clk) if (rst_n) begin
    if (nv && nr) begin
      dpkt_t e;
      e = exp_q.pop_front(); nreq++;
      chk(npkt.rt.to_spm && npkt.rt.dx == pe_id[1:0] && npkt.kind == PK_LDREQ && npkt.src_pe == pe_id, "header");
      chk(npkt.rg == e.rg && npkt.col == e.col && npkt.lane == e.lane && npkt.addr == e.addr, "fields");
      pending = pending + 1;
    end
    if (done) begin ndone++; chk(pending == 0 && exp_q.size() == 0, "done after all responses"); end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 10; blk++) begin
      int head, len, slot, base;
      head = $urandom_range(0, 200); len = $urandom_range(1, 12); slot = $urandom_range(0, 3);
      base = $urandom_range(0, 60000);
      for (int k = 0; k < len; k++) begin
        inst_t t;
        dpkt_t e;
        t = '0; t.op = ($urandom_range(0, 1) != 0) ? OP_LDC : OP_LDN;
        if ($urandom_range(0, 5) == 0) t.op = OP_NOP;
        t.rd = 8'($urandom_range(0, 255)); t.imm = 17'($urandom_range(0, 4000)); t.lane = 4'($urandom);
        im[head + k] = t;
        if (t.op != OP_NOP) begin
          e = '0; e.rg = eff_reg(t.rd, 2'(slot)); e.col = (t.op == OP_LDC); e.lane = t.lane; e.addr = 17'(base) + t.imm;
          exp_q.push_back(e);
        end
      end
      ndone = 0;
      @(negedge clk); issue_vld = 1; issue_head = 8'(head); issue_len = 8'(len); issue_slot = 2'(slot); issue_base = 17'(base);
      @(negedge clk); issue_vld = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      chk(ndone == 1, $sformatf("done pulses %0d", ndone));
      chk(exp_q.size() == 0 && pending == 0, "all requests sent and answered");
    end
    $display("requests %0d responses %0d", nreq, rsp_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
