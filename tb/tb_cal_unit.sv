// tb_cal_unit: runs random blocks of MADD/MUL/ADD/SUB instructions (with
// some non-Cal instructions that must be skipped) on the Cal unit. The
// testbench models the instruction RAM (registered read) and the SIMD RAM
// port (random grant, 1-cycle read). A reference copy of the register file
// is updated with real-number fp16 arithmetic, one rounding per operation.
// Checks the whole register file after each block, and that done pulses once.
module tb_cal_unit;
  import mldf_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic issue_vld = 0, busy, done, rq, rwe, rgnt, g = 0;
  logic [7:0] issue_head = 0, issue_len = 0, iaddr;
  logic [1:0] issue_slot = 0;
  inst_t idata, im [256];
  logic [6:0] raddr;
  logic [VW-1:0] rwdata, rrdata, ram [128], model [128];
  int checks = 0, failures = 0, ndone = 0;
  cal_unit dut (.*);
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end endtask
  assign rgnt = rq & g;
  always @(negedge clk) g = ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    idata <= im[iaddr];
    if (rq && rgnt) begin if (rwe) ram[raddr] <= rwdata; else rrdata <= ram[raddr]; end
    if (done) ndone++;
  end
  function automatic logic [15:0] f(op_e o, logic [15:0] a, b, c);
    case (o)
      OP_MADD: return r2h(h2r(c) + h2r(r2h(h2r(a) * h2r(b))));
      OP_MUL:  return r2h(h2r(a) * h2r(b));
      OP_ADD:  return r2h(h2r(a) + h2r(b));
      default: return r2h(h2r(a) - h2r(b));
    endcase
  endfunction
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 12; blk++) begin
      int head, len, slot;
      // fresh operands per block keep results finite
      for (int r = 0; r < 128; r++) begin
        for (int l = 0; l < 16; l++) ram[r][l*16 +: 16] = rand_h(4);
        model[r] = ram[r];
      end
      head = $urandom_range(0, 200); len = $urandom_range(1, 20); slot = $urandom_range(0, 3);
      for (int k = 0; k < len; k++) begin
        inst_t t;
        op_e ops [5] = '{OP_MADD, OP_MUL, OP_ADD, OP_SUB, OP_COPY_I};
        t = '0;
        t.op = ops[$urandom_range(0, 4)];
        t.rd = 8'($urandom_range(0, 31)) | ($urandom_range(0, 4) == 0 ? 8'h80 : 8'h00);
        t.ra = 8'($urandom_range(0, 31)) | ($urandom_range(0, 4) == 0 ? 8'h80 : 8'h00);
        t.rb = 8'($urandom_range(0, 31));
        im[head + k] = t;
        if (t.op != OP_COPY_I) begin
          logic [VW-1:0] a, b, c, y;
          a = model[eff_reg(t.ra, 2'(slot))]; b = model[eff_reg(t.rb, 2'(slot))]; c = model[eff_reg(t.rd, 2'(slot))];
          for (int l = 0; l < 16; l++) y[l*16 +: 16] = f(t.op, a[l*16 +: 16], b[l*16 +: 16], c[l*16 +: 16]);
          model[eff_reg(t.rd, 2'(slot))] = y;
        end
      end
      ndone = 0;
      @(negedge clk); issue_vld = 1; issue_head = 8'(head); issue_len = 8'(len); issue_slot = 2'(slot);
      @(negedge clk); issue_vld = 0;
      chk(busy, "busy after issue");
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      chk(ndone == 1, $sformatf("done pulses %0d", ndone));
      for (int r = 0; r < 128; r++) chk(ram[r] == model[r], $sformatf("blk %0d reg %0d", blk, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
