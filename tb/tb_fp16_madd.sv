// tb_fp16_madd: checks the four lane operations against real arithmetic
// rounded by the testbench's own fp16 conversion, on directed and random
// operands.
module tb_fp16_madd;
  import tb_fp_pkg::*;
  logic [1:0]  op;
  logic [15:0] a, b, c, y;
  int checks = 0, failures = 0;

  fp16_madd dut (.op, .a, .b, .c, .y);

  task automatic run(logic [1:0] o, logic [15:0] xa, logic [15:0] xb, logic [15:0] xc);
    logic [15:0] exp_h;
    op = o; a = xa; b = xb; c = xc;
    #1;
    case (o)
      2'd0: exp_h = r2h(h2r(xc) + h2r(r2h(h2r(xa) * h2r(xb))));
      2'd1: exp_h = r2h(h2r(xa) * h2r(xb));
      2'd2: exp_h = r2h(h2r(xa) + h2r(xb));
      default: exp_h = r2h(h2r(xa) - h2r(xb));
    endcase
    checks++;
    if (y !== exp_h && !(y[14:0] == 0 && exp_h[14:0] == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d a=%h b=%h c=%h y=%h exp=%h", o, xa, xb, xc, y, exp_h);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(2'd1, 16'h3c00, 16'h4000, 16'h0000);   // 1*2
    run(2'd0, 16'h3c00, 16'h4000, 16'h3c00);   // 1 + 1*2 = 3
    run(2'd2, 16'h3c00, 16'hbc00, 16'h0000);   // 1 - 1 = 0
    run(2'd3, 16'h4200, 16'h3c00, 16'h0000);   // 3 - 1
    run(2'd2, 16'h3c00, 16'h1400, 16'h0000);   // tie rounding case
    for (int i = 0; i < 4000; i++)
      run(2'($urandom_range(0, 3)), rand_h(6), rand_h(6), rand_h(6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
