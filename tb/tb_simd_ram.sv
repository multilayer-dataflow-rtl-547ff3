// tb_simd_ram: fills the SIMD RAM through one port, reads it back through
// another, and checks the slice arbiter: two ports on the same slice get
// one grant (lower port wins), ports on different slices are both granted.
module tb_simd_ram;
  timeunit 1ns; timeprecision 100ps;
  localparam int NP = 5, D = 128, W = 256;
  logic clk = 0;
  always #1 clk = ~clk;
  logic [NP-1:0] req = '0, we = '0, gnt;
  logic [NP-1:0][6:0] addr = '0;
  logic [NP-1:0][W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;
  simd_ram #(.DEPTH(D), .NSLICE(4), .NP(NP), .W(W)) dut (.*);
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      model[a] = {8{$urandom}};
      req = '0; req[2] = 1; we[2] = 1; addr[2] = 7'(a); wdata[2] = model[a];
      #0.1 chk(gnt[2], "write grant");
    end
    @(negedge clk); req = '0; we = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); req = '0; req[4] = 1; addr[4] = 7'(a);
      @(negedge clk); req = '0;
      chk(rdata[4] == model[a], $sformatf("read %0d", a));
    end
    // same slice: ports 1 and 3
    @(negedge clk); req = '0; req[1] = 1; req[3] = 1; addr[1] = 7'd4; addr[3] = 7'd8;
    #0.1 chk(gnt[1] && !gnt[3], "conflict: lower port wins");
    // different slices
    addr[3] = 7'd9;
    #0.1 chk(gnt[1] && gnt[3], "different slices both granted");
    @(negedge clk); req = '0;
    @(negedge clk);
    chk(rdata[1] == model[4] && rdata[3] == model[9], "parallel reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
