// tb_inst_block_ram: writes random micro instructions and reads them back
// on all four unit ports at once, one cycle after the address.
module tb_inst_block_ram;
  import mldf_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic we = 0;
  logic [7:0] waddr = 0;
  inst_t wdata = '0;
  logic [3:0][7:0] raddr = '0;
  inst_t [3:0] rdata;
  inst_t model [256];
  int checks = 0, failures = 0;
  inst_block_ram #(.DEPTH(256)) dut (.*);
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      model[a] = inst_t'({$urandom, $urandom});
      we = 1; waddr = 8'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      for (int u = 0; u < 4; u++) raddr[u] = 8'($urandom);
      @(negedge clk);
      for (int u = 0; u < 4; u++) begin
        checks++;
        if (rdata[u] != model[raddr[u]]) begin failures++; $display("FAIL port %0d", u); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
