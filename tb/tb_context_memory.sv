// tb_context_memory: writes 40 context words, streams words 5..34 and
// checks that each arrives, in order, on the row its PE index names, with
// random back-pressure per row, and that busy falls afterwards.
module tb_context_memory;
  import mldf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en = 0, go = 0, busy;
  logic [5:0] wr_addr = 0, base = 0;
  logic [6:0] count = 0;
  ctx_pkt_t wr_data = '0, row_pkt;
  logic [3:0] row_vld, row_rdy = 0;
  ctx_pkt_t words [40];
  int nxt = 5, checks = 0, failures = 0;
  context_memory #(.DEPTH(64)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    if ((row_vld & row_rdy) != 0) begin
      checks++;
      if (row_pkt != words[nxt] || row_vld != (4'd1 << words[nxt].pe[3:2])) begin
        failures++; $display("FAIL word %0d", nxt);
      end
      nxt++;
    end
    checks++;
    if ($countones(row_vld) > 1) begin failures++; $display("FAIL two rows valid"); end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      words[i] = '0; words[i].pe = 4'($urandom); words[i].addr = 8'(i); words[i].data = {8{$urandom}};
      wr_en = 1; wr_addr = 6'(i); wr_data = words[i];
    end
    @(negedge clk); wr_en = 0; go = 1; base = 6'd5; count = 7'd30;
    @(negedge clk); go = 0;
    for (int c = 0; c < 400; c++) begin @(negedge clk); row_rdy = 4'($urandom); end
    row_rdy = '1;
    repeat (10) @(negedge clk);
    checks++;
    if (nxt != 35 || busy) begin failures++; $display("FAIL streamed up to %0d busy=%0d", nxt, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
