// tb_context_router: router of PE 5. Packets for PE 5 must come out of the
// local port, all others out of the east port, each in order, under random
// back-pressure on both.
module tb_context_router;
  import mldf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_vld = 0, in_rdy, out_vld, out_rdy = 0, loc_vld, loc_rdy = 0, idle;
  ctx_pkt_t in_pkt = '0, out_pkt, loc_pkt;
  ctx_pkt_t locq[$], eastq[$];
  int checks = 0, failures = 0;
  context_router dut (.clk, .rst_n, .pe_id(4'd5), .in_vld, .in_rdy, .in_pkt, .out_vld, .out_rdy,
                      .out_pkt, .loc_vld, .loc_rdy, .loc_pkt, .idle);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (loc_vld && loc_rdy) begin checks++; if (locq.size() == 0 || locq.pop_front() != loc_pkt) begin failures++; $display("FAIL local"); end end
    if (out_vld && out_rdy) begin checks++; if (eastq.size() == 0 || eastq.pop_front() != out_pkt) begin failures++; $display("FAIL east"); end end
    if (in_vld && in_rdy) begin if (in_pkt.pe == 4'd5) locq.push_back(in_pkt); else eastq.push_back(in_pkt); end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      out_rdy = 1'($urandom); loc_rdy = 1'($urandom);
      if (!in_vld || in_rdy) begin
        in_vld = $urandom_range(0, 1) == 1;
        in_pkt = '0;
        in_pkt.pe = ($urandom_range(0, 2) == 0) ? 4'd5 : 4'($urandom);
        in_pkt.addr = 8'(c); in_pkt.data = {8{$urandom}};
      end
    end
    in_vld = 0; out_rdy = 1; loc_rdy = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (locq.size() != 0 || eastq.size() != 0 || !idle) begin failures++; $display("FAIL leftovers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
