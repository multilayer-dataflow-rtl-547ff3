// tb_noc_router: one router at column 1, row 1. Random packets enter on all
// five inputs with random destinations (including the SPM flag) while the
// outputs apply random back-pressure. Every packet must leave by the port
// that X-then-Y routing picks, exactly once, in order per input/output pair.
module tb_noc_router;
  import mldf_pkg::*;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [4:0] in_vld = 0, in_rdy, out_vld, out_rdy = 0;
  logic [4:0][W-1:0] in_pkt = '0, out_pkt;
  logic idle;
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [W-1:0] expq [5][$];
  noc_router #(.W(W)) dut (.clk, .rst_n, .pos_x(2'd1), .pos_y(2'd1), .in_vld, .in_rdy, .in_pkt,
                           .out_vld, .out_rdy, .out_pkt, .idle);
  function automatic int xy(logic [W-1:0] p);
    route_t r;
    r = route_t'(p[W-1 -: 5]);
    if (r.dx > 1) return 2;
    if (r.dx < 1) return 4;
    if (r.to_spm) return 1;
    if (r.dy > 1) return 3;
    if (r.dy < 1) return 1;
    return 0;
  endfunction
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_vld[o] && out_rdy[o]) begin
      logic hit;
      hit = 0;
      checks++;
      for (int i = 0; i < 5 && !hit; i++)
        if (expq[i].size() > 0) foreach (expq[i][k]) if (!hit && xy(expq[i][k]) == o) begin
          if (expq[i][k] == out_pkt[o]) begin hit = 1; expq[i].delete(k); end
          break;
        end
      if (!hit) begin failures++; $display("FAIL unexpected packet %h on port %0d", out_pkt[o], o); end
      got++;
    end
    for (int i = 0; i < 5; i++) if (in_vld[i] && in_rdy[i]) begin expq[i].push_back(in_pkt[i]); sent++; end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      out_rdy = 5'($urandom);
      for (int i = 0; i < 5; i++) if (!in_vld[i] || in_rdy[i]) begin
        in_vld[i] = ($urandom_range(0, 1) == 1) && c < 1800;
        in_pkt[i] = {1'($urandom_range(0, 5) == 0), 2'($urandom), 2'($urandom), 3'(i), 8'(c)};
      end
    end
    in_vld = 0; out_rdy = '1;
    repeat (20) @(negedge clk);
    checks++;
    if (sent != got || !idle || sent < 1000) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    $display("sent %0d packets", sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
