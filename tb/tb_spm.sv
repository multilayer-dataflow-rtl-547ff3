// tb_spm: scratchpad at reduced depth (64 rows). Fills every entry through
// the external port, then checks through the network ports: row-wise loads,
// column-wise gathers (element e from bank (b+e/8) mod 4, line e mod 8),
// column-wise scatters and row-wise stores, read back externally; and that
// two ports hitting the same bank in one cycle raise the conflict flag.
// The expected data comes from a testbench copy of the memory indexed by
// entry address and the line mapping written out here.
module tb_spm;
  import mldf_pkg::*;
  localparam int ROWS = 64, NENT = ROWS * 32;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [3:0] in_vld = 0, in_rdy, out_vld, out_rdy = '1;
  dpkt_t [3:0] in_pkt = '0, out_pkt;
  logic ext_req = 0, ext_we = 0, ext_gnt, idle, conflict;
  logic [SPM_AW-1:0] ext_addr = 0;
  logic [VW-1:0] ext_wdata = 0, ext_rdata;
  logic [VW-1:0] model [NENT];
  int checks = 0, failures = 0, nconf = 0;
  spm #(.ROWS(ROWS)) dut (.*);
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && conflict) nconf++;

  function automatic int ent(int bank, int line, int row); return (row << 5) | (line << 2) | bank; endfunction
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask

  task automatic send(int p, dpkt_t k);
    @(negedge clk); in_vld[p] = 1; in_pkt[p] = k;
    @(negedge clk); while (!in_rdy[p]) @(negedge clk);
    in_vld[p] = 0;
  endtask
  task automatic load(int p, int a, logic col, int lane, output logic [VW-1:0] d);
    dpkt_t k;
    k = '0; k.kind = PK_LDREQ; k.src_pe = 4'(p); k.addr = SPM_AW'(a); k.col = col; k.lane = 4'(lane);
    send(p, k);
    while (!out_vld[p]) @(negedge clk);
    chk(out_pkt[p].kind == PK_LDRSP && out_pkt[p].rt.dx == 2'(p) && !out_pkt[p].rt.to_spm, "response header");
    d = out_pkt[p].data;
    @(negedge clk);
  endtask
  task automatic ext_rd(int a, output logic [VW-1:0] d);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_addr = SPM_AW'(a);
    @(negedge clk); ext_req = 0;
    @(negedge clk); d = ext_rdata;
  endtask

  initial begin
    logic [VW-1:0] d, e;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int a = 0; a < NENT; a++) begin
      @(negedge clk);
      model[a] = {8{$urandom}};
      ext_req = 1; ext_we = 1; ext_addr = SPM_AW'(a); ext_wdata = model[a];
    end
    @(negedge clk); ext_req = 0; ext_we = 0;
    for (int k = 0; k < 40; k++) begin
      int a;
      a = $urandom_range(0, NENT - 1);
      load(k % 4, a, 1'b0, 0, d);
      chk(d == model[a], $sformatf("row load %0d", a));
    end
    for (int k = 0; k < 40; k++) begin
      int b, r, ln;
      b = $urandom_range(0, 3); r = $urandom_range(0, ROWS - 1); ln = $urandom_range(0, 15);
      load(k % 4, ent(b, $urandom_range(0, 7), r), 1'b1, ln, d);
      for (int j = 0; j < 16; j++) e[j * 16 +: 16] = model[ent((b + j / 8) % 4, j % 8, r)][ln * 16 +: 16];
      chk(d == e, $sformatf("column gather b=%0d r=%0d lane=%0d", b, r, ln));
    end
    for (int k = 0; k < 20; k++) begin
      int b, r, ln;
      dpkt_t s;
      b = $urandom_range(0, 3); r = $urandom_range(0, ROWS - 1); ln = $urandom_range(0, 15);
      s = '0; s.kind = PK_ST; s.col = 1; s.lane = 4'(ln); s.addr = SPM_AW'(ent(b, 0, r)); s.data = {8{$urandom}};
      send(k % 4, s);
      for (int j = 0; j < 16; j++) model[ent((b + j / 8) % 4, j % 8, r)][ln * 16 +: 16] = s.data[j * 16 +: 16];
      s = '0; s.kind = PK_ST; s.addr = SPM_AW'($urandom_range(0, NENT - 1)); s.data = {8{$urandom}};
      send((k + 1) % 4, s);
      model[s.addr] = s.data;
    end
    repeat (4) @(negedge clk);
    for (int a = 0; a < NENT; a++) begin
      ext_rd(a, d);
      chk(d == model[a], $sformatf("readback %0d", a));
    end
    // two ports, same bank, same cycle
    @(negedge clk);
    in_pkt[0] = '0; in_pkt[0].kind = PK_LDREQ; in_pkt[0].addr = SPM_AW'(ent(1, 0, 3));
    in_pkt[1] = '0; in_pkt[1].kind = PK_LDREQ; in_pkt[1].addr = SPM_AW'(ent(1, 2, 5)); in_pkt[1].src_pe = 4'd1;
    in_vld[1:0] = 2'b11;
    @(negedge clk); in_vld = 0;
    repeat (6) @(negedge clk);
    chk(nconf > 0, "bank conflict seen");
    chk(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
