// tb_control_unit: drives the control unit with behavioural function units
// (each finishes a block a random few cycles after it is issued) and a
// remote sender that delivers one COPY_T vector per iteration some cycles
// after the test's own acks. Node 0: Load, Cal, Flow (feeds node 1 locally
// and a remote PE); node 1: Cal, Store, expects one remote vector per
// iteration from PE 9 node 3. Checks every dependence rule on every issue,
// the {Layer_idx, Iter_idx} priority, the ack stream, pe_done, and that a
// finished PE issues nothing while the next node table is written.
module tb_control_unit;
  import mldf_pkg::*;
  localparam int IT = 12;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic nw_en = 0, start = 0;
  logic [3:0] nw_idx = 0;
  node_info_t nw_info = '0;
  logic [4:0] start_nnodes = 0;
  logic [3:0] issue_vld, unit_busy, unit_done;
  logic [3:0][3:0] issue_node;
  logic [3:0][15:0] issue_iter;
  logic [3:0][7:0] issue_head, issue_len;
  logic [3:0][16:0] issue_base;
  logic [3:0][1:0] issue_slot;
  logic arr_pulse = 0, ack_in_pulse = 0, ack_out_vld, ack_out_rdy = 0, running, pe_done;
  logic [3:0] arr_node = 0, ack_in_node = 0, ack_out_node, ack_out_pe;
  int checks = 0, failures = 0;
  int done_cnt [2][4];
  int arrivals = 0, acks = 0, acks_in = 0, prio_cases = 0;
  int cnt [4];
  logic [3:0] cur_node [4];
  control_unit dut (.*);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end endtask

  // behavioural units
  for (genvar u = 0; u < 4; u++) begin : g_u
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin cnt[u] <= 0; end
      else begin
        if (issue_vld[u]) begin cnt[u] <= $urandom_range(2, 6); cur_node[u] <= issue_node[u]; end
        else if (cnt[u] > 0) cnt[u] <= cnt[u] - 1;
      end
    end
    assign unit_busy[u] = cnt[u] > 0;
    assign unit_done[u] = cnt[u] == 1;
  end

  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < 4; u++) if (unit_done[u]) done_cnt[cur_node[u]][u]++;
    for (int u = 0; u < 4; u++) if (issue_vld[u]) begin
      int n, i;
      n = issue_node[u]; i = issue_iter[u];
      chk(i == done_cnt[n][u], "in-order iteration");
      chk(issue_slot[u] == 2'(i), "slot");
      if (n == 0) begin
        if (u == U_LOAD) chk(done_cnt[0][U_FLOW] + NBUF > i, "load waits slot release");
        if (u == U_CAL)  chk(done_cnt[0][U_LOAD] > i, "cal after load");
        if (u == U_FLOW) chk(done_cnt[0][U_CAL] > i && done_cnt[1][U_STORE] + NBUF > i && acks_in + NBUF > i,
                             "flow after cal and credits");
        if (u == U_LOAD) chk(issue_base[u] == 17'(100 + 32 * i), "spm base");
      end else begin
        if (u == U_CAL)   chk(done_cnt[0][U_FLOW] > i && arrivals >= i + 1, "cal waits local and remote");
        if (u == U_STORE) chk(done_cnt[1][U_CAL] > i, "store after cal");
      end
    end
    // priority: if unit Cal is issued for node 1 while node 0's cal block was also ready
    if (issue_vld[U_CAL] && dut.rdy[U_CAL][0] && dut.rdy[U_CAL][1]) begin
      prio_cases++;
      chk(issue_node[U_CAL] == 0, "smaller layer index wins");
    end
    if (ack_out_vld && ack_out_rdy) begin
      acks++;
      chk(ack_out_pe == 4'd9 && ack_out_node == 4'd3, "ack target");
    end
  end

  // remote peer: sends one vector per iteration, and returns credits for node 0's flow
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      arr_pulse = 0; ack_in_pulse = 0;
      ack_out_rdy = 1'($urandom);
      if (running && arrivals < IT && arrivals < acks + NBUF && $urandom_range(0, 3) == 0) begin
        arr_pulse = 1; arr_node = 4'd1; arrivals++;
      end else if (running && acks_in < done_cnt[0][U_FLOW] && $urandom_range(0, 2) == 0) begin
        ack_in_pulse = 1; ack_in_node = 4'd0; acks_in++;
      end
    end
  end

  initial begin
    node_info_t a, b;
    repeat (3) @(negedge clk); rst_n = 1;
    a = '0; a.total_iter = IT; a.spm_base = 100; a.spm_stride = 32;
    a.head = {8'd30, 8'd20, 8'd10, 8'd0}; a.len = {8'd0, 8'd2, 8'd4, 8'd2};
    a.down_local = 1; a.down_remote = 1;
    b = '0; b.total_iter = IT; b.head = {8'd50, 8'd0, 8'd40, 8'd0}; b.len = {8'd2, 8'd0, 8'd4, 8'd0};
    b.arr_per_iter = 1; b.up_pe = 9; b.up_node = 3;
    @(negedge clk); nw_en = 1; nw_idx = 0; nw_info = a;
    @(negedge clk); nw_idx = 1; nw_info = b;
    @(negedge clk); nw_en = 0; start = 1; start_nnodes = 2;
    @(negedge clk); start = 0;
    chk(!pe_done, "not done at start");
    while (!pe_done) @(negedge clk);
    for (int u = 0; u < 4; u++) begin
      chk(done_cnt[0][u] == (u == 3 ? 0 : IT), $sformatf("node0 unit %0d blocks %0d", u, done_cnt[0][u]));
      chk(done_cnt[1][u] == ((u == 1 || u == 3) ? IT : 0), $sformatf("node1 unit %0d blocks", u));
    end
    chk(acks == IT, $sformatf("acks %0d", acks));
    // loading the next program's node table must not release any block
    // before its start word
    b.len = {8'd3, 8'd3, 8'd3, 8'd3};
    @(negedge clk); nw_en = 1; nw_idx = 1; nw_info = b;
    @(negedge clk); nw_idx = 0; nw_info = b;
    @(negedge clk); nw_en = 0;
    repeat (30) begin
      @(negedge clk);
      chk(issue_vld == '0 && pe_done && !running, "idle until the next start");
    end
    $display("priority cases %0d", prio_cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
