// control_unit: block-level scheduler of one PE.
//
// Holds the graph node table (one node_info_t per DFG layer node mapped on
// this PE) and the micro code block status (iterations completed per node
// and function unit, remote arrivals, returned credits). Every cycle, for
// each idle function unit, it collects the nodes whose next block on that
// unit is ready and issues the one with the smallest {Layer_idx, Iter_idx}
// string (block_scheduler). The unit then owns the block until it has
// fired all its instructions and pulses unit_done.
//
// Readiness of the block of node n on unit u for iteration i (this design's
// rules; the paper gives only the priority): inside a node the blocks run
// Load -> Cal -> Flow -> Store; the first block of a node also waits for
// the Flow block of node n-1 (if it feeds n through COPY_I), for all remote
// COPY_T vectors of iteration i, and for register slot i mod NBUF to be
// released by iteration i-NBUF. A Flow block waits until its consumers have
// finished iteration i-NBUF: locally node n+1, remotely counted by acks on
// the req/ack network. When the last block of a node that receives remote
// data completes, an ack is owed to the sender (up_pe, up_node).
//
// Timing: issue_vld[u] is combinational from registered state and is
// taken by the unit on the same edge; the unit raises busy the cycle after.
// pe_done rises the cycle after every active node has finished all its
// iterations and no ack is owed; running falls at the same time, so nothing
// issues between the end of one program and the start word of the next.
module control_unit
  import mldf_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // node table write and start, from the context router
  input  logic                          nw_en,
  input  logic [NODE_AW-1:0]            nw_idx,
  input  node_info_t                    nw_info,
  input  logic                          start,
  input  logic [NODE_AW:0]              start_nnodes,
  // block issue to the four units
  output logic [NUNIT-1:0]              issue_vld,
  output logic [NUNIT-1:0][NODE_AW-1:0] issue_node,
  output logic [NUNIT-1:0][ITER_W-1:0]  issue_iter,
  output logic [NUNIT-1:0][IRAM_AW-1:0] issue_head,
  output logic [NUNIT-1:0][IRAM_AW-1:0] issue_len,
  output logic [NUNIT-1:0][SPM_AW-1:0]  issue_base,
  output logic [NUNIT-1:0][SLOT_AW-1:0] issue_slot,
  input  logic [NUNIT-1:0]              unit_busy,
  input  logic [NUNIT-1:0]              unit_done,
  // remote data arrivals and credits
  input  logic                          arr_pulse,
  input  logic [NODE_AW-1:0]            arr_node,
  input  logic                          ack_in_pulse,
  input  logic [NODE_AW-1:0]            ack_in_node,
  output logic                          ack_out_vld,
  output logic [PE_AW-1:0]              ack_out_pe,
  output logic [NODE_AW-1:0]            ack_out_node,
  input  logic                          ack_out_rdy,
  output logic                          running,
  output logic                          pe_done
);
  localparam int KW = NODE_AW + ITER_W;

  node_info_t                        info   [MAX_NODES];
  logic [NODE_AW:0]                  nnodes;
  logic [NUNIT-1:0][ITER_W-1:0]      done   [MAX_NODES];
  logic [ITER_W+8-1:0]               arr_cnt[MAX_NODES];
  logic [ITER_W-1:0]                 ack_cnt[MAX_NODES];
  logic [ITER_W-1:0]                 owed   [MAX_NODES];
  logic [NUNIT-1:0]                  cur_vld;          // unit is running a block
  logic                              all_fin;          // the current run is complete
  logic [NUNIT-1:0][NODE_AW-1:0]     cur_node;

  logic [NUNIT-1:0]                        rdy_t   [MAX_NODES]; // per node, before unit state
  logic [MAX_NODES-1:0][ITER_W:0]          fin;                 // iterations node n completed
  logic [MAX_NODES-1:0][1:0]               first, last;
  logic [MAX_NODES-1:0]                    has_last, rem_ok;
  logic [NUNIT-1:0][MAX_NODES-1:0]         rdy;
  logic [NUNIT-1:0][MAX_NODES-1:0][KW-1:0] key;
  logic [NUNIT-1:0]                        pick_vld;
  logic [NUNIT-1:0][NODE_AW-1:0]           pick_idx;

  // per-node summary, computed once per node
  always_comb begin
    for (int n = 0; n < MAX_NODES; n++) begin
      first[n]    = 2'd0;
      last[n]     = 2'd0;
      has_last[n] = 1'b0;
      for (int u = NUNIT - 1; u >= 0; u--) if (info[n].len[u] != 0) first[n] = 2'(u);
      for (int u = 0; u < NUNIT; u++) if (info[n].len[u] != 0) begin
        last[n]     = 2'(u);
        has_last[n] = 1'b1;
      end
      fin[n]    = has_last[n] ? {1'b0, done[n][last[n]]} : {1'b0, info[n].total_iter};
      rem_ok[n] = (info[n].arr_per_iter == 0) ||
                  (arr_cnt[n] >= 24'(info[n].arr_per_iter) * 24'({1'b0, done[n][first[n]]} + 1'b1));
    end
  end

  always_comb begin
    for (int n = 0; n < MAX_NODES; n++) begin
      logic [ITER_W:0] prev_done;   // iterations done by the node's previous block
      prev_done = '0;
      for (int u = 0; u < NUNIT; u++) begin
        logic [ITER_W:0] i;
        logic            r;
        i = {1'b0, done[n][u]};
        r = running && (n < int'(nnodes)) && info[n].len[u] != 0 && i < {1'b0, info[n].total_iter};
        if (2'(u) == first[n]) begin
          if (n > 0 && info[n-1].down_local) r = r && ({1'b0, done[n-1][U_FLOW]} > i);
          r = r && rem_ok[n] && (fin[n] + (ITER_W+1)'(NBUF) > i);
        end else begin
          r = r && (prev_done > i);
        end
        if (u == U_FLOW) begin
          if (info[n].down_local && n + 1 < MAX_NODES) r = r && (fin[(n + 1) % MAX_NODES] + (ITER_W+1)'(NBUF) > i);
          if (info[n].down_remote) r = r && ({1'b0, ack_cnt[n]} + (ITER_W+1)'(NBUF) > i);
        end
        rdy_t[n][u] = r;
        if (info[n].len[u] != 0) prev_done = i;
        key[u][n] = {NODE_AW'(n), done[n][u]};
      end
    end
    for (int u = 0; u < NUNIT; u++)
      for (int n = 0; n < MAX_NODES; n++)
        rdy[u][n] = rdy_t[n][u] && !unit_busy[u] && !cur_vld[u];
  end

  for (genvar u = 0; u < NUNIT; u++) begin : g_sched
    block_scheduler #(.N(MAX_NODES), .KW(KW)) u_sched (
      .vld(rdy[u]), .key(key[u]), .pick_vld(pick_vld[u]), .pick_idx(pick_idx[u]));
    node_info_t ni;
    assign ni            = info[pick_idx[u]];
    assign issue_vld[u]  = pick_vld[u];
    assign issue_node[u] = pick_idx[u];
    assign issue_iter[u] = done[pick_idx[u]][u];
    assign issue_head[u] = ni.head[u];
    assign issue_len[u]  = ni.len[u];
    assign issue_base[u] = ni.spm_base + SPM_AW'(ni.spm_stride * done[pick_idx[u]][u]);
    assign issue_slot[u] = done[pick_idx[u]][u][SLOT_AW-1:0];
  end

  // ack sender: lowest node with an owed credit
  always_comb begin
    ack_out_vld  = 1'b0;
    ack_out_pe   = '0;
    ack_out_node = '0;
    for (int n = MAX_NODES - 1; n >= 0; n--) begin
      if (owed[n] != 0) begin
        ack_out_vld  = 1'b1;
        ack_out_pe   = info[n].up_pe;
        ack_out_node = info[n].up_node;
      end
    end
  end
  logic [NODE_AW-1:0] ack_src;
  always_comb begin
    ack_src = '0;
    for (int n = MAX_NODES - 1; n >= 0; n--) if (owed[n] != 0) ack_src = NODE_AW'(n);
  end

  always_comb begin
    all_fin = running && (cur_vld == '0);
    for (int n = 0; n < MAX_NODES; n++) begin
      if (n < int'(nnodes) && fin[n] != {1'b0, info[n].total_iter}) all_fin = 1'b0;
      if (owed[n] != 0) all_fin = 1'b0;
    end
  end

  // A finished run stops issuing at once, so node-table words of the next
  // program (loaded before its start word) cannot release stale blocks.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pe_done <= 1'b0;
    else if (start)    pe_done <= 1'b0;
    else if (all_fin)  pe_done <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      nnodes  <= '0;
      cur_vld <= '0;
      cur_node <= '0;
      for (int n = 0; n < MAX_NODES; n++) begin
        info[n]    <= '0;
        done[n]    <= '0;
        arr_cnt[n] <= '0;
        ack_cnt[n] <= '0;
        owed[n]    <= '0;
      end
    end else begin
      if (nw_en) info[nw_idx] <= nw_info;
      if (start) begin
        running <= 1'b1;
        nnodes  <= start_nnodes;
        cur_vld <= '0;
        for (int n = 0; n < MAX_NODES; n++) begin
          done[n]    <= '0;
          arr_cnt[n] <= '0;
          ack_cnt[n] <= '0;
          owed[n]    <= '0;
        end
      end else begin
        if (all_fin) running <= 1'b0;
        for (int u = 0; u < NUNIT; u++) begin
          if (issue_vld[u]) begin
            cur_vld[u]  <= 1'b1;
            cur_node[u] <= issue_node[u];
          end
          if (unit_done[u] && cur_vld[u]) begin
            cur_vld[u] <= 1'b0;
            done[cur_node[u]][u] <= done[cur_node[u]][u] + 1'b1;
          end
        end
        if (arr_pulse)    arr_cnt[arr_node]    <= arr_cnt[arr_node] + 1'b1;
        if (ack_in_pulse) ack_cnt[ack_in_node] <= ack_cnt[ack_in_node] + 1'b1;
        for (int n = 0; n < MAX_NODES; n++) begin
          logic inc, dec;
          inc = 1'b0;
          for (int u = 0; u < NUNIT; u++)
            if (unit_done[u] && cur_vld[u] && int'(cur_node[u]) == n &&
                2'(u) == last[n] && info[n].arr_per_iter != 0) inc = 1'b1;
          dec = ack_out_vld && ack_out_rdy && int'(ack_src) == n;
          owed[n] <= owed[n] + ITER_W'(inc) - ITER_W'(dec);
        end
      end
    end
  end

  // a unit reports completion only for a block it was given
  assert property (@(posedge clk) disable iff (!rst_n) (unit_done & ~cur_vld) == '0);
endmodule
