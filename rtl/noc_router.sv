// noc_router: one node of a 2-D mesh network.
//
// Five ports: 0 local, 1 north, 2 east, 3 south, 4 west. Each input has a
// FIFO of FIFO_DEPTH packets; each output is given by round robin to one
// of the inputs whose head packet routes to it. Routing is dimension
// ordered (X first, then Y) on the route header in the packet's top
// ROUTE_W bits (mldf_pkg::route_t). A packet with to_spm set travels to
// column dx and then north; in row 0 the north port leads to the SPM.
// Row 0 is the top row, y grows southwards.
//
// Links are valid/ready: a packet moves when valid and ready are both
// high at a clock edge. in_rdy depends only on FIFO state, so chains of
// routers have no combinational loop. The paper gives the mesh and the
// separate data and req/ack routers; routing, arbitration and buffering
// are this design's choice.
module noc_router
  import mldf_pkg::*;
#(
  parameter int W          = 16,
  parameter int FIFO_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        pos_x,     // this router's column
  input  logic [1:0]        pos_y,     // this router's row (0 = top)
  input  logic [4:0]        in_vld,
  output logic [4:0]        in_rdy,
  input  logic [4:0][W-1:0] in_pkt,
  output logic [4:0]        out_vld,
  input  logic [4:0]        out_rdy,
  output logic [4:0][W-1:0] out_pkt,
  output logic              idle
);
  localparam int PL = 0, PN = 1, PE = 2, PS = 3, PW = 4;
  localparam int CW = $clog2(FIFO_DEPTH + 1);
  localparam int PW_ = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  logic [W-1:0]  fifo  [5][FIFO_DEPTH];
  logic [PW_-1:0] rd_p [5];
  logic [PW_-1:0] wr_p [5];
  logic [CW-1:0] cnt   [5];
  logic [4:0]    head_vld;
  logic [4:0][W-1:0] head;
  logic [4:0][2:0]   dir;
  logic [4:0]    pop;
  logic [4:0][2:0] rr;           // round-robin pointer per output
  logic [4:0][2:0] sel;          // selected input per output
  logic [4:0]      sel_vld;

  function automatic logic [2:0] route(logic [W-1:0] p);
    route_t r;
    r = route_t'(p[W-1 -: ROUTE_W]);
    if (r.dx > pos_x) return 3'(PE);
    if (r.dx < pos_x) return 3'(PW);
    if (r.to_spm)       return 3'(PN);
    if (r.dy > pos_y) return 3'(PS);
    if (r.dy < pos_y) return 3'(PN);
    return 3'(PL);
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      head_vld[i] = (cnt[i] != 0);
      head[i]     = fifo[i][rd_p[i]];
      dir[i]      = route(head[i]);
      in_rdy[i]   = (cnt[i] != CW'(FIFO_DEPTH));
    end
    pop = '0;
    for (int o = 0; o < 5; o++) begin
      sel[o]     = '0;
      sel_vld[o] = 1'b0;
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!sel_vld[o] && head_vld[i] && dir[i] == 3'(o)) begin
          sel[o]     = 3'(i);
          sel_vld[o] = 1'b1;
        end
      end
      out_vld[o] = sel_vld[o];
      out_pkt[o] = head[sel[o]];
      if (sel_vld[o] && out_rdy[o]) pop[sel[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rd_p[i] <= '0;
        wr_p[i] <= '0;
        cnt[i]  <= '0;
      end
      rr <= '0;
    end else begin
      for (int i = 0; i < 5; i++) begin
        logic push;
        push = in_vld[i] && in_rdy[i];
        if (push) begin
          wr_p[i] <= (int'(wr_p[i]) == FIFO_DEPTH - 1) ? '0 : wr_p[i] + 1'b1;
        end
        if (pop[i]) begin
          rd_p[i] <= (int'(rd_p[i]) == FIFO_DEPTH - 1) ? '0 : rd_p[i] + 1'b1;
        end
        cnt[i] <= cnt[i] + CW'(push) - CW'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        if (sel_vld[o] && out_rdy[o]) rr[o] <= (sel[o] == 3'd4) ? 3'd0 : sel[o] + 3'd1;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 5; i++)
      if (in_vld[i] && in_rdy[i]) fifo[i][wr_p[i]] <= in_pkt[i];
  end

  always_comb begin
    idle = 1'b1;
    for (int i = 0; i < 5; i++) if (cnt[i] != 0) idle = 1'b0;
  end
endmodule
