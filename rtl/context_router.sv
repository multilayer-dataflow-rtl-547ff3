// context_router: configuration path of one PE.
//
// Context packets (mldf_pkg::ctx_pkt_t) travel along a row of PEs, one
// router per PE, starting at the context memory on the west edge. A
// router holds one packet: if the packet's PE index equals pe_id it is
// offered on the local port (node-table, instruction, static-weight or
// start write), otherwise it is passed east. valid/ready on all three
// ports; in_rdy depends only on the holding register, so a chain has no
// combinational path. The paper names the router and the context memory;
// the packet format and the row chain are this design's.
module context_router
  import mldf_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [PE_AW-1:0] pe_id,
  input  logic             in_vld,
  output logic             in_rdy,
  input  ctx_pkt_t         in_pkt,
  output logic             out_vld,
  input  logic             out_rdy,
  output ctx_pkt_t         out_pkt,
  output logic             loc_vld,
  input  logic             loc_rdy,
  output ctx_pkt_t         loc_pkt,
  output logic             idle
);
  logic     full;
  ctx_pkt_t hold;
  logic     mine;

  assign mine    = (hold.pe == pe_id);
  assign in_rdy  = !full;
  assign out_vld = full && !mine;
  assign out_pkt = hold;
  assign loc_vld = full && mine;
  assign loc_pkt = hold;
  assign idle    = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 1'b0;
      hold <= '0;
    end else begin
      if (full && ((mine && loc_rdy) || (!mine && out_rdy))) full <= 1'b0;
      if (in_vld && !full) begin
        full <= 1'b1;
        hold <= in_pkt;
      end
    end
  end
endmodule
