// flow_unit: the Flow function unit of a PE.
//
// Runs one Flow micro code block at a time; this is how butterfly swaps
// between DFG layers are done. For each instruction it reads register ra
// through its SIMD RAM port, then
//   COPY_I : writes the vector to register rd of this PE (inner flow, the
//            half of the butterfly outputs a node keeps for its next layer);
//   COPY_T : sends it as a PK_FLOW packet to register rd of node tnode in
//            PE tpe (trans flow, the half that moves to the partner PE).
// Both destination registers use the iteration's slot. Other opcodes are
// skipped. The control unit only issues a Flow block once the consumers
// have released the destination slot.
//
// Timing: takes issue_vld while idle; per instruction 2 fetch cycles, 2
// read cycles and one write or send cycle when granted; done pulses one
// cycle after the last write or send.
module flow_unit
  import mldf_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PE_AW-1:0]     pe_id,
  input  logic                 issue_vld,
  input  logic [IRAM_AW-1:0]   issue_head,
  input  logic [IRAM_AW-1:0]   issue_len,
  input  logic [SLOT_AW-1:0]   issue_slot,
  output logic                 busy,
  output logic                 done,
  output logic [IRAM_AW-1:0]   iaddr,
  input  inst_t                idata,
  output logic                 rq,
  output logic                 rwe,
  output logic [REG_AW-1:0]    raddr,
  output logic [VW-1:0]        rwdata,
  input  logic                 rgnt,
  input  logic [VW-1:0]        rrdata,
  output logic                 nv,
  input  logic                 nr,
  output dpkt_t                npkt
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DEC, S_RD, S_RDW, S_WR, S_SEND} state_e;
  state_e state;
  logic [IRAM_AW-1:0] pc, left;
  logic [SLOT_AW-1:0] slot;
  inst_t              ins;
  logic [VW-1:0]      v;

  assign busy  = (state != S_IDLE);
  assign iaddr = pc;
  assign nv    = (state == S_SEND);

  always_comb begin
    rq     = (state == S_RD) || (state == S_WR);
    rwe    = (state == S_WR);
    raddr  = (state == S_WR) ? eff_reg(ins.rd, slot) : eff_reg(ins.ra, slot);
    rwdata = v;
    npkt        = '0;
    npkt.rt     = route_to_pe(ins.tpe);
    npkt.kind   = PK_FLOW;
    npkt.src_pe = pe_id;
    npkt.node   = ins.tnode;
    npkt.rg     = eff_reg(ins.rd, slot);
    npkt.data   = v;
  end

  logic last;
  assign last = (left == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      left  <= '0;
      slot  <= '0;
      ins   <= '0;
      v     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (issue_vld) begin
          pc    <= issue_head;
          left  <= issue_len;
          slot  <= issue_slot;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DEC;
        S_DEC: begin
          ins <= idata;
          if (idata.op == OP_COPY_I || idata.op == OP_COPY_T) state <= S_RD;
          else begin
            pc    <= pc + 1'b1;
            left  <= left - 1'b1;
            state <= last ? S_IDLE : S_FETCH;
            done  <= last;
          end
        end
        S_RD:  if (rgnt) state <= S_RDW;
        S_RDW: begin
          v     <= rrdata;
          state <= (ins.op == OP_COPY_I) ? S_WR : S_SEND;
        end
        S_WR, S_SEND: if ((state == S_WR && rgnt) || (state == S_SEND && nr)) begin
          pc    <= pc + 1'b1;
          left  <= left - 1'b1;
          state <= last ? S_IDLE : S_FETCH;
          done  <= last;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
