// load_unit: the Load function unit of a PE.
//
// Runs one Load micro code block at a time. Each LDN (row-wise) or LDC
// (column-wise gather) instruction becomes one PK_LDREQ packet on the data
// network, addressed to the SPM port at the top of this PE's column, with
// SPM address = block base (node base + iteration * stride) + imm and the
// destination register resolved for the iteration's slot. The SPM sends
// the vector back as PK_LDRSP; the PE writes it into the SIMD RAM and
// pulses rsp. The block is done when all requests are sent and all
// responses have come back. Other opcodes are skipped.
//
// Timing: takes issue_vld while idle; per instruction 2 fetch cycles and
// one send cycle when the network accepts; done pulses one cycle after the
// last response.
module load_unit
  import mldf_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PE_AW-1:0]     pe_id,
  input  logic                 issue_vld,
  input  logic [IRAM_AW-1:0]   issue_head,
  input  logic [IRAM_AW-1:0]   issue_len,
  input  logic [SPM_AW-1:0]    issue_base,
  input  logic [SLOT_AW-1:0]   issue_slot,
  output logic                 busy,
  output logic                 done,
  output logic [IRAM_AW-1:0]   iaddr,
  input  inst_t                idata,
  output logic                 nv,
  input  logic                 nr,
  output dpkt_t                npkt,
  input  logic                 rsp
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DEC, S_SEND, S_DRAIN} state_e;
  state_e state;
  logic [IRAM_AW-1:0] pc, left;
  logic [SLOT_AW-1:0] slot;
  logic [SPM_AW-1:0]  base;
  logic [7:0]         outst;
  inst_t              ins;

  assign busy  = (state != S_IDLE);
  assign iaddr = pc;
  assign nv    = (state == S_SEND);

  always_comb begin
    npkt        = '0;
    npkt.rt     = '{to_spm: 1'b1, dx: pe_id[1:0], dy: 2'd0};
    npkt.kind   = PK_LDREQ;
    npkt.src_pe = pe_id;
    npkt.rg     = eff_reg(ins.rd, slot);
    npkt.col    = (ins.op == OP_LDC);
    npkt.lane   = ins.lane;
    npkt.addr   = base + ins.imm;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      left  <= '0;
      slot  <= '0;
      base  <= '0;
      outst <= '0;
      ins   <= '0;
      done  <= 1'b0;
    end else begin
      done  <= 1'b0;
      outst <= outst + 8'(state == S_SEND && nr) - 8'(rsp);
      unique case (state)
        S_IDLE: if (issue_vld) begin
          pc    <= issue_head;
          left  <= issue_len;
          slot  <= issue_slot;
          base  <= issue_base;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DEC;
        S_DEC: begin
          ins <= idata;
          if (idata.op == OP_LDN || idata.op == OP_LDC) state <= S_SEND;
          else begin
            pc    <= pc + 1'b1;
            left  <= left - 1'b1;
            state <= (left == 1) ? S_DRAIN : S_FETCH;
          end
        end
        S_SEND: if (nr) begin
          pc    <= pc + 1'b1;
          left  <= left - 1'b1;
          state <= (left == 1) ? S_DRAIN : S_FETCH;
        end
        S_DRAIN: if (outst == 0 || (outst == 1 && rsp)) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
