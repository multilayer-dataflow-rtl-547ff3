// store_unit: the Store function unit of a PE.
//
// Runs one Store micro code block at a time. For each STN (row-wise entry
// write) or STC (column-wise scatter: element e to line e of two banks,
// lane `lane`) instruction it reads register ra through its SIMD RAM port
// and sends a PK_ST packet to the SPM port at the top of this PE's column,
// SPM address = block base + imm. Stores are posted (no reply). Other
// opcodes are skipped.
//
// Timing: takes issue_vld while idle; per instruction 2 fetch cycles, 2
// read cycles and a send cycle when accepted; done pulses one cycle after
// the last send.
module store_unit
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
  output logic                 rq,
  output logic [REG_AW-1:0]    raddr,
  input  logic                 rgnt,
  input  logic [VW-1:0]        rrdata,
  output logic                 nv,
  input  logic                 nr,
  output dpkt_t                npkt
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DEC, S_RD, S_RDW, S_SEND} state_e;
  state_e state;
  logic [IRAM_AW-1:0] pc, left;
  logic [SLOT_AW-1:0] slot;
  logic [SPM_AW-1:0]  base;
  inst_t              ins;
  logic [VW-1:0]      v;
  logic               last;

  assign busy  = (state != S_IDLE);
  assign iaddr = pc;
  assign nv    = (state == S_SEND);
  assign rq    = (state == S_RD);
  assign raddr = eff_reg(ins.ra, slot);
  assign last  = (left == 1);

  always_comb begin
    npkt        = '0;
    npkt.rt     = '{to_spm: 1'b1, dx: pe_id[1:0], dy: 2'd0};
    npkt.kind   = PK_ST;
    npkt.src_pe = pe_id;
    npkt.col    = (ins.op == OP_STC);
    npkt.lane   = ins.lane;
    npkt.addr   = base + ins.imm;
    npkt.data   = v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      left  <= '0;
      slot  <= '0;
      base  <= '0;
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
          base  <= issue_base;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DEC;
        S_DEC: begin
          ins <= idata;
          if (idata.op == OP_STN || idata.op == OP_STC) state <= S_RD;
          else begin
            pc    <= pc + 1'b1;
            left  <= left - 1'b1;
            state <= last ? S_IDLE : S_FETCH;
            done  <= last;
          end
        end
        S_RD:  if (rgnt) state <= S_RDW;
        S_RDW: begin v <= rrdata; state <= S_SEND; end
        S_SEND: if (nr) begin
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
