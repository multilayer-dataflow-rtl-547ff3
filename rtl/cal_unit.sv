// cal_unit: the calculation function unit of a PE.
//
// Runs one Cal micro code block at a time. For each instruction it fetches
// the word from the instruction RAM (one cycle), reads the operand vectors
// X (ra), W (rb) and, for MADD, Y (rd) through its SIMD RAM port, computes
// SIMD fp16 lanes in parallel (fp16_madd) and writes the vector back to rd.
// Register fields are resolved with the iteration's slot (eff_reg), so the
// same micro code serves every iteration. Supported: MADD, MUL, ADD, SUB;
// other opcodes are skipped.
//
// Timing: issue_vld is taken on a clock edge while idle; busy is high from
// the next cycle until done pulses, one cycle after the last write. Each
// instruction costs 2 fetch cycles plus 2 cycles per operand read and one
// write cycle when the ports are granted at once (no pipelining: this
// design's simplification; the paper gives no cycle counts for the unit).
module cal_unit
  import mldf_pkg::*;
  import fp16_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
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
  input  logic [VW-1:0]        rrdata
);
  typedef enum logic [3:0] {S_IDLE, S_FETCH, S_DEC, S_RA, S_RAW, S_RB, S_RBW, S_RC, S_RCW, S_WR} state_e;
  state_e state;
  logic [IRAM_AW-1:0] pc, left;
  logic [SLOT_AW-1:0] slot;
  inst_t              ins;
  logic [VW-1:0]      va, vb, vc, vy;

  assign busy  = (state != S_IDLE);
  assign iaddr = pc;

  for (genvar l = 0; l < SIMD; l++) begin : g_lane
    logic [1:0] lop;
    always_comb begin
      unique case (ins.op)
        OP_MADD: lop = 2'd0;
        OP_MUL:  lop = 2'd1;
        OP_ADD:  lop = 2'd2;
        default: lop = 2'd3;
      endcase
    end
    fp16_madd u_lane (.op(lop), .a(va[l*DW +: DW]), .b(vb[l*DW +: DW]), .c(vc[l*DW +: DW]),
                      .y(vy[l*DW +: DW]));
  end

  always_comb begin
    rq     = 1'b0;
    rwe    = 1'b0;
    raddr  = eff_reg(ins.ra, slot);
    rwdata = vy;
    unique case (state)
      S_RA: begin rq = 1'b1; raddr = eff_reg(ins.ra, slot); end
      S_RB: begin rq = 1'b1; raddr = eff_reg(ins.rb, slot); end
      S_RC: begin rq = 1'b1; raddr = eff_reg(ins.rd, slot); end
      S_WR: begin rq = 1'b1; rwe = 1'b1; raddr = eff_reg(ins.rd, slot); end
      default: ;
    endcase
  end

  function automatic logic is_cal(op_e o);
    return o == OP_MADD || o == OP_MUL || o == OP_ADD || o == OP_SUB;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      left  <= '0;
      slot  <= '0;
      ins   <= '0;
      va    <= '0;
      vb    <= '0;
      vc    <= '0;
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
          ins   <= idata;
          state <= is_cal(idata.op) ? S_RA : S_WR;
          if (!is_cal(idata.op)) begin       // skip
            pc   <= pc + 1'b1;
            left <= left - 1'b1;
            state <= (left == 1) ? S_IDLE : S_FETCH;
            done  <= (left == 1);
          end
        end
        S_RA:  if (rgnt) state <= S_RAW;
        S_RAW: begin va <= rrdata; state <= S_RB; end
        S_RB:  if (rgnt) state <= S_RBW;
        S_RBW: begin
          vb <= rrdata;
          vc <= '0;
          state <= (ins.op == OP_MADD) ? S_RC : S_WR;
        end
        S_RC:  if (rgnt) state <= S_RCW;
        S_RCW: begin vc <= rrdata; state <= S_WR; end
        S_WR: if (rgnt) begin
          pc   <= pc + 1'b1;
          left <= left - 1'b1;
          if (left == 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
