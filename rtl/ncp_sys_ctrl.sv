// ncp_sys_ctrl: system controller (SC) with the program counter.
//
// The SC runs the CNN program held in the instruction memory. Started by the
// host, it fetches the instruction at PC, decodes it and, for a neural
// instruction, starts the NOU and waits for it to finish writing back; then
// it continues with PC + 1. Control instructions act at once:
//   jump  PC <= target (low bits of the dst field)
//   sup   suspend; PC <= PC + 1 so that the next start resumes after it
//   end   suspend and reset PC to 0
// As in the paper's block diagram, PC is loaded through a two-input mux whose
// input 0 is PC + 1 and input 1 the target the SC supplies on jump or end.
//
// While the SC runs, the NOU owns the tensor memory (`tm_sel_o` = 1); when it
// is suspended the tensor memory belongs to the I/O block (`tm_sel_o` = 0).
// Timing: one cycle to read IM, one to decode, then the NOU's own time; a
// control instruction takes two cycles. The opcode encoding and cycle split
// are this design's choices.
module ncp_sys_ctrl
  import ncp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,       // host: run from the current PC
  output logic             im_re_o,
  output logic [IM_AW-1:0] pc_o,
  input  instr_t           im_rdata_i,
  output logic             nou_start_o,
  output instr_t           nou_instr_o,
  input  logic             nou_done_i,
  output logic             tm_sel_o,      // 0 I/O, 1 NOU
  output logic             running_o,
  output logic             ended_o        // last stop was an `end`
);

  typedef enum logic [1:0] {S_HALT, S_FETCH, S_DECODE, S_EXEC} state_e;
  state_e st;

  logic [IM_AW-1:0] pc, pc_inc, pc_tgt, pc_next;
  logic             pc_ld, pc_sel;          // load PC, mux select (1: target)

  assign pc_inc  = pc + 1'b1;
  assign pc_next = pc_sel ? pc_tgt : pc_inc;

  always_comb begin
    pc_ld  = 1'b0;
    pc_sel = 1'b0;
    pc_tgt = '0;
    if (st == S_DECODE) begin
      unique case (im_rdata_i.opcode)
        OP_JUMP: begin pc_ld = 1'b1; pc_sel = 1'b1; pc_tgt = im_rdata_i.dst[IM_AW-1:0]; end
        OP_END:  begin pc_ld = 1'b1; pc_sel = 1'b1; pc_tgt = '0; end
        OP_SUP:  pc_ld = 1'b1;
        default: ;
      endcase
    end else if (st == S_EXEC && nou_done_i) begin
      pc_ld = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_HALT; pc <= '0; nou_start_o <= 1'b0; nou_instr_o <= '0; ended_o <= 1'b0;
    end else begin
      nou_start_o <= 1'b0;
      if (pc_ld) pc <= pc_next;
      unique case (st)
        S_HALT:   if (start_i) begin st <= S_FETCH; ended_o <= 1'b0; end
        S_FETCH:  st <= S_DECODE;
        S_DECODE: begin
          unique case (im_rdata_i.opcode)
            OP_JUMP: st <= S_FETCH;
            OP_SUP:  st <= S_HALT;
            OP_END:  begin st <= S_HALT; ended_o <= 1'b1; end
            default: begin
              st <= S_EXEC;
              nou_start_o <= 1'b1;
              nou_instr_o <= im_rdata_i;
            end
          endcase
        end
        S_EXEC:   if (nou_done_i) st <= S_FETCH;
        default:  st <= S_HALT;
      endcase
    end
  end

  assign im_re_o   = (st == S_FETCH);
  assign pc_o      = pc;
  assign running_o = (st != S_HALT);
  assign tm_sel_o  = running_o;

endmodule
