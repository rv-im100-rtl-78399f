// exception_detector: finds the synchronous exceptions of the instruction in
// the BR stage and reports the highest-priority one.
//
// Combinational. Inputs are the BR-stage control word, PC, instruction and
// registered ALU result (the effective address of a load or store, the jump
// target), plus the branch logic's decision. Detected, highest first:
// illegal instruction (cause 2), ECALL (11), EBREAK (3), misaligned jump or
// taken-branch target (0; targets must be 4-byte aligned, there is no C
// extension), misaligned load (4) and store (6) by access size. mtval is the
// instruction word, the bad target, or the bad address. MRET is passed on
// separately. The paper moved exception detection from EX to BR (its
// "deferral" optimisation); the cause set and priorities are this design's
// choice, following the RISC-V privileged specification.
//
// Lint note: Only the control-word fields that can raise an exception are read, and
// funct3[2] (signed/unsigned) does not change alignment checks.
module exception_detector #(
  parameter int unsigned XLEN = 64
) (
  input  logic            valid,
  input  rv_pkg::ctrl_t   ctrl,
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] alu_result,
  input  logic            btaken,
  input  logic [XLEN-1:0] btarget,
  output logic            exception,
  output logic [3:0]      cause,
  output logic [XLEN-1:0] tval,
  output logic            mret
);
  import rv_pkg::*;
  logic [2:0] f3;
  logic       ld_mis, st_mis;
  assign f3 = instr[14:12];

  always_comb begin
    unique case (f3[1:0])
      2'b00:   ld_mis = 1'b0;
      2'b01:   ld_mis = alu_result[0];
      2'b10:   ld_mis = |alu_result[1:0];
      default: ld_mis = |alu_result[2:0];
    endcase
    st_mis = ld_mis;
  end

  always_comb begin
    exception = 1'b0;
    cause     = '0;
    tval      = '0;
    if (valid) begin
      if (ctrl.illegal) begin
        exception = 1'b1; cause = CAUSE_ILLEGAL; tval = XLEN'(instr);
      end else if (ctrl.ecall) begin
        exception = 1'b1; cause = CAUSE_ECALL_M;
      end else if (ctrl.ebreak) begin
        exception = 1'b1; cause = CAUSE_BREAKPOINT;
      end else if (ctrl.jump && alu_result[1]) begin
        exception = 1'b1; cause = CAUSE_INSTR_MISALIGNED; tval = {alu_result[XLEN-1:1], 1'b0};
      end else if (ctrl.branch && btaken && btarget[1]) begin
        exception = 1'b1; cause = CAUSE_INSTR_MISALIGNED; tval = btarget;
      end else if (ctrl.mem_read && ld_mis) begin
        exception = 1'b1; cause = CAUSE_LOAD_MISALIGNED; tval = alu_result;
      end else if (ctrl.mem_write && st_mis) begin
        exception = 1'b1; cause = CAUSE_STORE_MISALIGNED; tval = alu_result;
      end
    end
  end

  assign mret = valid && ctrl.mret;
endmodule
