// branch_logic: resolves conditional branches in the BR stage.
//
// Combinational. It works on the registered ALU result and zero flag from
// EX/BR (the ALU computed rs1 - rs2 for BEQ/BNE, SLT for BLT/BGE, SLTU for
// BLTU/BGEU), so branch evaluation no longer sits behind the ALU in the same
// cycle. btaken is the real outcome, btarget_actu the address to fetch if the
// prediction was wrong (PC + immediate when taken, PC + 4 when not) and
// bp_miss is set when the outcome differs from the prediction made in IO
// (branch_est). The BR-stage placement and the signal names follow the paper.
//
// Lint note: Only bit 0 of alu_result is read (the SLT/SLTU result for the ordered
// compares); the full width is on the port because the BR stage has it.
module branch_logic #(
  parameter int unsigned XLEN = 64
) (
  input  logic            branch,
  input  logic            branch_est,
  input  logic [2:0]      funct3,
  input  logic [XLEN-1:0] pc,
  input  logic [XLEN-1:0] imm,
  input  logic            alu_zero,
  input  logic [XLEN-1:0] alu_result,
  output logic            btaken,
  output logic [XLEN-1:0] btaken_target,
  output logic [XLEN-1:0] btarget_actu,
  output logic            bp_miss
);
  logic cond;
  always_comb begin
    unique case (funct3)
      3'b000:  cond =  alu_zero;        // BEQ
      3'b001:  cond = !alu_zero;        // BNE
      3'b100,
      3'b110:  cond =  alu_result[0];   // BLT, BLTU
      3'b101,
      3'b111:  cond = !alu_result[0];   // BGE, BGEU
      default: cond = 1'b0;
    endcase
  end

  assign btaken        = branch && cond;
  assign btaken_target = pc + imm;
  assign btarget_actu  = btaken ? btaken_target : pc + XLEN'(4);
  assign bp_miss       = branch && (btaken != branch_est);
endmodule
