// instr_decoder: identifies an instruction's format and extracts its fields.
//
// The opcode selects one of the six RISC-V base formats (R, I, S, B, U, J);
// unknown opcodes are treated as I so that their fields are harmless. The
// register specifiers are passed on only where the format has them: rs1 for
// R/I/S/B, rs2 for R/S/B, rd for R/I/U/J; elsewhere they read as x0, so an
// immediate's bits never look like a register dependency to later stages.
// raw_imm is instr[31:7], from which imm_gen builds the immediate named by fmt.
// Combinational, zero-cycle latency; used in ID.
// The paper only names the block; the formats and field positions are the
// RISC-V specification's, and masking unused specifiers is this design's
// choice.
module instr_decoder (
  input  logic [31:0]    instr,
  output rv_pkg::fmt_e   fmt,
  output logic [6:0]     opcode,
  output logic [2:0]     funct3,
  output logic [6:0]     funct7,
  output logic [4:0]     rs1,
  output logic [4:0]     rs2,
  output logic [4:0]     rd,
  output logic [24:0]    raw_imm
);
  import rv_pkg::*;

  always_comb begin
    unique case (instr[6:0])
      OPC_OP, OPC_OP_32:   fmt = FMT_R;
      OPC_STORE:           fmt = FMT_S;
      OPC_BRANCH:          fmt = FMT_B;
      OPC_LUI, OPC_AUIPC:  fmt = FMT_U;
      OPC_JAL:             fmt = FMT_J;
      default:             fmt = FMT_I;
    endcase
  end

  assign opcode  = instr[6:0];
  assign funct3  = instr[14:12];
  assign funct7  = instr[31:25];
  assign raw_imm = instr[31:7];
  assign rs1     = (fmt == FMT_U || fmt == FMT_J)                  ? 5'd0 : instr[19:15];
  assign rs2     = (fmt == FMT_R || fmt == FMT_S || fmt == FMT_B)  ? instr[24:20] : 5'd0;
  assign rd      = (fmt == FMT_S || fmt == FMT_B)                  ? 5'd0 : instr[11:7];
endmodule
