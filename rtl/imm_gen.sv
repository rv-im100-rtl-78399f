// imm_gen: builds the sign-extended XLEN-bit immediate from the raw immediate
// bits (instr[31:7]) according to the format found by the instruction
// decoder: I (loads, OP-IMM, OP-IMM-32, JALR, SYSTEM), S (stores), B
// (branches), U (LUI, AUIPC, sign-extended from bit 31 as RV64 requires) and
// J (JAL). Combinational, zero-cycle latency.
// The paper only names the block; the formats are the RISC-V specification's.
module imm_gen #(
  parameter int unsigned XLEN = 64
) (
  input  rv_pkg::fmt_e    fmt,       // from the instruction decoder
  input  logic [24:0]     raw_imm,   // instr[31:7]
  output logic [XLEN-1:0] imm
);
  import rv_pkg::*;
  logic [31:7] ins;   // instruction bits, numbered as in the instruction word
  assign ins = raw_imm;

  always_comb begin
    unique case (fmt)
      FMT_S:   imm = {{(XLEN-11){ins[31]}}, ins[30:25], ins[11:7]};
      FMT_B:   imm = {{(XLEN-12){ins[31]}}, ins[7], ins[30:25], ins[11:8], 1'b0};
      FMT_U:   imm = {{(XLEN-31){ins[31]}}, ins[30:12], 12'b0};
      FMT_J:   imm = {{(XLEN-20){ins[31]}}, ins[19:12], ins[20], ins[30:21], 1'b0};
      default: imm = {{(XLEN-11){ins[31]}}, ins[30:20]};   // I (R has none)
    endcase
  end
endmodule
