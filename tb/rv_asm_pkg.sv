// rv_asm_pkg: instruction encoders for writing RV64IM_Zicsr test programs in
// SystemVerilog. Each function returns one 32-bit instruction word; branch and
// jump offsets are byte offsets relative to the instruction itself.
// Encodings follow the RISC-V specification; the helper set is this testbench library's own.
package rv_asm_pkg;
  typedef logic [31:0] word_t;

  function automatic word_t r_t(input logic [6:0] f7, input int rs2, input int rs1,
                                input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic word_t i_t(input int imm, input int rs1, input logic [2:0] f3,
                                input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic word_t s_t(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    logic [11:0] v; v = 12'(imm);
    return {v[11:5], 5'(rs2), 5'(rs1), f3, v[4:0], 7'b0100011};
  endfunction
  function automatic word_t b_t(input int off, input int rs2, input int rs1, input logic [2:0] f3);
    logic [12:0] v; v = 13'(off);
    return {v[12], v[10:5], 5'(rs2), 5'(rs1), f3, v[4:1], v[11], 7'b1100011};
  endfunction

  localparam logic [6:0] OP = 7'b0110011, OPI = 7'b0010011, OP32 = 7'b0111011, OPI32 = 7'b0011011;

  // RV64I register-register
  function automatic word_t ADD (int rd, int a, int b); return r_t(7'h00, b, a, 3'd0, rd, OP); endfunction
  function automatic word_t SUB (int rd, int a, int b); return r_t(7'h20, b, a, 3'd0, rd, OP); endfunction
  function automatic word_t SLL (int rd, int a, int b); return r_t(7'h00, b, a, 3'd1, rd, OP); endfunction
  function automatic word_t SLT (int rd, int a, int b); return r_t(7'h00, b, a, 3'd2, rd, OP); endfunction
  function automatic word_t SLTU(int rd, int a, int b); return r_t(7'h00, b, a, 3'd3, rd, OP); endfunction
  function automatic word_t XOR (int rd, int a, int b); return r_t(7'h00, b, a, 3'd4, rd, OP); endfunction
  function automatic word_t SRL (int rd, int a, int b); return r_t(7'h00, b, a, 3'd5, rd, OP); endfunction
  function automatic word_t SRA (int rd, int a, int b); return r_t(7'h20, b, a, 3'd5, rd, OP); endfunction
  function automatic word_t OR  (int rd, int a, int b); return r_t(7'h00, b, a, 3'd6, rd, OP); endfunction
  function automatic word_t AND (int rd, int a, int b); return r_t(7'h00, b, a, 3'd7, rd, OP); endfunction
  function automatic word_t ADDW(int rd, int a, int b); return r_t(7'h00, b, a, 3'd0, rd, OP32); endfunction
  function automatic word_t SUBW(int rd, int a, int b); return r_t(7'h20, b, a, 3'd0, rd, OP32); endfunction
  function automatic word_t SLLW(int rd, int a, int b); return r_t(7'h00, b, a, 3'd1, rd, OP32); endfunction
  function automatic word_t SRLW(int rd, int a, int b); return r_t(7'h00, b, a, 3'd5, rd, OP32); endfunction
  function automatic word_t SRAW(int rd, int a, int b); return r_t(7'h20, b, a, 3'd5, rd, OP32); endfunction
  // M extension: f3 0..7 = MUL MULH MULHSU MULHU DIV DIVU REM REMU
  function automatic word_t MOP (int f3, int rd, int a, int b); return r_t(7'h01, b, a, 3'(f3), rd, OP); endfunction
  function automatic word_t MOPW(int f3, int rd, int a, int b); return r_t(7'h01, b, a, 3'(f3), rd, OP32); endfunction
  // immediates
  function automatic word_t ADDI (int rd, int a, int imm); return i_t(imm, a, 3'd0, rd, OPI); endfunction
  function automatic word_t SLTI (int rd, int a, int imm); return i_t(imm, a, 3'd2, rd, OPI); endfunction
  function automatic word_t SLTIU(int rd, int a, int imm); return i_t(imm, a, 3'd3, rd, OPI); endfunction
  function automatic word_t XORI (int rd, int a, int imm); return i_t(imm, a, 3'd4, rd, OPI); endfunction
  function automatic word_t ORI  (int rd, int a, int imm); return i_t(imm, a, 3'd6, rd, OPI); endfunction
  function automatic word_t ANDI (int rd, int a, int imm); return i_t(imm, a, 3'd7, rd, OPI); endfunction
  function automatic word_t SLLI (int rd, int a, int sh);  return i_t(sh & 63, a, 3'd1, rd, OPI); endfunction
  function automatic word_t SRLI (int rd, int a, int sh);  return i_t(sh & 63, a, 3'd5, rd, OPI); endfunction
  function automatic word_t SRAI (int rd, int a, int sh);  return i_t((sh & 63) | 12'h400, a, 3'd5, rd, OPI); endfunction
  function automatic word_t ADDIW(int rd, int a, int imm); return i_t(imm, a, 3'd0, rd, OPI32); endfunction
  function automatic word_t SLLIW(int rd, int a, int sh);  return i_t(sh & 31, a, 3'd1, rd, OPI32); endfunction
  function automatic word_t SRLIW(int rd, int a, int sh);  return i_t(sh & 31, a, 3'd5, rd, OPI32); endfunction
  function automatic word_t SRAIW(int rd, int a, int sh);  return i_t((sh & 31) | 12'h400, a, 3'd5, rd, OPI32); endfunction
  function automatic word_t LUI  (int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic word_t AUIPC(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  // memory: f3 0 B, 1 H, 2 W, 3 D, 4 BU, 5 HU, 6 WU
  function automatic word_t LOAD (int f3, int rd, int a, int imm); return i_t(imm, a, 3'(f3), rd, 7'b0000011); endfunction
  function automatic word_t STORE(int f3, int src, int a, int imm); return s_t(imm, src, a, 3'(f3)); endfunction
  function automatic word_t LD(int rd, int a, int imm);  return LOAD(3, rd, a, imm); endfunction
  function automatic word_t SD(int src, int a, int imm); return STORE(3, src, a, imm); endfunction
  // control flow: f3 0 BEQ 1 BNE 4 BLT 5 BGE 6 BLTU 7 BGEU
  function automatic word_t BR  (int f3, int a, int b, int off); return b_t(off, b, a, 3'(f3)); endfunction
  function automatic word_t BEQ (int a, int b, int off); return b_t(off, b, a, 3'd0); endfunction
  function automatic word_t BNE (int a, int b, int off); return b_t(off, b, a, 3'd1); endfunction
  function automatic word_t JAL (int rd, int off);
    logic [20:0] v; v = 21'(off);
    return {v[20], v[10:1], v[11], v[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic word_t JALR(int rd, int a, int imm); return i_t(imm, a, 3'd0, rd, 7'b1100111); endfunction
  // system: f3 1 CSRRW 2 CSRRS 3 CSRRC 5..7 immediate forms
  function automatic word_t CSR (int f3, int rd, int csr, int a); return {12'(csr), 5'(a), 3'(f3), 5'(rd), 7'b1110011}; endfunction
  function automatic word_t ECALL();  return 32'h0000_0073; endfunction
  function automatic word_t EBREAK(); return 32'h0010_0073; endfunction
  function automatic word_t MRET();   return 32'h3020_0073; endfunction
  function automatic word_t NOP();    return 32'h0000_0013; endfunction
endpackage
