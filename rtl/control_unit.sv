// control_unit: decodes an instruction in the ID stage into the control word
// (rv_pkg::ctrl_t) that travels down the pipeline.
//
// Recognises the 72 instructions of RV64IM_Zicsr plus MRET: RV64I including
// the OP-IMM-32 and OP-32 opcodes of the W-suffix instructions, the M
// extension, the six Zicsr instructions, ECALL, EBREAK, MRET; FENCE and WFI
// decode as no-operations. Anything else sets ctrl.illegal, which the
// exception detector turns into an illegal-instruction trap in BR.
// Combinational. Write-back source codes follow the block diagram
// (001 memory, 010 ALU, 011 CSR, 100 LUI immediate, 101 PC+4); the
// remaining encodings are this design's own.
module control_unit (
  input  logic [6:0]     opcode,
  input  logic [2:0]     funct3,
  input  logic [6:0]     funct7,
  input  logic [4:0]     rs1,
  input  logic [4:0]     rd,
  input  logic [11:0]    imm12,     // instr[31:20]
  output rv_pkg::ctrl_t  ctrl
);
  import rv_pkg::*;

  logic m_ok, w_shift_ok, d_shift_ok;
  assign m_ok       = (funct7 == 7'b0000001);
  // 6-bit shift amount for RV64 OP-IMM shifts: funct7[6:1] is the funct6 field
  assign d_shift_ok = (funct3 == 3'b001) ? (funct7[6:1] == 6'b000000)
                                         : (funct7[6:1] == 6'b000000 || funct7[6:1] == 6'b010000);
  assign w_shift_ok = (funct3 == 3'b001) ? (funct7 == 7'b0000000)
                                         : (funct7 == 7'b0000000 || funct7 == 7'b0100000);

  always_comb begin
    ctrl = CTRL_NOP;
    unique case (opcode)
      OPC_LUI: begin
        ctrl.reg_write = 1'b1; ctrl.wb_src = WB_IMM;
      end
      OPC_AUIPC: begin
        ctrl.reg_write = 1'b1; ctrl.wb_src = WB_ALU; ctrl.a_sel = A_PC; ctrl.b_sel = B_IMM;
      end
      OPC_JAL: begin
        ctrl.jump = 1'b1; ctrl.reg_write = 1'b1; ctrl.wb_src = WB_PC4;
        ctrl.a_sel = A_PC; ctrl.b_sel = B_IMM;
      end
      OPC_JALR: begin
        ctrl.jump = 1'b1; ctrl.reg_write = 1'b1; ctrl.wb_src = WB_PC4;
        ctrl.a_sel = A_RS1; ctrl.b_sel = B_IMM; ctrl.uses_rs1 = 1'b1;
        ctrl.illegal = (funct3 != 3'b000);
      end
      OPC_BRANCH: begin
        ctrl.branch = 1'b1; ctrl.a_sel = A_RS1; ctrl.b_sel = B_RS2;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
        ctrl.illegal = (funct3 == 3'b010 || funct3 == 3'b011);
      end
      OPC_LOAD: begin
        ctrl.mem_read = 1'b1; ctrl.reg_write = 1'b1; ctrl.wb_src = WB_MEM;
        ctrl.a_sel = A_RS1; ctrl.b_sel = B_IMM; ctrl.uses_rs1 = 1'b1;
        ctrl.illegal = (funct3 == 3'b111);
      end
      OPC_STORE: begin
        ctrl.mem_write = 1'b1; ctrl.a_sel = A_RS1; ctrl.b_sel = B_IMM;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
        ctrl.illegal = funct3[2];
      end
      OPC_OP_IMM: begin
        ctrl.reg_write = 1'b1; ctrl.wb_src = WB_ALU; ctrl.a_sel = A_RS1; ctrl.b_sel = B_IMM;
        ctrl.uses_rs1 = 1'b1;
        ctrl.illegal = (funct3 == 3'b001 || funct3 == 3'b101) && !d_shift_ok;
      end
      OPC_OP_IMM_32: begin
        ctrl.reg_write = 1'b1; ctrl.wb_src = WB_ALU; ctrl.a_sel = A_RS1; ctrl.b_sel = B_IMM;
        ctrl.uses_rs1 = 1'b1; ctrl.is_word = 1'b1;
        ctrl.illegal = !(funct3 == 3'b000 || ((funct3 == 3'b001 || funct3 == 3'b101) && w_shift_ok));
      end
      OPC_OP: begin
        ctrl.reg_write = 1'b1; ctrl.wb_src = WB_ALU; ctrl.a_sel = A_RS1; ctrl.b_sel = B_RS2;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
        ctrl.illegal = !(m_ok || funct7 == 7'b0000000 ||
                         (funct7 == 7'b0100000 && (funct3 == 3'b000 || funct3 == 3'b101)));
      end
      OPC_OP_32: begin
        ctrl.reg_write = 1'b1; ctrl.wb_src = WB_ALU; ctrl.a_sel = A_RS1; ctrl.b_sel = B_RS2;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1; ctrl.is_word = 1'b1;
        if (m_ok)
          ctrl.illegal = (funct3 == 3'b001 || funct3 == 3'b010 || funct3 == 3'b011);
        else
          ctrl.illegal = !((funct7 == 7'b0000000 && (funct3 == 3'b000 || funct3 == 3'b001 || funct3 == 3'b101)) ||
                           (funct7 == 7'b0100000 && (funct3 == 3'b000 || funct3 == 3'b101)));
      end
      OPC_MISC_MEM: begin
        // FENCE / FENCE.I: in-order core without caches, nothing to do
        ctrl.illegal = (funct3 != 3'b000 && funct3 != 3'b001);
      end
      OPC_SYSTEM: begin
        if (funct3 == 3'b000) begin
          if (rs1 != 5'd0 || rd != 5'd0)   ctrl.illegal = 1'b1;
          else if (imm12 == 12'h000)       ctrl.ecall  = 1'b1;
          else if (imm12 == 12'h001)       ctrl.ebreak = 1'b1;
          else if (imm12 == 12'h302)       ctrl.mret   = 1'b1;
          else if (imm12 == 12'h105)       ctrl = CTRL_NOP;   // WFI
          else                             ctrl.illegal = 1'b1;
        end else if (funct3 == 3'b100) begin
          ctrl.illegal = 1'b1;
        end else begin
          ctrl.csr_op    = 1'b1;
          ctrl.reg_write = 1'b1;
          ctrl.wb_src    = WB_CSR;
          ctrl.a_sel     = funct3[2] ? A_ZIMM : A_RS1;
          ctrl.b_sel     = B_CSR;
          ctrl.uses_rs1  = !funct3[2];
          // CSRRS/CSRRC with rs1 = x0 (or zimm = 0) only read
          ctrl.csr_we    = (funct3[1:0] == 2'b01) || (rs1 != 5'd0);
        end
      end
      default: ctrl.illegal = 1'b1;
    endcase
  end
endmodule
