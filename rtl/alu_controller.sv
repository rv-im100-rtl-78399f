// alu_controller: decodes the EX-stage instruction into an ALU operation and
// starts the multi-cycle multiplier and divider.
//
// alu_op is combinational from opcode, funct3, funct7 and imm[10] (instr[30],
// which tells SRAI from SRLI). For an M-extension instruction in EX,
// mul_start or div_start is raised in the first EX cycle only: an in-flight
// register remembers that the operation was started so it is not started
// again while the pipeline stalls, and a ready register remembers that it
// finished. md_wait asks the hazard unit to stall the whole pipeline until the
// unit reports completion (md_done). Both registers clear when the
// instruction leaves EX (ex_advance) or is flushed (ex_kill). Because md_wait
// freezes the pipeline, an unfinished M instruction is never flushed: a
// redirect from an older branch in BR waits until the result is in. The signal names
// mul_start, div_start, ex_kill and the in-flight tracking are the paper's;
// the ALU operation encoding is this design's.
module alu_controller (
  input  logic             clk,
  input  logic             rst,
  input  logic             ce,
  input  logic             valid,
  input  logic [6:0]       opcode,
  input  logic [2:0]       funct3,
  input  logic [6:0]       funct7,
  input  logic             imm10,
  input  logic             ex_advance,
  input  logic             ex_kill,
  input  logic             md_done,
  output rv_pkg::alu_op_e  alu_op,
  output logic             mul_start,
  output logic             div_start,
  output logic             md_wait
);
  import rv_pkg::*;

  logic is_m, is_mul, is_div, inflight, ready;

  always_comb begin
    is_m   = 1'b0;
    alu_op = ALU_ADD;
    unique case (opcode)
      OPC_OP, OPC_OP_32: begin
        if (funct7 == 7'b0000001) begin
          is_m = 1'b1;
          unique case (funct3)
            3'd0: alu_op = ALU_MUL;
            3'd1: alu_op = ALU_MULH;
            3'd2: alu_op = ALU_MULHSU;
            3'd3: alu_op = ALU_MULHU;
            3'd4: alu_op = ALU_DIV;
            3'd5: alu_op = ALU_DIVU;
            3'd6: alu_op = ALU_REM;
            default: alu_op = ALU_REMU;
          endcase
        end else begin
          unique case (funct3)
            3'd0: alu_op = funct7[5] ? ALU_SUB : ALU_ADD;
            3'd1: alu_op = ALU_SLL;
            3'd2: alu_op = ALU_SLT;
            3'd3: alu_op = ALU_SLTU;
            3'd4: alu_op = ALU_XOR;
            3'd5: alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
            3'd6: alu_op = ALU_OR;
            default: alu_op = ALU_AND;
          endcase
        end
      end
      OPC_OP_IMM, OPC_OP_IMM_32: begin
        unique case (funct3)
          3'd0: alu_op = ALU_ADD;
          3'd1: alu_op = ALU_SLL;
          3'd2: alu_op = ALU_SLT;
          3'd3: alu_op = ALU_SLTU;
          3'd4: alu_op = ALU_XOR;
          3'd5: alu_op = imm10 ? ALU_SRA : ALU_SRL;
          3'd6: alu_op = ALU_OR;
          default: alu_op = ALU_AND;
        endcase
      end
      OPC_BRANCH: begin
        unique case (funct3[2:1])
          2'b00:   alu_op = ALU_SUB;   // BEQ/BNE use the zero flag
          2'b10:   alu_op = ALU_SLT;   // BLT/BGE
          default: alu_op = ALU_SLTU;  // BLTU/BGEU
        endcase
      end
      OPC_SYSTEM: begin
        unique case (funct3[1:0])
          2'b01:   alu_op = ALU_PASS_A;  // CSRRW(I)
          2'b10:   alu_op = ALU_OR;      // CSRRS(I)
          default: alu_op = ALU_ANDN;    // CSRRC(I), also non-CSR SYSTEM (unused)
        endcase
      end
      default: alu_op = ALU_ADD;
    endcase
  end

  assign is_mul = valid && is_m && !funct3[2];
  assign is_div = valid && is_m &&  funct3[2];

  assign mul_start = is_mul && !inflight;
  assign div_start = is_div && !inflight;
  assign md_wait   = (is_mul || is_div) && !ready && !md_done;

  always_ff @(posedge clk) begin
    if (rst) begin
      inflight <= 1'b0;
      ready    <= 1'b0;
    end else if (ce) begin
      if (ex_advance || ex_kill) begin
        inflight <= 1'b0;
        ready    <= 1'b0;
      end else begin
        if (mul_start || div_start) inflight <= 1'b1;
        if (inflight && md_done)    ready    <= 1'b1;
      end
    end
  end
endmodule
