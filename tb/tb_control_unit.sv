// tb_control_unit: checks the main decoder. Directed cases check the control
// word of one instruction of every class (LUI, AUIPC, JAL, JALR, branch,
// load, store, OP-IMM, OP-IMM-32, OP, OP-32, M, CSR read-only and write,
// ECALL, EBREAK, MRET, FENCE). Then 5000 random instruction words are
// checked against an independent legality function of RV64IM_Zicsr, and
// every legal word must have a consistent control word (loads write via
// WB_MEM, stores do not write registers, etc.). Combinational.
// The expected values come from the RISC-V specification, not from the RTL; the write-back source codes checked are the ones printed in the paper's block diagram.
module tb_control_unit;
  import rv_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] in;
  ctrl_t ctrl;
  int checks = 0, failures = 0;
  control_unit dut (.opcode(in[6:0]), .funct3(in[14:12]), .funct7(in[31:25]), .rs1(in[19:15]),
                    .rd(in[11:7]), .imm12(in[31:20]), .ctrl);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %h %s", in, s); end
  endtask

  function automatic bit legal(logic [31:0] w);
    logic [6:0] op, f7; logic [2:0] f3;
    op = w[6:0]; f3 = w[14:12]; f7 = w[31:25];
    case (op)
      7'b0110111, 7'b0010111, 7'b1101111: return 1;
      7'b1100111: return f3 == 0;
      7'b1100011: return f3 != 2 && f3 != 3;
      7'b0000011: return f3 != 7;
      7'b0100011: return f3 < 4;
      7'b0010011: return (f3 == 1) ? w[31:26] == 0 : (f3 == 5) ? (w[31:26] == 0 || w[31:26] == 6'b010000) : 1;
      7'b0011011: return f3 == 0 || (f3 == 1 && f7 == 0) || (f3 == 5 && (f7 == 0 || f7 == 7'h20));
      7'b0110011: return f7 == 0 || f7 == 1 || (f7 == 7'h20 && (f3 == 0 || f3 == 5));
      7'b0111011: return (f7 == 1 && (f3 == 0 || f3 >= 4)) ||
                         (f7 == 0 && (f3 == 0 || f3 == 1 || f3 == 5)) || (f7 == 7'h20 && (f3 == 0 || f3 == 5));
      7'b0001111: return f3 <= 1;
      7'b1110011: begin
        if (f3 == 4) return 0;
        if (f3 != 0) return 1;
        return w[19:7] == 0 && (w[31:20] == 0 || w[31:20] == 1 || w[31:20] == 12'h302 || w[31:20] == 12'h105);
      end
      default: return 0;
    endcase
  endfunction

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in = LUI(5, 'h12345); #1;
    check(ctrl.reg_write && ctrl.wb_src == WB_IMM && !ctrl.illegal, "LUI");
    in = AUIPC(5, 1); #1;
    check(ctrl.reg_write && ctrl.wb_src == WB_ALU && ctrl.a_sel == A_PC && ctrl.b_sel == B_IMM, "AUIPC");
    in = JAL(1, 8); #1;
    check(ctrl.jump && ctrl.wb_src == WB_PC4 && ctrl.a_sel == A_PC && !ctrl.uses_rs1, "JAL");
    in = JALR(1, 2, 0); #1;
    check(ctrl.jump && ctrl.wb_src == WB_PC4 && ctrl.uses_rs1 && ctrl.a_sel == A_RS1, "JALR");
    in = BNE(1, 2, 8); #1;
    check(ctrl.branch && !ctrl.reg_write && ctrl.uses_rs1 && ctrl.uses_rs2, "BNE");
    in = LD(3, 4, 8); #1;
    check(ctrl.mem_read && ctrl.reg_write && ctrl.wb_src == WB_MEM && ctrl.b_sel == B_IMM, "LD");
    in = SD(3, 4, 8); #1;
    check(ctrl.mem_write && !ctrl.reg_write && ctrl.uses_rs2, "SD");
    in = ADDIW(3, 4, -1); #1;
    check(ctrl.is_word && ctrl.reg_write && ctrl.wb_src == WB_ALU && !ctrl.uses_rs2, "ADDIW");
    in = SUB(3, 4, 5); #1;
    check(!ctrl.is_word && ctrl.uses_rs2 && ctrl.b_sel == B_RS2, "SUB");
    in = MOPW(4, 3, 4, 5); #1;
    check(ctrl.is_word && !ctrl.illegal, "DIVW");
    in = CSR(2, 3, 12'h300, 0); #1;
    check(ctrl.csr_op && !ctrl.csr_we && ctrl.wb_src == WB_CSR, "CSRRS x0 reads only");
    in = CSR(1, 0, 12'h300, 7); #1;
    check(ctrl.csr_op && ctrl.csr_we && ctrl.uses_rs1, "CSRRW writes");
    in = CSR(5, 0, 12'h300, 7); #1;
    check(ctrl.csr_we && !ctrl.uses_rs1 && ctrl.a_sel == A_ZIMM, "CSRRWI uses zimm");
    in = ECALL(); #1;  check(ctrl.ecall && !ctrl.reg_write, "ECALL");
    in = EBREAK(); #1; check(ctrl.ebreak, "EBREAK");
    in = MRET(); #1;   check(ctrl.mret && !ctrl.illegal, "MRET");
    in = 32'h0000_000F; #1; check(!ctrl.illegal && !ctrl.reg_write, "FENCE is a no-op");

    for (int i = 0; i < 5000; i++) begin
      in = $urandom;
      if (i % 2 == 0) in[1:0] = 2'b11;
      #1;
      check(ctrl.illegal == !legal(in), $sformatf("illegal=%b", ctrl.illegal));
      if (!ctrl.illegal) begin
        check(!(ctrl.mem_read && ctrl.mem_write), "load and store at once");
        check(!ctrl.mem_read || ctrl.wb_src == WB_MEM, "load writes memory data");
        check(!(ctrl.mem_write || ctrl.branch) || !ctrl.reg_write, "store/branch writes no register");
        check(ctrl.reg_write == (ctrl.wb_src != WB_NONE), "wb_src set exactly when writing");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
