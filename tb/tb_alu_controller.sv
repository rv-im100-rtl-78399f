// tb_alu_controller: checks the ALU operation decode for every OP, OP-32,
// OP-IMM, branch and CSR form, and the multiply/divide start handshake:
// mul_start/div_start pulse in the first EX cycle only, md_wait stays high
// until md_done (which here comes 3 cycles after start, as from the
// multiplier), and the in-flight state clears when the instruction leaves
// EX so the next M instruction starts again.
// The once-per-instruction start and the freeze until done follow the paper's stall description; the operation encoding checked is this design's.
module tb_alu_controller;
  import rv_pkg::*;
  logic clk = 0, rst = 1, ce = 1;
  logic valid = 0, imm10 = 0, ex_advance = 0, ex_kill = 0, md_done = 0;
  logic [6:0] opcode = 0, funct7 = 0; logic [2:0] funct3 = 0;
  alu_op_e alu_op;
  logic mul_start, div_start, md_wait;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  alu_controller dut (.*);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  alu_op_e rop [8] = '{ALU_ADD, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_OR, ALU_AND};
  alu_op_e mop [8] = '{ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU, ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU};

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    // decode
    for (int f = 0; f < 8; f++) begin
      funct3 = 3'(f);
      opcode = 7'b0110011; funct7 = 0; #1; check(alu_op == rop[f], $sformatf("OP f3=%0d", f));
      funct7 = 7'h20; #1;
      if (f == 0) check(alu_op == ALU_SUB, "SUB");
      if (f == 5) check(alu_op == ALU_SRA, "SRA");
      funct7 = 1; #1; check(alu_op == mop[f], $sformatf("M f3=%0d", f));
      opcode = 7'b0111011; #1; check(alu_op == mop[f], $sformatf("M-W f3=%0d", f));
      opcode = 7'b0010011; funct7 = 0; imm10 = 0; #1; check(alu_op == rop[f], $sformatf("OP-IMM f3=%0d", f));
      imm10 = 1; #1; if (f == 5) check(alu_op == ALU_SRA, "SRAI");
      imm10 = 0;
      opcode = 7'b1100011; #1;
      if (f != 2 && f != 3) check(alu_op == (f < 2 ? ALU_SUB : f < 6 ? ALU_SLT : ALU_SLTU), $sformatf("branch f3=%0d", f));
    end
    opcode = 7'b1110011; funct3 = 1; #1; check(alu_op == ALU_PASS_A, "CSRRW");
    funct3 = 2; #1; check(alu_op == ALU_OR, "CSRRS");
    funct3 = 3; #1; check(alu_op == ALU_ANDN, "CSRRC");

    // handshake: two multiplies back to back, then a divide
    for (int k = 0; k < 3; k++) begin
      int waited;
      @(negedge clk);
      opcode = 7'b0110011; funct7 = 1; funct3 = (k == 2) ? 3'd4 : 3'd0; valid = 1; ex_advance = 0;
      #1;
      check((k == 2 ? div_start : mul_start) && md_wait, "start and wait in the first EX cycle");
      waited = 0;
      for (int c = 1; c <= 3; c++) begin
        @(negedge clk);
        md_done = (c == 3);
        #1;
        check(!mul_start && !div_start, "no second start while in flight");
        if (md_wait) waited++;
      end
      check(!md_wait, "md_wait drops with md_done");
      check(waited == 2, $sformatf("stalled %0d cycles after the first, expected 2", waited));
      ex_advance = 1;
      @(negedge clk); md_done = 0; ex_advance = 0; valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
