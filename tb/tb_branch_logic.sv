// tb_branch_logic: checks branch resolution in BR for all six conditions
// from the ALU flags (zero after SUB for BEQ/BNE, bit 0 after SLT/SLTU for
// the others), the taken target pc + imm, the actual next PC (target or
// pc + 4) and the misprediction flag (taken differs from the IO-stage
// prediction). Non-branches never mispredict. Combinational.
// Resolution in BR and the misprediction flag follow the paper; the port names are read from its block diagram.
module tb_branch_logic;
  logic branch, branch_est, alu_zero, btaken, bp_miss, t;
  logic [2:0] funct3;
  logic [63:0] pc, imm, alu_result, btaken_target, btarget_actu, a, b;
  int checks = 0, failures = 0;
  branch_logic #(.XLEN(64)) dut (.*);

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int fs [6] = '{0, 1, 4, 5, 6, 7};
  initial begin
    for (int i = 0; i < 3000; i++) begin
      funct3 = 3'(fs[$urandom_range(0, 5)]);
      a = {$urandom, $urandom}; b = $urandom_range(0, 3) == 0 ? a : {$urandom, $urandom};
      // the ALU flags the branch would see
      case (funct3)
        0, 1: begin alu_result = a - b; t = (funct3 == 0) ? (a == b) : (a != b); end
        4, 5: begin alu_result = 64'($signed(a) < $signed(b)); t = (funct3 == 4) ? alu_result[0] : !alu_result[0]; end
        default: begin alu_result = 64'(a < b); t = (funct3 == 6) ? alu_result[0] : !alu_result[0]; end
      endcase
      alu_zero = (alu_result == 0);
      branch = $urandom_range(0, 4) != 0; branch_est = $urandom_range(0, 1);
      pc = {$urandom, $urandom}; imm = 64'(longint'($urandom_range(0, 8190)) - 4096);
      #1;
      checks++;
      if (btaken !== (branch && t) || btaken_target !== pc + imm ||
          btarget_actu !== ((branch && t) ? pc + imm : pc + 4) ||
          bp_miss !== (branch && ((branch && t) != branch_est))) begin
        failures++; $display("FAIL: f3=%0d a=%h b=%h taken %b", funct3, a, b, btaken);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
