// tb_exception_detector: checks the BR-stage exception detector with random
// control words and addresses against a reference: illegal instruction (2,
// tval = instruction), ECALL (11), EBREAK (3), misaligned jump target (0),
// misaligned taken-branch target (0), misaligned load (4) and store (6)
// with the size from funct3, in that priority; nothing when not valid; mret
// passes through. Combinational.
// Detection in BR follows the paper; the cause codes and priority are the RISC-V privileged specification's.
module tb_exception_detector;
  import rv_pkg::*;
  logic valid, btaken, exception, mret;
  ctrl_t ctrl;
  logic [31:0] instr;
  logic [63:0] alu_result, btarget, tval, et;
  logic [3:0] cause;
  int ec; bit ee;
  int checks = 0, failures = 0;
  exception_detector #(.XLEN(64)) dut (.*);

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_each [16];
    foreach (n_each[i]) n_each[i] = 0;
    for (int i = 0; i < 5000; i++) begin
      ctrl = CTRL_NOP;
      valid = $urandom_range(0, 7) != 0;
      ctrl.illegal = $urandom_range(0, 9) == 0; ctrl.ecall = $urandom_range(0, 9) == 0;
      ctrl.ebreak = $urandom_range(0, 9) == 0;  ctrl.mret = $urandom_range(0, 9) == 0;
      case ($urandom_range(0, 3))
        0: ctrl.jump = 1; 1: ctrl.branch = 1; 2: ctrl.mem_read = 1; default: ctrl.mem_write = 1;
      endcase
      instr = $urandom; alu_result = {$urandom, $urandom}; btarget = {$urandom, $urandom};
      btaken = $urandom_range(0, 1);
      #1;
      ee = 1; et = 0; ec = 0;
      if (!valid) ee = 0;
      else if (ctrl.illegal) begin ec = 2; et = 64'(instr); end
      else if (ctrl.ecall) ec = 11;
      else if (ctrl.ebreak) ec = 3;
      else if (ctrl.jump && alu_result[1]) begin ec = 0; et = alu_result & ~64'd1; end
      else if (ctrl.branch && btaken && btarget[1]) begin ec = 0; et = btarget; end
      else if ((ctrl.mem_read || ctrl.mem_write) &&
               ((instr[13:12] == 1 && alu_result[0]) || (instr[13:12] == 2 && alu_result[1:0] != 0) ||
                (instr[13:12] == 3 && alu_result[2:0] != 0))) begin
        ec = ctrl.mem_read ? 4 : 6; et = alu_result;
      end else ee = 0;
      checks++;
      if (exception !== ee || (ee && (cause !== 4'(ec) || tval !== et)) || mret !== (valid && ctrl.mret)) begin
        failures++; $display("FAIL: exc %b/%b cause %0d/%0d tval %h/%h", exception, ee, cause, ec, tval, et);
      end
      if (ee) n_each[ec]++;
    end
    checks++;
    if (n_each[0] == 0 || n_each[2] == 0 || n_each[3] == 0 || n_each[4] == 0 || n_each[6] == 0 || n_each[11] == 0) begin
      failures++; $display("FAIL: not every cause exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
