// tb_instr_decoder: checks the instruction decoder's format decision and
// field split. For every base opcode (and for random, mostly illegal ones)
// the expected format is taken from a table of the RISC-V specification, and
// the fields are expected at the base-format bit positions, with rs1 read as
// x0 for U/J, rs2 as x0 for I/U/J and rd as x0 for S/B. Assembled
// instructions are checked too. Combinational (zero-cycle latency).
// The paper only names the block; masking unused specifiers is this
// design's choice.
module tb_instr_decoder;
  import rv_asm_pkg::*;
  import rv_pkg::fmt_e;
  logic [31:0] instr;
  fmt_e fmt, e_fmt;
  logic [6:0] opcode, funct7; logic [2:0] funct3; logic [4:0] rs1, rs2, rd; logic [24:0] raw_imm;
  logic [4:0] e_rs1, e_rs2, e_rd;
  int checks = 0, failures = 0;
  instr_decoder dut (.*);

  logic [6:0] ops [13] = '{7'b0000011, 7'b0001111, 7'b0010011, 7'b0010111, 7'b0011011, 7'b0100011,
                           7'b0110011, 7'b0110111, 7'b0111011, 7'b1100011, 7'b1100111, 7'b1101111,
                           7'b1110011};

  function automatic fmt_e spec_fmt(logic [6:0] op);
    case (op)
      7'b0110011, 7'b0111011: return rv_pkg::FMT_R;
      7'b0100011:             return rv_pkg::FMT_S;
      7'b1100011:             return rv_pkg::FMT_B;
      7'b0110111, 7'b0010111: return rv_pkg::FMT_U;
      7'b1101111:             return rv_pkg::FMT_J;
      default:                return rv_pkg::FMT_I;
    endcase
  endfunction

  task automatic check_word();
    #1;
    e_fmt = spec_fmt(instr[6:0]);
    e_rs1 = (e_fmt inside {rv_pkg::FMT_U, rv_pkg::FMT_J}) ? 5'd0 : instr[19:15];
    e_rs2 = (e_fmt inside {rv_pkg::FMT_R, rv_pkg::FMT_S, rv_pkg::FMT_B}) ? instr[24:20] : 5'd0;
    e_rd  = (e_fmt inside {rv_pkg::FMT_S, rv_pkg::FMT_B}) ? 5'd0 : instr[11:7];
    checks++;
    if (fmt !== e_fmt || opcode !== instr[6:0] || funct3 !== instr[14:12] || funct7 !== instr[31:25] ||
        rs1 !== e_rs1 || rs2 !== e_rs2 || rd !== e_rd || raw_imm !== instr[31:7]) begin
      failures++;
      $display("FAIL: %h fmt %0d/%0d rs1 %0d/%0d rs2 %0d/%0d rd %0d/%0d", instr, fmt, e_fmt,
               rs1, e_rs1, rs2, e_rs2, rd, e_rd);
    end
  endtask

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 1300; i++) begin
      instr = $urandom;
      if (i < 1000) instr[6:0] = ops[i % 13];
      check_word();
    end
    for (int i = 0; i < 200; i++) begin
      instr = ADD($urandom_range(0, 31), $urandom_range(0, 31), $urandom_range(0, 31));
      check_word();
    end
    instr = ADD(7, 9, 30); #1;
    checks++; if (rd != 7 || rs1 != 9 || rs2 != 30 || opcode != 7'b0110011) begin failures++; $display("FAIL: ADD fields"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
