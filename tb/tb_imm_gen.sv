// tb_imm_gen: checks the immediate generator for every format, given the
// format the decoder would report for each opcode (I for loads,
// OP-IMM, JALR and SYSTEM; S; B; U for LUI/AUIPC; J) with random instruction
// words, against the sign-extended immediates of the RISC-V specification.
// Combinational (zero-cycle latency).
// The paper only names the block.
module tb_imm_gen;
  logic [31:0] in;
  logic [6:0] opcode; rv_pkg::fmt_e fmt; logic [24:0] raw_imm; logic [63:0] imm, e;
  int checks = 0, failures = 0;
  imm_gen #(.XLEN(64)) dut (.fmt, .raw_imm, .imm);
  logic [6:0] ops [10] = '{7'b0000011, 7'b0010011, 7'b0011011, 7'b1100111, 7'b1110011,
                          7'b0100011, 7'b1100011, 7'b0110111, 7'b0010111, 7'b1101111};

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      in = $urandom;
      in[6:0] = ops[i % 10];
      opcode = in[6:0]; raw_imm = in[31:7];
      // format as the RISC-V specification assigns it to each opcode
      case (opcode)
        7'b0100011: fmt = rv_pkg::FMT_S;
        7'b1100011: fmt = rv_pkg::FMT_B;
        7'b0110111, 7'b0010111: fmt = rv_pkg::FMT_U;
        7'b1101111: fmt = rv_pkg::FMT_J;
        default:    fmt = rv_pkg::FMT_I;
      endcase
      #1;
      case (opcode)
        7'b0100011: e = {{52{in[31]}}, in[31:25], in[11:7]};
        7'b1100011: e = {{51{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
        7'b0110111, 7'b0010111: e = {{32{in[31]}}, in[31:12], 12'b0};
        7'b1101111: e = {{43{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
        default:    e = {{52{in[31]}}, in[31:20]};
      endcase
      checks++;
      if (imm !== e) begin failures++; $display("FAIL: %h imm %h expected %h", in, imm, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
