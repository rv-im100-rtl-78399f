// tb_alu: checks the dual-width ALU. Single-cycle operations (ADD, SUB,
// shifts, compares, logic, PASS_A, ANDN) are checked combinationally in
// 64-bit and 32-bit (sign-extended W) form. For the M operations the start
// pulse is given for one cycle with the operation held, md_done must arrive
// after 3 clocks for multiplies and XLEN + 3 (64-bit) or 35 (W form) clocks
// for divides, and the result must match the RISC-V definition of MUL,
// MULH, MULHSU, MULHU, DIV, DIVU, REM, REMU and their W forms. The zero
// flag is checked on every result.
// The expected values come from the RISC-V specification, not from the RTL; the dual-width structure and the M-unit latencies under test follow the paper.
module tb_alu;
  import rv_pkg::*;
  logic clk = 0, rst = 1, ce = 1, is_word = 0, mul_start = 0, div_start = 0;
  alu_op_e alu_op = ALU_ADD;
  logic [63:0] src_a = 0, src_b = 0, result, e;
  logic zero, mul_busy, div_busy, md_done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  alu #(.XLEN(64)) dut (.*);

  function automatic logic [63:0] sx(logic [31:0] v); return {{32{v[31]}}, v}; endfunction
  function automatic logic [63:0] pick();
    case ($urandom_range(0, 6))
      0: return '0; 1: return '1; 2: return 64'h8000_0000_0000_0000; 3: return 64'(32'h8000_0000);
      4: return 64'($urandom_range(0, 70));
      default: return {$urandom, $urandom};
    endcase
  endfunction

  function automatic logic [63:0] ref_single(alu_op_e op, bit w, logic [63:0] a, logic [63:0] b);
    logic [31:0] aw, bw;
    aw = a[31:0]; bw = b[31:0];
    if (w) case (op)
      ALU_SUB: return sx(aw - bw);
      ALU_SLL: return sx(aw << bw[4:0]);
      ALU_SRL: return sx(aw >> bw[4:0]);
      ALU_SRA: return sx(32'($signed(aw) >>> bw[4:0]));
      default: return sx(aw + bw);
    endcase
    case (op)
      ALU_ADD: return a + b;          ALU_SUB: return a - b;
      ALU_SLL: return a << b[5:0];    ALU_SRL: return a >> b[5:0];
      ALU_SRA: return 64'($signed(a) >>> b[5:0]);
      ALU_SLT: return 64'($signed(a) < $signed(b)); ALU_SLTU: return 64'(a < b);
      ALU_XOR: return a ^ b; ALU_OR: return a | b; ALU_AND: return a & b;
      ALU_PASS_A: return a;  ALU_ANDN: return b & ~a;
      default: return 'x;
    endcase
  endfunction

  function automatic logic [63:0] ref_md(alu_op_e op, bit w, logic [63:0] a, logic [63:0] b);
    logic [127:0] p; logic [63:0] q, r; logic [31:0] aw, bw, qw, rw;
    aw = a[31:0]; bw = b[31:0];
    if (w) begin
      if (op == ALU_MUL) return sx(aw * bw);
      if (bw == 0) begin qw = '1; rw = aw; end
      else if ((op == ALU_DIV || op == ALU_REM) && aw == 32'h8000_0000 && bw == '1) begin qw = aw; rw = 0; end
      else if (op == ALU_DIV || op == ALU_REM) begin qw = 32'($signed(aw) / $signed(bw)); rw = 32'($signed(aw) % $signed(bw)); end
      else begin qw = aw / bw; rw = aw % bw; end
      return (op == ALU_DIV || op == ALU_DIVU) ? sx(qw) : sx(rw);
    end
    case (op)
      ALU_MUL:    return a * b;
      ALU_MULH:   begin p = {{64{a[63]}}, a} * {{64{b[63]}}, b}; return p[127:64]; end
      ALU_MULHSU: begin p = {{64{a[63]}}, a} * {64'b0, b}; return p[127:64]; end
      ALU_MULHU:  begin p = {64'b0, a} * {64'b0, b}; return p[127:64]; end
      default: begin
        if (b == 0) begin q = '1; r = a; end
        else if ((op == ALU_DIV || op == ALU_REM) && a == 64'h8000_0000_0000_0000 && b == '1) begin q = a; r = 0; end
        else if (op == ALU_DIV || op == ALU_REM) begin q = 64'($signed(a) / $signed(b)); r = 64'($signed(a) % $signed(b)); end
        else begin q = a / b; r = a % b; end
        return (op == ALU_DIV || op == ALU_DIVU) ? q : r;
      end
    endcase
  endfunction

  initial begin : watchdog
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  alu_op_e sops [13] = '{ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
                         ALU_OR, ALU_AND, ALU_PASS_A, ALU_ANDN, ALU_ADD};
  alu_op_e mops [8] = '{ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU, ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU};
  alu_op_e wops [5] = '{ALU_MUL, ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU};

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 3000; i++) begin
      is_word = $urandom_range(0, 2) == 0;
      alu_op = is_word ? sops[$urandom_range(0, 3) == 0 ? 1 : ($urandom_range(0, 1) ? 2 : 6 + $urandom_range(0, 1))] : sops[$urandom_range(0, 12)];
      if (is_word && $urandom_range(0, 3) == 0) alu_op = ALU_ADD;
      src_a = pick(); src_b = pick();
      #1;
      e = ref_single(alu_op, is_word, src_a, src_b);
      checks++;
      if (result !== e || zero !== (e == 0)) begin
        failures++; $display("FAIL: %s w=%b %h %h = %h expected %h", alu_op.name(), is_word, src_a, src_b, result, e);
      end
    end
    for (int i = 0; i < 400; i++) begin
      int lat, want;
      bit is_mul;
      is_word = $urandom_range(0, 2) == 0;
      alu_op = is_word ? wops[$urandom_range(0, 4)] : mops[$urandom_range(0, 7)];
      is_mul = (alu_op == ALU_MUL || alu_op == ALU_MULH || alu_op == ALU_MULHSU || alu_op == ALU_MULHU);
      want = is_mul ? 3 : (is_word ? 35 : 67);
      src_a = pick(); src_b = pick();
      @(negedge clk);
      mul_start = is_mul; div_start = !is_mul;
      @(negedge clk); mul_start = 0; div_start = 0; lat = 1;
      while (!md_done && lat < 200) begin @(negedge clk); lat++; end
      e = ref_md(alu_op, is_word, src_a, src_b);
      checks++;
      if (lat != want || result !== e || zero !== (e == 0)) begin
        failures++;
        $display("FAIL: %s w=%b %h %h = %h expected %h latency %0d/%0d", alu_op.name(), is_word, src_a, src_b, result, e, lat, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
