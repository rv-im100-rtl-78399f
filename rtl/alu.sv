// alu: the EX-stage arithmetic unit of the RV64IM core, in dual-width form.
//
// A 64-bit datapath and a 32-bit datapath compute in parallel; for W-suffix
// instructions (is_word) the 32-bit result is sign-extended to XLEN and chosen,
// otherwise the full-width one. The M extension uses the same split: a
// doubleword multiplier (four 32 x 32 partial products) and divider serve
// MUL/MULH/MULHSU/MULHU/DIV/DIVU/REM/REMU, a word multiplier and divider serve
// MULW/DIVW/DIVUW/REMW/REMUW. Integer operations are combinational; an M
// operation begins with mul_start/div_start from the ALU controller and its
// result is valid when md_done pulses (multiply: 3 clocks; divide: N + 3),
// after which it holds until the next start. zero is set when the
// result is zero (used by BEQ/BNE). Shifts use a 6-bit amount for doublewords
// and 5 bits for words. The dual-width structure and the units are the
// paper's; ALU_PASS_A and ALU_ANDN exist to form CSR write data and are this
// design's choice. XLEN must be 64 (the RV64IM configuration); the 32-bit
// path is what an RV32 build would keep.
module alu #(
  parameter int unsigned XLEN = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ce,
  input  rv_pkg::alu_op_e alu_op,
  input  logic            is_word,
  input  logic [XLEN-1:0] src_a,
  input  logic [XLEN-1:0] src_b,
  input  logic            mul_start,
  input  logic            div_start,
  output logic [XLEN-1:0] result,
  output logic            zero,
  output logic            mul_busy,
  output logic            div_busy,
  output logic            md_done
);
  import rv_pkg::*;
  localparam int unsigned SW = $clog2(XLEN);

  // ---------------- full-width integer datapath ----------------
  logic [XLEN-1:0] r_d;
  logic [SW-1:0]   sh_d;
  assign sh_d = src_b[SW-1:0];
  always_comb begin
    unique case (alu_op)
      ALU_SUB:    r_d = src_a - src_b;
      ALU_SLL:    r_d = src_a << sh_d;
      ALU_SLT:    r_d = XLEN'($signed(src_a) < $signed(src_b));
      ALU_SLTU:   r_d = XLEN'(src_a < src_b);
      ALU_XOR:    r_d = src_a ^ src_b;
      ALU_SRL:    r_d = src_a >> sh_d;
      ALU_SRA:    r_d = XLEN'($signed(src_a) >>> sh_d);
      ALU_OR:     r_d = src_a | src_b;
      ALU_AND:    r_d = src_a & src_b;
      ALU_PASS_A: r_d = src_a;
      ALU_ANDN:   r_d = src_b & ~src_a;
      default:    r_d = src_a + src_b;
    endcase
  end

  // ---------------- 32-bit integer datapath ----------------
  logic [31:0] a_w, b_w, r_w;
  assign a_w = src_a[31:0];
  assign b_w = src_b[31:0];
  always_comb begin
    unique case (alu_op)
      ALU_SUB: r_w = a_w - b_w;
      ALU_SLL: r_w = a_w << b_w[4:0];
      ALU_SRL: r_w = a_w >> b_w[4:0];
      ALU_SRA: r_w = $signed(a_w) >>> b_w[4:0];
      default: r_w = a_w + b_w;
    endcase
  end

  // ---------------- M extension units ----------------
  logic is_mulop, is_divop, is_signed_div, use_word;
  assign is_mulop      = (alu_op == ALU_MUL) || (alu_op == ALU_MULH) ||
                         (alu_op == ALU_MULHSU) || (alu_op == ALU_MULHU);
  assign is_divop      = (alu_op == ALU_DIV) || (alu_op == ALU_DIVU) ||
                         (alu_op == ALU_REM) || (alu_op == ALU_REMU);
  assign is_signed_div = (alu_op == ALU_DIV) || (alu_op == ALU_REM);
  assign use_word      = is_word;

  logic [2*XLEN-1:0] prod_d;
  logic [63:0]       prod_w;
  logic [XLEN-1:0]   q_d, rem_d;
  logic [31:0]       q_w, rem_w;
  logic              mv_d, mv_w, dv_d, dv_w, mb_d, mb_w, db_d, db_w;

  multiplier #(.N(XLEN)) u_mul_d (
    .clk, .rst, .ce, .start(mul_start && !use_word), .a(src_a), .b(src_b),
    .a_signed(alu_op == ALU_MULH || alu_op == ALU_MULHSU || alu_op == ALU_MUL),
    .b_signed(alu_op == ALU_MULH || alu_op == ALU_MUL),
    .result(prod_d), .valid(mv_d), .busy(mb_d));

  multiplier #(.N(32)) u_mul_w (
    .clk, .rst, .ce, .start(mul_start && use_word), .a(a_w), .b(b_w),
    .a_signed(alu_op != ALU_MULHU), .b_signed(alu_op == ALU_MULH || alu_op == ALU_MUL),
    .result(prod_w), .valid(mv_w), .busy(mb_w));

  divider #(.N(XLEN)) u_div_d (
    .clk, .rst, .ce, .start(div_start && !use_word), .dividend(src_a), .divisor(src_b),
    .is_signed(is_signed_div), .quotient(q_d), .remainder(rem_d), .busy(db_d), .done(dv_d));

  divider #(.N(32)) u_div_w (
    .clk, .rst, .ce, .start(div_start && use_word), .dividend(a_w), .divisor(b_w),
    .is_signed(is_signed_div), .quotient(q_w), .remainder(rem_w), .busy(db_w), .done(dv_w));

  assign mul_busy = mb_d || mb_w;
  assign div_busy = db_d || db_w;
  assign md_done  = mv_d || mv_w || dv_d || dv_w;

  function automatic logic [XLEN-1:0] sext32(input logic [31:0] v);
    return {{(XLEN-32){v[31]}}, v};
  endfunction

  // ---------------- result selection by width ----------------
  always_comb begin
    if (is_mulop) begin
      if (use_word)                result = (alu_op == ALU_MUL) ? sext32(prod_w[31:0]) : sext32(prod_w[63:32]);
      else if (alu_op == ALU_MUL)  result = prod_d[XLEN-1:0];
      else                         result = prod_d[2*XLEN-1:XLEN];
    end else if (is_divop) begin
      if (use_word) result = (alu_op == ALU_DIV || alu_op == ALU_DIVU) ? sext32(q_w) : sext32(rem_w);
      else          result = (alu_op == ALU_DIV || alu_op == ALU_DIVU) ? q_d : rem_d;
    end else if (is_word) begin
      result = sext32(r_w);
    end else begin
      result = r_d;
    end
  end

  assign zero = (result == '0);
endmodule
