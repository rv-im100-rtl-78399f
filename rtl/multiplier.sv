// multiplier: 3-stage pipelined N x N -> 2N multiplier built for FPGA DSPs.
//
//   stage 1: registers the operands, taking each operand's sign (when that
//            operand is signed) and replacing it by its unsigned absolute
//            value; the product sign is the XOR of the two signs;
//   stage 2: unsigned multiplication. For N = 64 the product is split into
//            four parallel 32 x 32 multiplications (lo*lo, lo*hi, hi*lo,
//            hi*hi), for N = 32 it is one 32 x 32 multiplication;
//   stage 3: accumulates the partial products and negates the sum when the
//            product sign is negative.
// start is sampled in stage 1; valid pulses for one cycle three clocks later
// with the full 2N-bit product on result, which then holds until the next
// result. busy is high while an operation is in stages 1-2. The stage split,
// the absolute-value/sign-correction scheme and the four-way 32 x 32
// decomposition are the paper's; the port names are this design's.
module multiplier #(
  parameter int unsigned N = 64
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           ce,
  input  logic           start,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           a_signed,
  input  logic           b_signed,
  output logic [2*N-1:0] result,
  output logic           valid,
  output logic           busy
);
  localparam int unsigned H = N / 2;

  // stage 1
  logic         s1_v, s1_neg;
  logic [N-1:0] s1_a, s1_b;
  // stage 2
  logic         s2_v, s2_neg;

  logic a_neg, b_neg;
  assign a_neg = a_signed && a[N-1];
  assign b_neg = b_signed && b[N-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_v <= 1'b0; s2_v <= 1'b0; valid <= 1'b0;
      s1_a <= '0; s1_b <= '0; s1_neg <= 1'b0; s2_neg <= 1'b0;
    end else if (ce) begin
      s1_v   <= start;
      s1_neg <= a_neg ^ b_neg;
      s1_a   <= a_neg ? (~a + N'(1)) : a;
      s1_b   <= b_neg ? (~b + N'(1)) : b;
      s2_v   <= s1_v;
      s2_neg <= s1_neg;
      valid  <= s2_v;
    end
  end

  assign busy = s1_v || s2_v;

  generate
    if (N == 64) begin : g_split
      (* use_dsp = "yes" *) logic [2*H-1:0] pp_ll, pp_lh, pp_hl, pp_hh;
      logic [2*N-1:0] sum;
      always_ff @(posedge clk) begin
        if (rst) begin
          pp_ll <= '0; pp_lh <= '0; pp_hl <= '0; pp_hh <= '0;
        end else if (ce) begin
          pp_ll <= s1_a[H-1:0] * s1_b[H-1:0];
          pp_lh <= s1_a[H-1:0] * s1_b[N-1:H];
          pp_hl <= s1_a[N-1:H] * s1_b[H-1:0];
          pp_hh <= s1_a[N-1:H] * s1_b[N-1:H];
        end
      end
      assign sum = {{N{1'b0}}, pp_ll}
                 + ({{H{1'b0}}, pp_lh, {H{1'b0}}})
                 + ({{H{1'b0}}, pp_hl, {H{1'b0}}})
                 + {pp_hh, {N{1'b0}}};
      always_ff @(posedge clk) begin
        if (rst)              result <= '0;
        else if (ce && s2_v)  result <= s2_neg ? (~sum + (2*N)'(1)) : sum;
      end
    end else begin : g_single
      (* use_dsp = "yes" *) logic [2*N-1:0] prod;
      always_ff @(posedge clk) begin
        if (rst)     prod <= '0;
        else if (ce) prod <= s1_a * s1_b;
      end
      always_ff @(posedge clk) begin
        if (rst)              result <= '0;
        else if (ce && s2_v)  result <= s2_neg ? (~prod + (2*N)'(1)) : prod;
      end
    end
  endgenerate
endmodule
