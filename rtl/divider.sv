// divider: N-bit restoring divider, one quotient bit per clock.
//
// A 4-state FSM runs it: IDLE waits for start and latches the operands;
// SETUP takes absolute values of signed operands and loads the combined
// remainder-quotient shift register {remainder(N+1 bits), quotient(N bits)}
// with the dividend; CALCULATE runs N cycles, each shifting the register left
// by one, trial-subtracting the divisor from the remainder half and, when the
// difference is not negative, keeping it and setting the new quotient bit;
// DONE applies the signs and the RISC-V special cases (division by zero gives
// quotient all ones and remainder = dividend; the signed overflow case
// MIN / -1 falls out of the unsigned algorithm as quotient MIN, remainder 0).
// The results are registered and done pulses for one cycle after DONE, N + 3
// clocks after start. busy is high from start until then. The restoring
// algorithm, the combined shift register, the four states and the N-cycle
// CALCULATE state are the paper's; the other details are this design's.
module divider #(
  parameter int unsigned N = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         ce,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [N-1:0] divisor,
  input  logic         is_signed,
  output logic [N-1:0] quotient,
  output logic [N-1:0] remainder,
  output logic         busy,
  output logic         done
);
  typedef enum logic [1:0] {IDLE, SETUP, CALCULATE, DONE} state_e;
  state_e state;

  logic [N-1:0]         op_a, op_b, abs_b;
  logic                 neg_q, neg_r, div0;
  logic [2*N:0]         sr;
  logic [$clog2(N)-1:0] count;

  logic [2*N:0] shifted;
  logic [N:0]   diff;
  assign shifted = sr << 1;
  assign diff    = shifted[2*N:N] - {1'b0, abs_b};

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; done <= 1'b0;
      op_a <= '0; op_b <= '0; abs_b <= '0; neg_q <= 1'b0; neg_r <= 1'b0; div0 <= 1'b0;
      sr <= '0; count <= '0; quotient <= '0; remainder <= '0;
    end else if (ce) begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          op_a  <= dividend;
          op_b  <= divisor;
          neg_r <= is_signed && dividend[N-1];
          neg_q <= is_signed && (dividend[N-1] ^ divisor[N-1]);
          state <= SETUP;
        end
        SETUP: begin
          div0  <= (op_b == '0);
          abs_b <= (neg_q ^ neg_r) ? (~op_b + N'(1)) : op_b;   // divisor negative
          sr    <= {{(N+1){1'b0}}, neg_r ? (~op_a + N'(1)) : op_a};
          count <= '0;
          state <= CALCULATE;
        end
        CALCULATE: begin
          if (!diff[N]) sr <= {diff, shifted[N-1:1], 1'b1};
          else          sr <= shifted;
          count <= count + 1'b1;
          if (count == $clog2(N)'(N-1)) state <= DONE;
        end
        DONE: begin
          if (div0) begin
            quotient  <= '1;
            remainder <= op_a;
          end else begin
            quotient  <= neg_q ? (~sr[N-1:0] + N'(1)) : sr[N-1:0];
            remainder <= neg_r ? (~sr[2*N-1:N] + N'(1)) : sr[2*N-1:N];
          end
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
