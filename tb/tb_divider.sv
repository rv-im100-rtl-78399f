// tb_divider: checks the restoring divider at N = 64 against the RISC-V
// division rules (quotient rounded toward zero, remainder with the sign of
// the dividend, divide by zero gives quotient all ones and remainder =
// dividend, most-negative / -1 gives the dividend and remainder 0), signed
// and unsigned, random and corner operands. done must pulse exactly N + 3
// clocks after start (setup, N iterations, done state) and busy must be high
// from the clock after start until done.
// The restoring algorithm follows the paper; the N + 3 latency and the special-case results (RISC-V specification) are this design's.
module tb_divider;
  localparam int N = 64;
  logic clk = 0, rst = 1, ce = 1, start = 0, is_signed = 0, busy, done;
  logic [N-1:0] dividend = 0, divisor = 0, quotient, remainder, eq, er;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  divider #(.N(N)) dut (.*);

  function automatic logic [N-1:0] pick();
    case ($urandom_range(0, 7))
      0: return '0; 1: return '1; 2: return {1'b1, {(N-1){1'b0}}}; 3: return N'($urandom_range(1, 9));
      4: return {32'h0, $urandom};
      default: return {$urandom, $urandom};
    endcase
  endfunction

  initial begin : watchdog
    #20000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 600; i++) begin
      int lat;
      dividend = pick(); divisor = pick(); is_signed = $urandom_range(0, 1);
      if (divisor == 0) begin eq = '1; er = dividend; end
      else if (is_signed && dividend == {1'b1, {(N-1){1'b0}}} && divisor == '1) begin eq = dividend; er = '0; end
      else if (is_signed) begin
        eq = N'($signed(dividend) / $signed(divisor)); er = N'($signed(dividend) % $signed(divisor));
      end else begin eq = dividend / divisor; er = dividend % divisor; end
      start = 1;
      @(negedge clk); start = 0; lat = 1;
      while (!done && lat < 200) begin
        checks++; if (!busy) begin failures++; $display("FAIL: busy low while dividing"); end
        @(negedge clk); lat++;
      end
      checks++;
      if (lat != N + 3 || quotient !== eq || remainder !== er) begin
        failures++;
        $display("FAIL: %h / %h (s=%b) q %h r %h expected %h %h latency %0d", dividend, divisor, is_signed,
                 quotient, remainder, eq, er, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
