// tb_multiplier: checks the 3-stage pipelined multiplier at N = 64 (four
// 32x32 partial products) against the 128-bit product of the sign- or
// zero-extended operands for all four signedness combinations, with random
// and corner operands (0, -1, most negative). valid must pulse exactly 3
// clocks after start and busy must be high in between; a clock with ce low
// stalls the pipeline.
// The 3-stage pipeline follows the paper; one clock per stage is this design's reading.
module tb_multiplier;
  localparam int N = 64;
  logic clk = 0, rst = 1, ce = 1, start = 0, a_signed = 0, b_signed = 0, valid, busy;
  logic [N-1:0] a = 0, b = 0;
  logic [2*N-1:0] result, e;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  multiplier #(.N(N)) dut (.*);

  function automatic logic [N-1:0] pick();
    case ($urandom_range(0, 5))
      0: return '0; 1: return '1; 2: return {1'b1, {(N-1){1'b0}}};
      default: return {$urandom, $urandom};
    endcase
  endfunction

  initial begin : watchdog
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 1000; i++) begin
      int lat;
      logic [2*N-1:0] ea, eb;
      a = pick(); b = pick(); a_signed = $urandom_range(0, 1); b_signed = $urandom_range(0, 1);
      ea = a_signed ? {{N{a[N-1]}}, a} : {{N{1'b0}}, a};
      eb = b_signed ? {{N{b[N-1]}}, b} : {{N{1'b0}}, b};
      e = ea * eb;
      start = 1;
      @(negedge clk); start = 0; lat = 1;
      // a stall cycle now and then
      if (i % 7 == 0) begin ce = 0; @(negedge clk); ce = 1; end
      while (!valid && lat < 20) begin
        checks++; if (!busy) begin failures++; $display("FAIL: busy low while computing"); end
        @(negedge clk); lat++;
      end
      checks++;
      if (lat != 3 || result !== e) begin
        failures++; $display("FAIL: %h * %h (%b%b) = %h expected %h, latency %0d", a, b, a_signed, b_signed, result, e, lat);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
