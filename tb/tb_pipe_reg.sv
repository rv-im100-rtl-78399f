// tb_pipe_reg: checks the generic pipeline register with a 16-bit payload.
// Reset and flush load zero (a bubble), hold keeps the value, otherwise d is
// loaded on the clock edge (one-cycle latency); flush beats hold; a clock
// with ce low changes nothing. Random controls for 500 cycles against a
// scoreboard.
// The stage registers follow the paper; hold/flush semantics are this design's.
module tb_pipe_reg;
  typedef logic [15:0] pl_t;
  logic clk = 0, rst = 1, ce = 1, hold = 0, flush = 0;
  pl_t d = '0, q, e;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pipe_reg #(.T(pl_t)) dut (.*);

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    d = 16'hBEEF;
    @(posedge clk); @(negedge clk);
    checks++; if (q !== '0) begin failures++; $display("FAIL: reset"); end
    rst = 0; e = '0;
    for (int i = 0; i < 500; i++) begin
      d = 16'($urandom); ce = $urandom_range(0, 4) != 0;
      hold = $urandom_range(0, 2) == 0; flush = $urandom_range(0, 4) == 0;
      @(posedge clk);
      if (ce) e = flush ? '0 : hold ? e : d;
      @(negedge clk);
      checks++;
      if (q !== e) begin failures++; $display("FAIL: q %h expected %h", q, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
