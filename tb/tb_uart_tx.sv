// tb_uart_tx: checks the 8N1 transmitter with CLKS_PER_BIT = 16 (the
// default 868 only stretches time). Each random byte is started with a
// one-cycle tx_start; the line must go low on the clock after start, hold
// every bit for exactly CLKS_PER_BIT clocks (start bit, data LSB first, stop
// bit high), tx_busy must be high for the whole frame (10 bit times) and a
// tx_start while busy must be ignored.
// The paper names the transmitter; the 8N1 frame and bit period are this design's choices.
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst = 1, tx_start = 0, tx, tx_busy;
  logic [7:0] tx_data = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    check(tx == 1'b1 && !tx_busy, "idle high after reset");
    for (int n = 0; n < 40; n++) begin
      logic [9:0] fr;
      int busy_cycles;
      tx_data = 8'($urandom); fr = {1'b1, tx_data, 1'b0};
      tx_start = 1; @(negedge clk); tx_start = 0;
      busy_cycles = 0;
      for (int b = 0; b < 10; b++) begin
        for (int c = 0; c < CPB; c++) begin
          checks++;
          if (tx !== fr[b]) begin failures++; $display("FAIL: byte %h bit %0d clock %0d", tx_data, b, c); end
          if (tx_busy) busy_cycles++;
          // a start while busy must not disturb the frame
          if (b == 4 && c == 3) begin tx_start = 1; tx_data = ~tx_data; end
          @(negedge clk);
          tx_start = 0;
        end
      end
      check(busy_cycles == 10 * CPB, $sformatf("busy for %0d clocks, expected %0d", busy_cycles, 10 * CPB));
      check(!tx_busy && tx == 1'b1, "idle after the stop bit");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
