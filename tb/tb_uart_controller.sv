// tb_uart_controller: checks the unified UART controller with a model
// transmitter that stays busy for a random number of clocks per byte.
// Requests from the MMIO interface are issued only when busy is low (as the
// core does); every byte must reach the transmitter exactly once and in
// order, tx_start must come only while the transmitter is idle, and busy
// must be high from the request cycle until the byte has been handed over.
// The UP button (with bounce-free random presses) must give exactly one
// benchmark_start pulse per press, 3 clocks after the press.
// The paper names the block and its signals; the holding register and button synchroniser are this design's.
module tb_uart_controller;
  logic clk = 0, rst = 1, mmio_tx_start = 0, btn_up = 0, tx_busy, tx_start, busy, benchmark_start;
  logic [7:0] mmio_tx_data = 0, tx_data;
  byte sent [$], got [$];
  int busy_cnt = 0, presses = 0, pulses = 0, bad_lat = 0;
  longint cycle = 0, press_cycle = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  uart_controller dut (.*);

  assign tx_busy = busy_cnt != 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (tx_start) begin
      checks++;
      if (tx_busy) begin failures++; $display("FAIL: tx_start while the transmitter is busy"); end
      got.push_back(byte'(tx_data));
      busy_cnt <= $urandom_range(5, 40);
    end else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
    if (benchmark_start && !rst) begin
      pulses++;
      if (cycle - press_cycle != 3) bad_lat++;
    end
  end

  initial begin : watchdog
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // button presses in parallel with the byte stream
  initial begin
    @(negedge clk); @(negedge clk);
    repeat (10) begin
      repeat ($urandom_range(20, 80)) @(negedge clk);
      btn_up = 1; press_cycle = cycle;
      repeat ($urandom_range(5, 30)) @(negedge clk);
      btn_up = 0; presses++;
    end
  end

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 200; i++) begin
      while (busy) @(negedge clk);
      mmio_tx_start = 1; mmio_tx_data = 8'($urandom); sent.push_back(byte'(mmio_tx_data));
      #1;
      checks++; if (!busy) begin failures++; $display("FAIL: busy low in the request cycle"); end
      @(negedge clk); mmio_tx_start = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (busy) @(negedge clk);
    repeat (2000) @(negedge clk);
    checks++;
    if (got.size() != sent.size()) begin failures++; $display("FAIL: %0d bytes sent, %0d expected", got.size(), sent.size()); end
    foreach (sent[i]) if (i < got.size()) begin
      checks++; if (got[i] != sent[i]) begin failures++; $display("FAIL: byte %0d", i); end
    end
    checks++;
    if (pulses != presses || bad_lat != 0) begin
      failures++; $display("FAIL: %0d presses, %0d pulses, %0d with wrong latency", presses, pulses, bad_lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
