// tb_rv_im100_soc: full-size end-to-end test of the RV-IM100 SoC with every
// parameter at its default (64 KiB + 64 KiB BRAM, 868 clocks per UART bit).
//
// The testbench holds the core in reset, writes a program into the
// instruction BRAM and a constant table into the data BRAM through the load
// port, releases reset and decodes the
// serial line uart_txd bit by bit. The program fills an array with i*i
// (multiply, store, load back), sums it, divides and takes the remainder by
// 7, adds a constant preloaded into the data BRAM, and prints "RV" plus two characters derived from the results and a
// newline. The expected bytes come from the instruction-set reference model.
// While the program runs the CPU clock enable is dropped for a while (the
// LED 7 must follow) and the benchmark button is pressed. Mechanisms counted
// (each must be seen): UART bytes on the wire, UART back-pressure stalls of
// the core, CPU clock-enable pauses, benchmark_start pulses, LED opcode
// display, multiply/divide stalls. Latencies checked: UART bit period, button
// to benchmark_start delay, reset release to first instruction retired.
// The SoC blocks follow the paper's SoC diagram; the baud rate, memory map and load port are this design's choices.
module tb_rv_im100_soc;
  import rv_asm_pkg::*;
  import rv_ref_pkg::*;

  localparam int CPB = 868;
  logic clk = 0, cpu_reset_n = 0, cpu_clk_enable = 1, btn_up = 0;
  logic uart_txd, benchmark_start;
  logic [7:0] leds;
  logic prog_we = 0, prog_dmem = 0;  logic [13:0] prog_addr = '0;  logic [31:0] prog_data = '0;
  always #5 clk = ~clk;

  rv_im100_soc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // serial decoder: start bit, 8 data bits LSB first, stop bit
  byte    rx [$];
  longint last_fall = -1, bit_period_err = 0;
  initial begin : rx_proc
    forever begin
      byte b;
      @(negedge uart_txd);
      last_fall = cycle;
      repeat (CPB / 2) @(posedge clk);
      if (uart_txd !== 1'b0) bit_period_err++;
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (CPB) @(posedge clk);
      if (uart_txd !== 1'b1) bit_period_err++;
      rx.push_back(b);
    end
  end

  // mechanism counters
  int n_mmio_stall = 0, n_md = 0, n_bench = 0, n_pause = 0, n_led_ok = 0, n_led_bad = 0;
  always @(posedge clk) begin
    if (dut.u_core.mmio_stall && cpu_clk_enable) n_mmio_stall++;
    if (dut.u_core.md_wait && cpu_clk_enable)    n_md++;
    if (benchmark_start)                         n_bench++;
    if (!cpu_clk_enable)                         n_pause++;
    if (leds[7] == !cpu_clk_enable && leds[6:0] == dut.u_core.wb_q.instr[6:0]) n_led_ok++;
    else n_led_bad++;
  end

  logic [63:0] last_pc = '0;
  always @(posedge clk)
    if (cpu_clk_enable && dut.u_core.wb_q.valid && !dut.u_core.freeze) last_pc <= dut.u_core.wb_q.pc;

  word_t prog [$];
  function automatic void emit(word_t w); prog.push_back(w); endfunction

  initial begin : watchdog
    #(50_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    rv_ref  m;
    longint t_rel, t_first, t_btn;
    int     steps;
    // program
    emit(LUI(1, 'h10000));                 // x1 = UART
    emit(ADDI(2, 0, 256));                 // x2 = array
    emit(ADDI(3, 0, 1));                   // i
    emit(ADDI(4, 0, 11));
    emit(ADDI(5, 0, 0));                   // sum
    emit(MOP(0, 6, 3, 3));                 // loop: x6 = i*i
    emit(SD(6, 2, 0));
    emit(LD(7, 2, 0));
    emit(ADD(5, 5, 7));
    emit(ADDI(2, 2, 8));
    emit(ADDI(3, 3, 1));
    emit(BNE(3, 4, -24));
    emit(ADDI(11, 0, 7));
    emit(MOP(4, 8, 5, 11));                // sum / 7
    emit(MOP(6, 9, 5, 11));                // sum % 7
    emit(ADDI(9, 9, 65));
    emit(LD(12, 0, 16));                   // preloaded 64-bit constant at 0x10
    emit(ADD(8, 8, 12));
    emit(ADDI(10, 0, 82)); emit(STORE(0, 10, 1, 0));
    emit(ADDI(10, 0, 86)); emit(STORE(0, 10, 1, 0));
    emit(STORE(0, 8, 1, 0));
    emit(STORE(0, 9, 1, 0));
    emit(ADDI(10, 0, 10)); emit(STORE(0, 10, 1, 0));
    emit(JAL(0, 0));

    m = new();
    foreach (prog[i]) m.prog[i] = prog[i];
    for (int k = 0; k < 8; k++) m.mem[16 + k] = 8'(64'h1111_1111_0000_0000 >> (8 * k));   // 0x1111111100000000
    steps = 0;
    while (!m.step() && steps < 100000) steps++;

    // load while in reset
    repeat (4) @(posedge clk);
    foreach (prog[i]) begin
      @(negedge clk); prog_we = 1; prog_addr = 14'(i); prog_data = prog[i];
    end
    // data word at 0x10: low half 0x00000000, high half 0x11111111
    @(negedge clk); prog_we = 1; prog_dmem = 1; prog_addr = 14'd4; prog_data = 32'h0000_0000;
    @(negedge clk); prog_addr = 14'd5; prog_data = 32'h1111_1111;
    @(negedge clk); prog_we = 0; prog_dmem = 0;
    check(dut.u_dmem.mem[2] == 64'h1111_1111_0000_0000, "data word written through the load port");
    check(dut.u_imem.mem[0] == prog[0] && dut.u_imem.mem[prog.size() - 1] == prog[prog.size() - 1],
          "program written through the load port");
    repeat (3) @(posedge clk);
    check(uart_txd == 1'b1, "UART line idles high in reset");

    @(negedge clk); cpu_reset_n = 1; t_rel = cycle;
    wait (dut.u_core.wb_q.valid);
    t_first = cycle;
    // 2 synchroniser flops + IF..WB
    check(t_first - t_rel >= 9 && t_first - t_rel <= 11,
          $sformatf("reset release to first retire: %0d cycles", t_first - t_rel));

    // pause the CPU clock enable for a while mid-run
    repeat (20) @(posedge clk);
    @(negedge clk) cpu_clk_enable = 0;
    repeat (2) @(posedge clk);
    check(leds[7] == 1'b1, "LED 7 shows the paused clock enable");
    repeat (50) @(posedge clk);
    @(negedge clk) cpu_clk_enable = 1;

    // press the benchmark button
    @(negedge clk) btn_up = 1; t_btn = cycle;
    wait (benchmark_start);
    check(cycle - t_btn >= 2 && cycle - t_btn <= 4, $sformatf("button to benchmark_start: %0d cycles", cycle - t_btn));
    repeat (10) @(posedge clk);
    @(negedge clk) btn_up = 0;

    // wait for all bytes
    while (rx.size() < m.uart_bytes.size() && cycle < 200000) @(posedge clk);
    repeat (3 * CPB) @(posedge clk);
    check(rx.size() == m.uart_bytes.size(), $sformatf("%0d bytes received, expected %0d", rx.size(), m.uart_bytes.size()));
    foreach (m.uart_bytes[i]) if (i < rx.size())
      check(rx[i] == m.uart_bytes[i], $sformatf("byte %0d: %h, expected %h", i, rx[i], m.uart_bytes[i]));
    check(bit_period_err == 0, "start and stop bits at the expected bit period");
    check(dut.u_core.u_rf.regs[5] == 64'd385, "sum of squares");
    check(last_pc == 64'(4 * (prog.size() - 1)), "core parked on the final jump");

    $display("events: uart_bytes=%0d mmio_stall=%0d md_wait=%0d bench=%0d pause=%0d led_ok=%0d led_bad=%0d",
             rx.size(), n_mmio_stall, n_md, n_bench, n_pause, n_led_ok, n_led_bad);
    check(rx.size() > 0, "UART bytes seen");
    check(n_mmio_stall > 0, "UART back-pressure stall seen");
    check(n_md > 0, "multiply/divide stall seen");
    check(n_bench == 1, "one benchmark_start pulse per press");
    check(n_pause > 0, "clock-enable pause seen");
    check(n_led_bad == 0 && n_led_ok > 0, "LEDs show the WB opcode and the clock enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
