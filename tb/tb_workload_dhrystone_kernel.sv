// tb_workload_dhrystone_kernel: runs the operations that make up a
// Dhrystone 2.1 loop on the full-size SoC with every parameter at its
// default, and times them with the cycle counter as the benchmark does.
//
// Each of 20 iterations copies Dhrystone's 30-character string
// "DHRYSTONE PROGRAM, 1'ST STRING" byte by byte (strcpy) and compares the
// copy with "DHRYSTONE PROGRAM, 2'ND STRING" (strcmp, byte loads with a
// data-dependent early exit). It then evaluates the benchmark's integer
// statements Int_2 = Int_2 * Int_1; Int_1 = Int_2 / Int_3;
// Int_2 = 7 * (Int_2 - Int_3) - Int_1 with MUL and DIV, and accumulates
// the results. The strings are placed in the data BRAM through the load
// port. The program prints the accumulator's low byte and the elapsed
// cycle count (2 bytes) on the UART.
// Checked: the printed byte and the final register and memory state against
// the instruction-set reference model, the printed cycle count against the
// counter registers, and the cycles per instruction, which must lie between
// 1 and 3. Load-use stalls, M-unit freezes, mispredictions and UART
// back-pressure are counted and must each be seen.
// The operations are Dhrystone's; the iteration count, the data layout and
// the program are this testbench's own.
module tb_workload_dhrystone_kernel;
  import rv_asm_pkg::*;
  import rv_ref_pkg::*;

  localparam int CPB   = 868;
  localparam int NITER = 20;
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

  // serial decoder
  byte rx [$];
  initial begin : rx_proc
    forever begin
      byte b;
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (CPB) @(posedge clk);
      rx.push_back(b);
    end
  end

  // events
  int n_miss = 0, n_load_use = 0, n_md = 0, n_mmio = 0;
  always @(posedge clk) if (cpu_clk_enable) begin
    if (!dut.u_core.freeze && dut.u_core.bp_miss && dut.u_core.br_q.valid) n_miss++;
    if (!dut.u_core.freeze && dut.u_core.load_use) n_load_use++;
    if (dut.u_core.md_wait)    n_md++;
    if (dut.u_core.mmio_stall) n_mmio++;
  end

  word_t prog [$];
  function automatic void emit(word_t w); prog.push_back(w); endfunction

  // 32-byte string images, NUL padded
  function automatic logic [7:0] str_byte(string s, int i);
    return (i < s.len()) ? 8'(s[i]) : 8'h00;
  endfunction

  initial begin : watchdog
    #(10_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    rv_ref  m;
    string  s1, s2;
    int     steps, r0, r1;
    longint hw_cycles, n_instr;

    s1 = "DHRYSTONE PROGRAM, 1'ST STRING";
    s2 = "DHRYSTONE PROGRAM, 2'ND STRING";

    emit(LUI(1, 'h10000));           // 0  x1 = UART
    emit(ADDI(10, 0, NITER));        // 1
    emit(ADDI(9, 0, 0));             // 2  iteration
    emit(ADDI(25, 0, 0));            // 3  accumulator
    emit(CSR(2, 20, 'hB00, 0));      // 4  x20 = mcycle
    emit(ADDI(11, 0, 'h100));        // 5  iteration: strcpy(0x200, 0x100)
    emit(ADDI(12, 0, 'h200));        // 6
    emit(LOAD(4, 13, 11, 0));        // 7  copy loop: LBU
    emit(STORE(0, 13, 12, 0));       // 8  SB
    emit(ADDI(11, 11, 1));           // 9
    emit(ADDI(12, 12, 1));           // 10
    emit(BNE(13, 0, -16));           // 11 -> 7
    emit(ADDI(11, 0, 'h200));        // 12 strcmp(0x200, 0x140)
    emit(ADDI(12, 0, 'h140));        // 13
    emit(LOAD(4, 13, 11, 0));        // 14 compare loop
    emit(LOAD(4, 14, 12, 0));        // 15
    emit(BNE(13, 14, 24));           // 16 -> 22
    emit(ADDI(11, 11, 1));           // 17
    emit(ADDI(12, 12, 1));           // 18
    emit(BNE(13, 0, -20));           // 19 -> 14
    emit(ADDI(15, 0, 0));            // 20 equal
    emit(JAL(0, 8));                 // 21 -> 23
    emit(SUB(15, 13, 14));           // 22 differ
    emit(ADDI(16, 0, 2));            // 23 Int_1
    emit(ADDI(17, 0, 3));            // 24 Int_2
    emit(ADDI(18, 0, 7));            // 25 Int_3
    emit(MOP(0, 17, 17, 16));        // 26 Int_2 = Int_2 * Int_1
    emit(MOP(4, 16, 17, 18));        // 27 Int_1 = Int_2 / Int_3
    emit(SUB(19, 17, 18));           // 28
    emit(MOP(0, 17, 19, 18));        // 29 7 * (Int_2 - Int_3)
    emit(SUB(17, 17, 16));           // 30 ... - Int_1
    emit(ADD(25, 25, 15));           // 31
    emit(ADD(25, 25, 17));           // 32
    emit(ADDI(9, 9, 1));             // 33
    emit(BNE(9, 10, -116));          // 34 -> 5
    emit(CSR(2, 21, 'hB00, 0));      // 35 x21 = mcycle
    emit(SUB(22, 21, 20));           // 36
    emit(STORE(0, 25, 1, 0));        // 37 accumulator low byte
    emit(STORE(0, 22, 1, 0));        // 38 cycles low
    emit(SRLI(24, 22, 8));           // 39
    emit(STORE(0, 24, 1, 0));        // 40 cycles high
    emit(JAL(0, 0));                 // 41

    // reference model
    m = new();
    foreach (prog[i]) m.prog[i] = prog[i];
    for (int i = 0; i < 32; i++) begin
      m.mem['h100 + i] = str_byte(s1, i);
      m.mem['h140 + i] = str_byte(s2, i);
    end
    steps = 0; r0 = 0; r1 = 0;
    while (steps < 1_000_000) begin
      if (m.pc == 64'(4 * 4))  r0 = m.retired;
      if (m.pc == 64'(4 * 35)) r1 = m.retired;
      if (m.step()) break;
      steps++;
    end
    n_instr = r1 - r0;
    check(m.x[25] == 64'(-8 * NITER), "reference model: accumulator");

    // load program and strings while the core is in reset
    repeat (4) @(posedge clk);
    foreach (prog[i]) begin
      @(negedge clk); prog_we = 1; prog_dmem = 0; prog_addr = 14'(i); prog_data = prog[i];
    end
    for (int w = 0; w < 8; w++) begin
      @(negedge clk); prog_we = 1; prog_dmem = 1; prog_addr = 14'('h100 / 4 + w);
      prog_data = {str_byte(s1, 4 * w + 3), str_byte(s1, 4 * w + 2), str_byte(s1, 4 * w + 1), str_byte(s1, 4 * w)};
      @(negedge clk); prog_addr = 14'('h140 / 4 + w);
      prog_data = {str_byte(s2, 4 * w + 3), str_byte(s2, 4 * w + 2), str_byte(s2, 4 * w + 1), str_byte(s2, 4 * w)};
    end
    @(negedge clk); prog_we = 0; prog_dmem = 0;
    @(negedge clk); cpu_reset_n = 1;

    while (rx.size() < 3 && cycle < 1_000_000) @(posedge clk);
    check(rx.size() == 3, $sformatf("%0d bytes received, expected 3", rx.size()));
    if (rx.size() == 3) begin
      hw_cycles = longint'({rx[2], rx[1]});
      check(rx[0] == m.uart_bytes[0], $sformatf("accumulator byte %h, expected %h", rx[0], m.uart_bytes[0]));
      check(dut.u_core.u_rf.regs[22] == 64'(hw_cycles) && hw_cycles < 65536, "printed cycle count matches x22");
      check(dut.u_core.u_rf.regs[21] - dut.u_core.u_rf.regs[20] == 64'(hw_cycles), "counter difference");
      $display("Dhrystone kernel: %0d iterations, %0d instructions, %0d cycles, CPI %0.3f",
               NITER, n_instr, hw_cycles, real'(hw_cycles) / real'(n_instr));
      check(hw_cycles >= n_instr && hw_cycles <= 3 * n_instr, "CPI between 1 and 3");
    end
    for (int i = 1; i < 32; i++)
      if (!(i inside {20, 21, 22, 24}))
        check(dut.u_core.u_rf.regs[i] == m.x[i], $sformatf("x%0d matches the reference model", i));
    // the copied string in the data BRAM (word 0x200 / 8 onwards)
    for (int i = 0; i < 32; i++)
      check(8'(dut.u_dmem.mem['h200 / 8 + i / 8] >> (8 * (i % 8))) == str_byte(s1, i) || i > 30,
            $sformatf("copied string byte %0d", i));
    $display("events: mispredictions=%0d load_use=%0d md_wait=%0d mmio_stall=%0d", n_miss, n_load_use, n_md, n_mmio);
    check(n_miss > 0, "branch mispredictions seen");
    check(n_load_use > 0, "load-use stalls seen");
    check(n_md > 0, "multiply/divide freezes seen");
    check(n_mmio > 0, "UART back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
