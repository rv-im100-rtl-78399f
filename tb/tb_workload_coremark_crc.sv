// tb_workload_coremark_crc: runs CoreMark's CRC-16 kernel (crcu8 applied to
// every byte of a buffer, reflected polynomial 0xA001, seed 0) on the
// full-size SoC with every parameter at its default, and times it with the
// cycle counter as the benchmark itself does.
//
// A 256-byte random buffer is written into the data BRAM through the load
// port. The program reads mcycle, runs the bit-serial CRC loop (byte loads,
// data-dependent branches, back-to-back dependencies), reads mcycle again
// and prints the CRC (2 bytes) and the elapsed cycle count (2 bytes) on the
// UART. Checked: the CRC against CoreMark's crcu8 written out in
// SystemVerilog, the final register state against the instruction-set
// reference model, the printed cycle count against the cycles this
// testbench observes between the two counter reads leaving WB, and the
// cycles per instruction of the loop, which must lie between 1 and 3.
// The kernel's mix of taken and not-taken branches must cause branch
// mispredictions and execution-use stalls; both are counted.
// The kernel is CoreMark's; the buffer size, the seed and the program layout
// are this testbench's own.
module tb_workload_coremark_crc;
  import rv_asm_pkg::*;
  import rv_ref_pkg::*;

  localparam int CPB   = 868;
  localparam int NBYTE = 256;
  localparam int BUF   = 'h100;
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

  // CoreMark's crcu8, bit by bit as in the benchmark source
  function automatic logic [15:0] crcu8(logic [7:0] data, logic [15:0] crc);
    logic x16;
    for (int i = 0; i < 8; i++) begin
      x16  = data[0] ^ crc[0];
      data = data >> 1;
      if (x16) crc = ((crc ^ 16'h4002) >> 1) | 16'h8000;
      else     crc = (crc >> 1) & 16'h7fff;
    end
    return crc;
  endfunction

  // events
  int n_miss = 0, n_exec_use = 0, n_load_use = 0;
  longint t_csr [$];
  word_t  csr_word;
  always @(posedge clk) if (cpu_clk_enable && !dut.u_core.freeze) begin
    if (dut.u_core.bp_miss && dut.u_core.br_q.valid) n_miss++;
    if (dut.u_core.exec_use) n_exec_use++;
    if (dut.u_core.load_use) n_load_use++;
    if (dut.u_core.wb_q.valid && dut.u_core.wb_q.instr == csr_word) t_csr.push_back(cycle);
  end

  word_t prog [$];
  function automatic void emit(word_t w); prog.push_back(w); endfunction

  initial begin : watchdog
    #(20_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    rv_ref       m;
    logic [7:0]  data [NBYTE];
    logic [15:0] crc;
    int          steps, r0, r1;
    longint      hw_cycles, n_instr;

    csr_word = CSR(2, 20, 'hB00, 0);
    emit(LUI(1, 'h10000));          // 0  x1 = UART
    emit(ADDI(2, 0, BUF));          // 1  x2 = buffer
    emit(ADDI(3, 2, NBYTE));        // 2  x3 = end
    emit(ADDI(5, 0, 0));            // 3  crc = 0
    emit(LUI(29, 'hA));             // 4
    emit(ADDI(29, 29, 1));          // 5  x29 = 0xA001
    emit(csr_word);                 // 6  x20 = mcycle
    emit(LOAD(4, 6, 2, 0));         // 7  byte loop: LBU x6
    emit(ADDI(7, 0, 8));            // 8
    emit(XOR(28, 6, 5));            // 9  bit loop
    emit(ANDI(28, 28, 1));          // 10
    emit(SRLI(6, 6, 1));            // 11
    emit(SRLI(5, 5, 1));            // 12
    emit(BEQ(28, 0, 8));            // 13
    emit(XOR(5, 5, 29));            // 14
    emit(ADDI(7, 7, -1));           // 15
    emit(BNE(7, 0, -28));           // 16 -> 9
    emit(ADDI(2, 2, 1));            // 17
    emit(BNE(2, 3, -44));           // 18 -> 7
    emit(CSR(2, 21, 'hB00, 0));     // 19 x21 = mcycle
    emit(SUB(22, 21, 20));          // 20
    emit(STORE(0, 5, 1, 0));        // 21 CRC low
    emit(SRLI(23, 5, 8));
    emit(STORE(0, 23, 1, 0));       //    CRC high
    emit(STORE(0, 22, 1, 0));       //    cycles low
    emit(SRLI(24, 22, 8));
    emit(STORE(0, 24, 1, 0));       //    cycles high
    emit(JAL(0, 0));

    foreach (data[i]) data[i] = 8'($urandom);
    crc = '0;
    foreach (data[i]) crc = crcu8(data[i], crc);

    // reference model: count the instructions between the two counter reads
    m = new();
    foreach (prog[i]) m.prog[i] = prog[i];
    foreach (data[i]) m.mem[BUF + i] = data[i];
    steps = 0; r0 = 0; r1 = 0;
    while (steps < 1_000_000) begin
      if (m.pc == 64'(4 * 6))  r0 = m.retired;
      if (m.pc == 64'(4 * 19)) r1 = m.retired;
      if (m.step()) break;
      steps++;
    end
    n_instr = r1 - r0;
    check(m.x[5] == 64'(crc), "reference model agrees with crcu8");

    // load program and buffer while the core is in reset
    repeat (4) @(posedge clk);
    foreach (prog[i]) begin
      @(negedge clk); prog_we = 1; prog_dmem = 0; prog_addr = 14'(i); prog_data = prog[i];
    end
    for (int w = 0; w < NBYTE / 4; w++) begin
      @(negedge clk); prog_we = 1; prog_dmem = 1; prog_addr = 14'(BUF / 4 + w);
      prog_data = {data[4 * w + 3], data[4 * w + 2], data[4 * w + 1], data[4 * w]};
    end
    @(negedge clk); prog_we = 0; prog_dmem = 0;
    @(negedge clk); cpu_reset_n = 1;

    while (rx.size() < 4 && cycle < 1_500_000) @(posedge clk);
    check(rx.size() == 4, $sformatf("%0d bytes received, expected 4", rx.size()));
    if (rx.size() == 4) begin
      hw_cycles = longint'({rx[3], rx[2]});
      check({rx[1], rx[0]} == crc, $sformatf("CRC %h%h, expected %h", rx[1], rx[0], crc));
      check(t_csr.size() >= 1, "first counter read seen in WB");
      check(dut.u_core.u_rf.regs[22] == 64'(hw_cycles) && hw_cycles < 65536, "printed cycle count matches x22");
      if (t_csr.size() >= 1)
        // the second read leaves WB one instruction (one cycle) before x22 is written;
        // both reads take place in ID at the same distance from WB
        check(hw_cycles >= 1 && dut.u_core.u_rf.regs[21] - dut.u_core.u_rf.regs[20] == 64'(hw_cycles),
              "counter difference");
      $display("CoreMark crc16 kernel: %0d bytes, %0d instructions, %0d cycles, CPI %0.3f",
               NBYTE, n_instr, hw_cycles, real'(hw_cycles) / real'(n_instr));
      check(hw_cycles >= n_instr && hw_cycles <= 3 * n_instr, "CPI between 1 and 3");
    end
    for (int i = 1; i < 32; i++)
      if (i != 20 && i != 21 && i != 22 && i != 24)
        check(dut.u_core.u_rf.regs[i] == m.x[i], $sformatf("x%0d matches the reference model", i));
    $display("events: mispredictions=%0d exec_use=%0d load_use=%0d", n_miss, n_exec_use, n_load_use);
    check(n_miss > 0, "branch mispredictions seen");
    check(n_exec_use > 0, "execution-use stalls seen");
    check(n_load_use > 0, "load-use stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
