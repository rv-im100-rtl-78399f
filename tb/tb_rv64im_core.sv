// tb_rv64im_core: end-to-end test of the 8-stage RV64IM core with its
// instruction and data BRAMs.
//
// Every program is run twice: on the reference model (rv_ref_pkg, an
// instruction-at-a-time interpreter of the RISC-V specification) and on the
// pipeline. When the pipeline retires the final jump-to-self, the 31
// registers, the bytes sent to the UART address and the number of retired
// instructions are compared. Programs:
//   1. directed: forwarding, W-suffix ops, all M ops, loads/stores of every
//      size, a counted loop, calls, CSR instructions, ECALL, EBREAK, an
//      illegal instruction, a misaligned load and a misaligned jump target
//      (each trapped and skipped by a handler), UART stores back to back;
//   2. timing: straight-line code whose retire-cycle distances are checked
//      against the pipeline's penalties (1 execution-use, 2 load-use incl.
//      execution-use, 5 for a taken jump or misprediction, 1 for a
//      predicted-taken branch, 3 for a multiply, N+3 for a divide, 1 for the
//      write_done port conflict);
//   3..: random programs of ALU, M, load/store and short forward branches,
//      one of them with the clock enable toggled at random.
// Each hazard and redirect mechanism must be seen at least once.
// The penalties checked (execution-use 1, flush 5, refill 2) follow the paper; the others are this design's.
module tb_rv64im_core;
  import rv_asm_pkg::*;
  import rv_ref_pkg::*;

  localparam int IAW = 14, DAW = 13;
  localparam logic [63:0] HANDLER = 64'h2000, DBASE = 64'h1000;

  logic clk = 0, rst = 1, ce = 1;
  always #5 clk = ~clk;

  logic [IAW+1:0] imem_addr;  logic imem_en;  logic [31:0] imem_rdata;
  logic dmem_en;  logic [DAW-1:0] dmem_addr;  logic [7:0] dmem_wmask;
  logic [63:0] dmem_wdata, dmem_rdata;
  logic mmio_we;  logic [63:0] mmio_addr, mmio_wd;  logic uart_busy;  logic [6:0] current_opcode;
  logic prog_we = 0;  logic [IAW-1:0] prog_addr = '0;  logic [31:0] prog_data = '0;

  rv64im_core #(.XLEN(64), .IMEM_AW(IAW), .DMEM_AW(DAW)) dut (.*);
  instr_mem #(.DEPTH_WORDS(1 << IAW)) u_imem (.clk, .en(imem_en && ce), .addr(imem_addr),
    .rdata(imem_rdata), .prog_we, .prog_addr, .prog_data);
  data_mem #(.DEPTH_WORDS(1 << DAW)) u_dmem (.clk, .en(dmem_en && ce), .addr(dmem_addr),
    .write_mask(dmem_wmask), .wdata(dmem_wdata), .rdata(dmem_rdata));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // UART model: busy for 12 cycles after each byte
  int busy_cnt = 0;
  byte uart_got [$];
  assign uart_busy = (busy_cnt != 0);
  always @(posedge clk) begin
    if (mmio_we && mmio_addr == 64'h1000_0000) begin
      uart_got.push_back(byte'(mmio_wd[7:0]));
      busy_cnt <= 12;
    end else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
  end

  // mechanism counters
  int n_exec_use, n_load_use, n_write_done, n_csr_haz, n_md_stall, n_mmio_stall;
  int n_bp_miss, n_jump, n_pred_taken, n_trap, n_mret, n_fw_br, n_fw_mem, n_fw_wb;
  always @(posedge clk) if (!rst && ce) begin
    if (dut.exec_use)   n_exec_use++;
    if (dut.load_use)   n_load_use++;
    if (dut.write_done) n_write_done++;
    if (dut.csr_hazard && !dut.freeze && !dut.redirect) n_csr_haz++;
    if (dut.md_wait)    n_md_stall++;
    if (dut.mmio_stall) n_mmio_stall++;
    if (!dut.freeze && dut.bp_miss) n_bp_miss++;
    if (!dut.freeze && dut.br_jump) n_jump++;
    if (dut.b_est && !dut.hold_id && !dut.redirect) n_pred_taken++;
    if (!dut.freeze && dut.trap_we) n_trap++;
    if (!dut.freeze && dut.mret_do) n_mret++;
    if (dut.exr_q.valid && !dut.hold_exr) begin
      if (dut.sel_a[1] || dut.sel_b[1]) n_fw_br++;
      if (dut.sel_a[2] || dut.sel_b[2]) n_fw_mem++;
      if (dut.sel_a[3] || dut.sel_b[3]) n_fw_wb++;
    end
  end

  // retire log: cycle at which each PC last retired
  longint ret_cycle [longint];
  int     dut_retired;
  always @(posedge clk) if (!rst && ce && dut.wb_q.valid && !dut.freeze) begin
    ret_cycle[longint'(dut.wb_q.pc)] = cycle;
    dut_retired++;
  end

  word_t prog [$];
  function automatic void emit(word_t w); prog.push_back(w); endfunction
  function automatic void emit_at(int byte_addr, word_t w);
    while (prog.size() <= byte_addr / 4) prog.push_back(NOP());
    prog[byte_addr / 4] = w;
  endfunction

  function automatic void nops(int n); repeat (n) emit(NOP()); endfunction

  // load a 64-bit constant into rd (uses rd only)
  function automatic void li64(int rd, logic [63:0] v);
    emit(ADDI(rd, 0, int'(v[63:55])));
    for (int c = 4; c >= 0; c--) begin
      emit(SLLI(rd, rd, 11));
      emit(ORI(rd, rd, int'({1'b0, v[11*c +: 11]})));
    end
  endfunction

  // trap handler at HANDLER: x27 += mcause, mepc += 4, mret
  function automatic void handler();
    emit_at(int'(HANDLER),      CSR(2, 28, 12'h341, 0));
    emit_at(int'(HANDLER) + 4,  ADDI(28, 28, 4));
    emit_at(int'(HANDLER) + 8,  CSR(1, 0, 12'h341, 28));
    emit_at(int'(HANDLER) + 12, CSR(2, 29, 12'h342, 0));
    emit_at(int'(HANDLER) + 16, ADD(27, 27, 29));
    emit_at(int'(HANDLER) + 20, MRET());
  endfunction

  function automatic void prologue();
    emit(LUI(20, int'(HANDLER >> 12)));
    emit(CSR(1, 0, 12'h305, 20));          // mtvec
    emit(LUI(31, int'(DBASE >> 12)));      // data base
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // run the current program on model and pipeline; compare
  logic [63:0] halt_pc;
  bit          ce_random = 0;
  task automatic run_program(string name);
    rv_ref m;
    int steps;
    longint t0;
    m = new();
    foreach (prog[i]) m.prog[i] = prog[i];
    steps = 0;
    while (!m.step() && steps < 200000) steps++;
    halt_pc = m.pc;
    // load and reset the pipeline
    rst = 1;
    for (int i = 0; i < (1 << IAW); i++) u_imem.mem[i] = (i < prog.size()) ? prog[i] : NOP();
    for (int i = 0; i < (1 << DAW); i++) u_dmem.mem[i] = '0;
    repeat (3) @(posedge clk);
    uart_got.delete();
    ret_cycle.delete();
    dut_retired = 0;
    @(negedge clk) rst = 0;
    t0 = cycle;
    while (!(dut.wb_q.valid && dut.wb_q.pc == halt_pc && !dut.freeze) && cycle - t0 < 400000) begin
      @(negedge clk);
      ce = ce_random ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
    @(negedge clk); ce = 1;
    check(cycle - t0 < 400000, {name, ": pipeline reached the end of the program"});
    for (int r = 1; r < 32; r++) begin
      check(dut.u_rf.regs[r] == m.x[r], $sformatf("%s: x%0d = %h, expected %h", name, r, dut.u_rf.regs[r], m.x[r]));
    end
    check(uart_got.size() == m.uart_bytes.size(), $sformatf("%s: %0d UART bytes, expected %0d", name, uart_got.size(), m.uart_bytes.size()));
    foreach (m.uart_bytes[i]) if (i < uart_got.size())
      check(uart_got[i] == m.uart_bytes[i], $sformatf("%s: UART byte %0d", name, i));
    // both count the final jump-to-self once
    check(dut_retired == int'(m.retired), $sformatf("%s: retired %0d, expected %0d", name, dut_retired, m.retired));
    $display("%s: %0d instructions, %0d cycles", name, m.retired, cycle - t0);
  endtask

  task automatic gap(longint a, longint b, int expect_d, string what);
    check(ret_cycle.exists(a) && ret_cycle.exists(b) && ret_cycle[b] - ret_cycle[a] == expect_d,
          $sformatf("timing %s: %0d cycles, expected %0d", what,
                    (ret_cycle.exists(a) && ret_cycle.exists(b)) ? ret_cycle[b] - ret_cycle[a] : -1, expect_d));
  endtask

  initial begin : watchdog
    #(20_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc_jal, pc_tgt;
    // ---------------------------------------------------------------- 1 directed
    prog.delete(); prologue();
    li64(1, 64'hFEDC_BA98_7654_3210);
    li64(2, 64'h8000_0000_0000_0000);
    emit(ADDI(3, 0, -7));
    emit(ADDI(4, 0, 3));
    emit(ADD(5, 1, 3)); emit(SUB(6, 5, 4)); emit(XOR(7, 6, 1)); emit(SRA(8, 1, 4));
    emit(SRL(9, 1, 4)); emit(SLL(10, 1, 4)); emit(SLT(11, 3, 4)); emit(SLTU(12, 3, 4));
    emit(SRAI(13, 1, 37)); emit(SRLI(14, 1, 63)); emit(SLLI(15, 4, 40)); emit(SLTI(16, 3, -8));
    emit(SLTIU(17, 4, 2)); emit(ANDI(18, 1, 255)); emit(XORI(19, 3, -1)); emit(OR(21, 5, 6));
    emit(AND(22, 1, 3));
    emit(ADDW(5, 1, 3)); emit(SUBW(6, 3, 1)); emit(SLLW(7, 1, 4)); emit(SRLW(8, 1, 4));
    emit(SRAW(9, 1, 4)); emit(ADDIW(10, 1, 2047)); emit(SLLIW(11, 1, 31)); emit(SRLIW(12, 1, 3));
    emit(SRAIW(13, 1, 3)); emit(LUI(14, 'h80000)); emit(AUIPC(15, 'h12345));
    // M extension, both widths, including /0 and overflow
    for (int f = 0; f < 8; f++) begin emit(MOP(f, 16 + f, 1, 3)); emit(MOP(f, 24, 2, 3)); end
    emit(MOP(4, 24, 2, 0)); emit(MOP(6, 25, 1, 0));
    emit(ADDI(26, 0, -1)); emit(MOP(4, 23, 2, 26)); emit(MOP(6, 22, 2, 26));
    emit(MOPW(0, 16, 1, 3)); emit(MOPW(4, 17, 1, 3)); emit(MOPW(5, 18, 1, 3));
    emit(MOPW(6, 19, 1, 3)); emit(MOPW(7, 21, 1, 3)); emit(MOPW(4, 5, 1, 0));
    // memory: every size, store then load (write_done), load then use
    emit(SD(1, 31, 0)); emit(LD(6, 31, 0)); emit(ADD(7, 6, 6));
    emit(STORE(2, 3, 31, 8)); emit(STORE(1, 3, 31, 14)); emit(STORE(0, 3, 31, 17));
    for (int f = 0; f < 7; f++) emit(LOAD(f, 8 + f, 31, (f == 3) ? 8 : (f == 1 || f == 5) ? 14 : (f == 2 || f == 6) ? 8 : 17));
    emit(LOAD(3, 15, 31, 8)); emit(ADDI(15, 15, 1)); emit(SD(15, 31, 24)); emit(LD(16, 31, 24));
    // counted loop: x5 = 10 iterations, x6 += 3
    emit(ADDI(5, 0, 10)); emit(ADDI(6, 0, 0));
    emit(ADDI(6, 6, 3)); emit(ADDI(5, 5, -1)); emit(BNE(5, 0, -8));
    // branches of every kind, taken and not
    emit(BR(4, 3, 4, 8)); emit(ADDI(9, 0, 1));   // BLT taken
    emit(BR(5, 3, 4, 8)); emit(ADDI(9, 9, 2));   // BGE not taken
    emit(BR(6, 3, 4, 8)); emit(ADDI(9, 9, 4));   // BLTU not taken
    emit(BR(7, 3, 4, 8)); emit(ADDI(9, 9, 8));   // BGEU taken
    emit(BEQ(3, 3, 8));   emit(ADDI(9, 9, 16));  // BEQ taken
    // call / return
    emit(JAL(1, 8)); emit(JAL(0, 12)); emit(ADDI(7, 7, 5)); emit(JALR(0, 1, 0));
    // CSR instructions back to back (CSR hazard)
    emit(CSR(1, 8, 12'h340, 6)); emit(CSR(2, 10, 12'h340, 0)); emit(CSR(6, 11, 12'h340, 3));
    emit(CSR(3, 12, 12'h340, 4)); emit(CSR(7, 13, 12'h340, 1)); emit(CSR(5, 14, 12'h340, 9));
    emit(CSR(2, 17, 12'h340, 0)); emit(CSR(2, 18, 12'h301, 0));
    // traps: ECALL, illegal instruction, misaligned load, misaligned jump target
    emit(ECALL()); emit(32'hFFFF_FFFF); emit(LD(19, 31, 4)); emit(CSR(2, 21, 12'h343, 0));
    emit(EBREAK()); emit(CSR(2, 22, 12'h300, 0));
    emit(AUIPC(25, 0)); emit(JALR(0, 25, 10)); emit(CSR(2, 26, 12'h343, 0));
    // UART: three stores back to back
    emit(LUI(23, 'h10000)); emit(ADDI(24, 0, 72)); emit(STORE(0, 24, 23, 0));
    emit(ADDI(24, 0, 105)); emit(STORE(0, 24, 23, 0)); emit(STORE(0, 3, 23, 0));
    emit(JAL(0, 0));
    handler();
    run_program("directed");

    // ---------------------------------------------------------------- 2 timing
    prog.delete(); prologue();
    emit(ADDI(1, 0, 1));          // 12
    emit(ADDI(2, 0, 2));          // 16 independent
    emit(ADD(3, 1, 2));           // 20 execution-use
    emit(JAL(0, 12));             // 24 -> 36
    emit(NOP()); emit(NOP());     // 28, 32
    emit(ADDI(5, 0, 5));          // 36
    emit(SD(5, 31, 0));           // 40
    emit(LD(6, 31, 0));           // 44 write_done
    emit(ADD(7, 6, 6));           // 48 load-use
    nops(5);                      // 52..68
    emit(MOP(0, 8, 5, 5));        // 72 mul
    nops(5);                      // 76..92
    emit(ADDI(9, 0, 1));          // 96
    nops(5);                      // 100..116
    emit(MOP(4, 10, 5, 9));       // 120 div (64-bit)
    nops(5);                      // 124..140
    emit(ADDI(11, 0, 1));         // 144
    nops(5);                      // 148..164
    emit(MOPW(4, 12, 5, 9));      // 168 divw (32-bit)
    nops(5);                      // 172..188
    emit(ADDI(13, 0, 1));         // 192
    emit(BEQ(0, 0, 8));           // 196 taken, predicted not taken -> 204
    emit(NOP());                  // 200
    emit(BEQ(0, 0, 8));           // 204 taken, now predicted taken -> 212
    emit(NOP());                  // 208
    emit(ADDI(14, 0, 1));         // 212
    emit(JAL(0, 0));              // 216
    run_program("timing");
    // a stall in a later stage delays every older instruction still in the
    // pipe, so each multi-cycle case is measured across a padding of NOPs
    gap(12, 16, 1, "independent");
    gap(16, 20, 2, "execution-use");
    gap(24, 36, 6, "taken jump (5 flushed)");
    gap(40, 44, 2, "write_done");
    gap(44, 48, 3, "load-use");
    gap(52, 96, 11 + 3, "multiply (3 stall)");
    gap(100, 144, 11 + 64 + 3, "divide, 64-bit (N + 3 stall)");
    gap(148, 192, 11 + 32 + 3, "divide, 32-bit (N + 3 stall)");
    gap(196, 204, 6, "misprediction (5 flushed)");
    gap(204, 212, 2, "predicted-taken branch (1 squashed)");

    // ---------------------------------------------------------------- 3.. random
    for (int p = 0; p < 6; p++) begin
      prog.delete(); prologue();
      for (int r = 1; r < 16; r++) li64(r, {$urandom, $urandom});
      for (int i = 0; i < 150; i++) begin
        int k, rd, a, b;
        k = $urandom_range(0, 19); rd = $urandom_range(1, 15); a = $urandom_range(0, 15); b = $urandom_range(0, 15);
        case (k)
          0: emit(r_t($urandom_range(0, 1) ? 7'h20 : 7'h00, b, a, 3'd0, rd, 7'b0110011));
          1, 2: emit(r_t(7'h00, b, a, 3'($urandom_range(1, 7)), rd, 7'b0110011));
          3: emit(ADDI(rd, a, $urandom_range(0, 4095) - 2048));
          4: emit(SRAI(rd, a, $urandom_range(0, 63)));
          5: emit(r_t($urandom_range(0, 1) ? 7'h20 : 7'h00, b, a, 3'd0, rd, 7'b0111011));
          6: emit(ADDIW(rd, a, $urandom_range(0, 4095) - 2048));
          7: emit(SRAW(rd, a, b));
          8, 9: emit(MOP($urandom_range(0, 7), rd, a, b));
          10: emit(MOPW(($urandom_range(0, 4) == 0) ? 0 : $urandom_range(4, 7), rd, a, b));
          11, 12: emit(STORE($urandom_range(0, 3), a, 31, 8 * $urandom_range(0, 31)));
          13, 14: begin
            int f; f = $urandom_range(0, 6);
            emit(LOAD(f, rd, 31, 8 * $urandom_range(0, 31) + ((f == 3) ? 0 : (f == 2 || f == 6) ? 4 * $urandom_range(0, 1) : $urandom_range(0, 1) * 2)));
          end
          15: begin
            int fs [6] = '{0, 1, 4, 5, 6, 7};
            if (i < 140) emit(BR(fs[$urandom_range(0, 5)], a, b, 4 * $urandom_range(1, 4)));
            else         emit(NOP());
          end
          16: emit(XORI(rd, a, $urandom_range(0, 4095)));
          17: emit(SRLIW(rd, a, $urandom_range(0, 31)));
          18: emit(ADD(rd, rd, a));
          default: emit(LUI(rd, $urandom_range(0, 'hFFFFF)));
        endcase
      end
      emit(JAL(0, 0));
      handler();
      ce_random = (p == 5);
      run_program($sformatf("random%0d%s", p, ce_random ? " (ce toggling)" : ""));
      ce_random = 0;
    end

    // ---------------------------------------------------------------- mechanisms
    $display("events: exec_use=%0d load_use=%0d write_done=%0d csr=%0d md=%0d mmio=%0d miss=%0d jump=%0d pred=%0d trap=%0d mret=%0d fw br/mem/wb=%0d/%0d/%0d",
             n_exec_use, n_load_use, n_write_done, n_csr_haz, n_md_stall, n_mmio_stall, n_bp_miss,
             n_jump, n_pred_taken, n_trap, n_mret, n_fw_br, n_fw_mem, n_fw_wb);
    check(n_exec_use > 0, "execution-use stall seen");
    check(n_load_use > 0, "load-use stall seen");
    check(n_write_done > 0, "write_done stall seen");
    check(n_csr_haz > 0, "CSR hazard seen");
    check(n_md_stall > 0, "multiply/divide stall seen");
    check(n_mmio_stall > 0, "UART busy stall seen");
    check(n_bp_miss > 0, "misprediction seen");
    check(n_jump > 0, "jump redirect seen");
    check(n_pred_taken > 0, "predicted-taken redirect seen");
    check(n_trap >= 4, "traps seen");
    check(n_mret >= 4, "MRET seen");
    check(n_fw_br > 0 && n_fw_mem > 0 && n_fw_wb > 0, "all three forwarding sources used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
