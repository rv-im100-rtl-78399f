// rv64im_core: the 8-stage RV64IM_Zicsr pipeline (the "72F8SP" core):
// IF, IO, ID, EXR, EX, BR, MEM, WB.
//
//  IF   program counter; its value addresses the instruction BRAM.
//  IO   "instruction out": the BRAM word arrives one clock after its address.
//       The 2-bit branch predictor looks at it here and, for a conditional
//       branch it predicts taken, redirects fetch to PC + immediate,
//       squashing the instruction fetched behind it.
//  ID   field decode, control unit, immediate, register-file and CSR reads;
//       CSR instructions and MRET wait here while an older CSR write is in
//       flight.
//  EXR  "execution ready": forwarding (BR, MEM and WB sources, one-hot
//       AND-OR selection) and operand-source selection; the resolved operands
//       are registered. A producer still in EX (execution-use) or a load still
//       in BR (load-use) stalls the instruction here; while it waits, its
//       stored operands are refreshed each cycle from the forwarding network
//       so that a value leaving WB is never missed.
//  EX   the dual-width ALU only. M-extension instructions start the
//       multiplier (3 cycles) or divider (N + 3 cycles) and freeze the whole
//       pipeline until the result is ready.
//  BR   branch logic on the registered ALU result and zero flag; jumps
//       (JAL/JALR, target = ALU result) and mispredictions redirect fetch and
//       flush the five younger stages. Exception detection and trap entry/MRET
//       also happen here. The registered ALU result is presented to the data
//       BRAM as the load address, one cycle ahead of MEM.
//  MEM  load data arrives from the data BRAM and is aligned/extended by the
//       byte-enable logic; stores write the BRAM here, or, at addresses at or
//       above MMIO_BASE, leave the core on the MMIO port. A load in BR behind a
//       store in MEM waits one cycle for the single BRAM port (write_done).
//       The MMIO address compares and the forwarding value of a non-load are
//       already worked out in BR and arrive registered, so MEM's forwarding
//       path is only the load-data alignment and one 2:1 choice.
//  WB   register-file and CSR writes. The register file passes a write
//       through to a same-cycle read in ID, so there is no retire forwarding
//       source.
// Penalties: misprediction or taken jump 5 cycles, predicted-taken branch 1,
// back-to-back dependency 1 (execution-use), load followed by a use 2.
//
// Interface: instruction and data memories are outside (imem_*, dmem_*), as
// in the paper's core-only configuration; mmio_* carry stores to the MMIO
// region; uart_busy holds a store to the UART address in MEM until the UART
// can take it; ce is a global clock enable. Synchronous active-high reset,
// fetch starts at RESET_PC.
// From the paper: the stage list and what each stage does, forwarding
// sources, the hazard classes and flush depths, BRAM timing, the M units,
// the write-back source codes. This design's own choices: the memory map,
// the CSR set, the operand refresh in EXR, the single shared data-BRAM port,
// and only some of the paper's timing optimisations: the one-hot forwarding
// multiplexer, no retire or CSR forwarding, MEM forwarding data and the MMIO
// compare prepared in BR, and exception detection and JALR resolution in BR.
//
// Signals a lint tool reports as unused are kept on purpose as observation
// points: the hazard classes (exec_use, load_use, write_done, csr_hazard), the
// forwarding selects (sel_a, sel_b), pc_plus4 (fetch uses the PC controller's
// own adder), mul_busy/div_busy (the pipeline waits on md_wait instead) and
// the PC carried in the MEM/WB register, which names the retiring
// instruction for debugging and tests. Synthesis removes them.
module rv64im_core #(
  parameter int unsigned     XLEN     = 64,
  parameter int unsigned     IMEM_AW  = 14,   // instruction memory, 32-bit words
  parameter int unsigned     DMEM_AW  = 13,   // data memory, 64-bit words
  parameter logic [XLEN-1:0] RESET_PC = '0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ce,
  // instruction memory (synchronous read)
  output logic [IMEM_AW+1:0] imem_addr,
  output logic               imem_en,
  input  logic [31:0]        imem_rdata,
  // data memory (synchronous, byte-masked write)
  output logic               dmem_en,
  output logic [DMEM_AW-1:0] dmem_addr,
  output logic [7:0]         dmem_wmask,
  output logic [63:0]        dmem_wdata,
  input  logic [63:0]        dmem_rdata,
  // MMIO
  output logic               mmio_we,
  output logic [XLEN-1:0]    mmio_addr,
  output logic [XLEN-1:0]    mmio_wd,
  input  logic               uart_busy,
  output logic [6:0]         current_opcode
);
  import rv_pkg::*;

  // ------------------------------------------------------------ pipeline regs
  if_io_t  io_d,  io_q;
  io_id_t  id_d,  id_q;
  id_exr_t exr_d, exr_q;
  exr_ex_t ex_d,  ex_q;
  ex_br_t  br_d,  br_q;
  br_mem_t mem_d, mem_q;
  mem_wb_t wb_d,  wb_q;

  logic freeze, pc_hold;
  logic hold_io, hold_id, hold_exr, hold_ex, hold_br, hold_mem, hold_wb;
  logic flush_io, flush_id, flush_exr, flush_ex, flush_br, flush_mem;
  logic exec_use, load_use, write_done, csr_hazard;

  pipe_reg #(.T(if_io_t))  r_if_io  (.clk, .rst, .ce, .hold(hold_io),  .flush(flush_io),  .d(io_d),  .q(io_q));
  pipe_reg #(.T(io_id_t))  r_io_id  (.clk, .rst, .ce, .hold(hold_id),  .flush(flush_id),  .d(id_d),  .q(id_q));
  // ID/EXR never "holds": while stalled it reloads itself with refreshed operands
  pipe_reg #(.T(id_exr_t)) r_id_exr (.clk, .rst, .ce, .hold(1'b0),     .flush(flush_exr), .d(exr_d), .q(exr_q));
  pipe_reg #(.T(exr_ex_t)) r_exr_ex (.clk, .rst, .ce, .hold(hold_ex),  .flush(flush_ex),  .d(ex_d),  .q(ex_q));
  pipe_reg #(.T(ex_br_t))  r_ex_br  (.clk, .rst, .ce, .hold(hold_br),  .flush(flush_br),  .d(br_d),  .q(br_q));
  pipe_reg #(.T(br_mem_t)) r_br_mem (.clk, .rst, .ce, .hold(hold_mem), .flush(flush_mem), .d(mem_d), .q(mem_q));
  pipe_reg #(.T(mem_wb_t)) r_mem_wb (.clk, .rst, .ce, .hold(hold_wb),  .flush(1'b0),      .d(wb_d),  .q(wb_q));

  // ------------------------------------------------------------ IF
  logic [XLEN-1:0] pc, pc_plus4, next_pc;
  logic            trapped, kill_br, br_jump, bp_miss, redirect;
  logic [XLEN-1:0] t_target, j_target, btarget_actu;
  logic            b_est;
  logic [XLEN-1:0] b_target;

  program_counter #(.XLEN(XLEN), .RESET_PC(RESET_PC)) u_pc (
    .clk, .rst, .ce, .next_pc, .pc, .pc_plus4);

  pc_controller #(.XLEN(XLEN)) u_pcc (
    .trapped(trapped && !freeze), .t_target,
    .br_jump(br_jump && !freeze), .j_target,
    .bp_miss(bp_miss && !freeze), .btarget_actu,
    .pc_stall(pc_hold), .b_est(b_est && !hold_id), .b_target,
    .pc, .next_pc, .redirect_br(redirect));

  assign imem_addr = pc[IMEM_AW+1:0];
  assign imem_en   = !hold_io;
  assign io_d      = '{valid: 1'b1, pc: pc};

  // ------------------------------------------------------------ IO
  logic br_branch_upd, br_taken;
  branch_predictor #(.XLEN(XLEN)) u_bp (
    .clk, .rst, .ce, .io_valid(io_q.valid), .io_pc(io_q.pc), .io_instr(imem_rdata),
    .b_est, .b_target, .br_branch(br_branch_upd), .br_taken);

  assign id_d = '{valid: io_q.valid, pc: io_q.pc, instr: imem_rdata, b_est: b_est};

  // ------------------------------------------------------------ ID
  logic [6:0]  id_opcode, id_funct7;
  logic [2:0]  id_funct3;
  logic [4:0]  id_rs1, id_rs2, id_rd;
  logic [24:0] id_raw_imm;
  fmt_e        id_fmt;
  ctrl_t       id_ctrl_raw, id_ctrl;
  logic [XLEN-1:0] id_imm, rf_rd1, rf_rd2, csr_rd;

  instr_decoder u_dec (.instr(id_q.instr), .fmt(id_fmt), .opcode(id_opcode), .funct3(id_funct3),
    .funct7(id_funct7), .rs1(id_rs1), .rs2(id_rs2), .rd(id_rd), .raw_imm(id_raw_imm));
  control_unit u_cu (.opcode(id_opcode), .funct3(id_funct3), .funct7(id_funct7),
    .rs1(id_rs1), .rd(id_rd), .imm12(id_q.instr[31:20]), .ctrl(id_ctrl_raw));
  imm_gen #(.XLEN(XLEN)) u_imm (.fmt(id_fmt), .raw_imm(id_raw_imm), .imm(id_imm));

  assign id_ctrl = id_q.valid ? id_ctrl_raw : CTRL_NOP;

  // WB-stage signals used by the register file and CSR file
  logic wb_rf_we, wb_csr_we, wb_retire;
  logic trap_we, mret_do;
  logic [XLEN-1:0] trap_mepc, trap_mcause, trap_mtval, mtvec, mepc;

  register_file #(.XLEN(XLEN)) u_rf (
    .clk, .rst, .ce, .ra1(id_rs1), .ra2(id_rs2), .rd1(rf_rd1), .rd2(rf_rd2),
    .we(wb_rf_we), .wa(wb_q.rd), .wd(wb_q.rd_data));

  csr_file #(.XLEN(XLEN)) u_csr (
    .clk, .rst, .ce, .csr_ra(id_q.instr[31:20]), .csr_rd,
    .csr_we(wb_csr_we), .csr_wa(wb_q.instr[31:20]), .csr_wd(wb_q.csr_wd),
    .trap_we(trap_we && !freeze), .trap_mepc, .trap_mcause, .trap_mtval,
    .mret(mret_do && !freeze), .instr_retired(wb_retire), .mtvec, .mepc);

  // ------------------------------------------------------------ EXR
  logic [2:0]            fw_we;
  logic [2:0][4:0]       fw_rd;
  logic [2:0][XLEN-1:0]  fw_data;
  logic [3:0]            sel_a, sel_b;
  logic [XLEN-1:0]       fw_a, fw_b, exr_src_a, exr_src_b;

  forward_unit #(.XLEN(XLEN)) u_fwd (
    .rs1(exr_q.rs1), .rs2(exr_q.rs2), .rf_rs1(exr_q.rs1_val), .rf_rs2(exr_q.rs2_val),
    .src_we(fw_we), .src_rd(fw_rd), .src_data(fw_data),
    .sel_a, .sel_b, .fw_a, .fw_b);

  always_comb begin
    unique case (exr_q.ctrl.a_sel)
      A_PC:    exr_src_a = exr_q.pc;
      A_ZIMM:  exr_src_a = XLEN'(exr_q.rs1);
      default: exr_src_a = fw_a;
    endcase
    unique case (exr_q.ctrl.b_sel)
      B_IMM:   exr_src_b = exr_q.imm;
      B_CSR:   exr_src_b = exr_q.csr_rd;
      default: exr_src_b = fw_b;
    endcase
  end

  always_comb begin
    if (hold_exr) begin
      // stalled in EXR: keep the instruction, refresh its operands
      exr_d         = exr_q;
      exr_d.rs1_val = fw_a;
      exr_d.rs2_val = fw_b;
    end else begin
      exr_d = '{valid: id_q.valid, pc: id_q.pc, instr: id_q.instr, ctrl: id_ctrl,
                imm: id_imm, rs1: id_rs1, rs2: id_rs2, rd: id_rd,
                rs1_val: rf_rd1, rs2_val: rf_rd2, csr_rd: csr_rd, b_est: id_q.b_est};
    end
  end

  assign ex_d = '{valid: exr_q.valid, pc: exr_q.pc, instr: exr_q.instr, ctrl: exr_q.ctrl,
                  imm: exr_q.imm, rd: exr_q.rd, src_a: exr_src_a, src_b: exr_src_b,
                  store_data: fw_b, csr_rd: exr_q.csr_rd, b_est: exr_q.b_est};

  // ------------------------------------------------------------ EX
  alu_op_e         alu_op;
  logic            mul_start, div_start, md_wait, md_done, mul_busy, div_busy;
  logic [XLEN-1:0] alu_result;
  logic            alu_zero;

  alu_controller u_aluc (
    .clk, .rst, .ce, .valid(ex_q.valid), .opcode(ex_q.instr[6:0]), .funct3(ex_q.instr[14:12]),
    .funct7(ex_q.instr[31:25]), .imm10(ex_q.instr[30]),
    .ex_advance(!hold_br), .ex_kill(flush_br), .md_done,
    .alu_op, .mul_start, .div_start, .md_wait);

  alu #(.XLEN(XLEN)) u_alu (
    .clk, .rst, .ce, .alu_op, .is_word(ex_q.ctrl.is_word), .src_a(ex_q.src_a), .src_b(ex_q.src_b),
    .mul_start, .div_start, .result(alu_result), .zero(alu_zero),
    .mul_busy, .div_busy, .md_done);

  assign br_d = '{valid: ex_q.valid, pc: ex_q.pc, instr: ex_q.instr, ctrl: ex_q.ctrl,
                  imm: ex_q.imm, rd: ex_q.rd, alu_result: alu_result, alu_zero: alu_zero,
                  store_data: ex_q.store_data, csr_rd: ex_q.csr_rd, b_est: ex_q.b_est};

  // ------------------------------------------------------------ BR
  logic            btaken, exc;
  logic [XLEN-1:0] btaken_target, exc_tval;
  logic [3:0]      exc_cause;
  logic            br_mret;

  branch_logic #(.XLEN(XLEN)) u_brl (
    .branch(br_q.valid && br_q.ctrl.branch), .branch_est(br_q.b_est), .funct3(br_q.instr[14:12]),
    .pc(br_q.pc), .imm(br_q.imm), .alu_zero(br_q.alu_zero), .alu_result(br_q.alu_result),
    .btaken, .btaken_target, .btarget_actu, .bp_miss);

  exception_detector #(.XLEN(XLEN)) u_exc (
    .valid(br_q.valid), .ctrl(br_q.ctrl), .instr(br_q.instr), .alu_result(br_q.alu_result),
    .btaken, .btarget(btaken_target), .exception(exc), .cause(exc_cause), .tval(exc_tval),
    .mret(br_mret));

  trap_controller #(.XLEN(XLEN)) u_trap (
    .exception(exc), .cause(exc_cause), .tval(exc_tval), .mret(br_mret), .br_pc(br_q.pc),
    .mtvec, .mepc, .trapped, .kill_br, .t_target,
    .trap_we, .trap_mepc, .trap_mcause, .trap_mtval, .mret_do);

  assign br_jump       = br_q.valid && br_q.ctrl.jump;
  assign j_target      = {br_q.alu_result[XLEN-1:1], 1'b0};
  assign br_taken      = btaken;
  assign br_branch_upd = br_q.valid && br_q.ctrl.branch && !freeze && !exc;

  logic [XLEN-1:0] br_value;
  always_comb begin
    unique case (br_q.ctrl.wb_src)
      WB_CSR:  br_value = br_q.csr_rd;
      WB_IMM:  br_value = br_q.imm;
      WB_PC4:  br_value = br_q.pc + XLEN'(4);
      default: br_value = br_q.alu_result;
    endcase
  end

  // MEM's forwarding value for non-loads and the MMIO address compares are
  // worked out here and registered, off MEM's forwarding path
  assign mem_d = '{valid: br_q.valid, pc: br_q.pc, instr: br_q.instr, ctrl: br_q.ctrl,
                   rd: br_q.rd, alu_result: br_q.alu_result, store_data: br_q.store_data,
                   fw_value: br_value, is_mmio: (br_q.alu_result >= MMIO_BASE),
                   is_uart: (br_q.alu_result == UART_TX_ADDR)};

  // ------------------------------------------------------------ MEM
  logic            mem_is_mmio, mem_store_dm, mem_store_mmio, mmio_stall;
  logic [63:0]     be_wd, be_rf_wd;
  logic [7:0]      be_mask;
  logic [XLEN-1:0] mem_value;

  assign mem_is_mmio    = mem_q.is_mmio;
  assign mem_store_dm   = mem_q.valid && mem_q.ctrl.mem_write && !mem_is_mmio;
  assign mem_store_mmio = mem_q.valid && mem_q.ctrl.mem_write &&  mem_is_mmio;
  assign mmio_stall     = mem_store_mmio && mem_q.is_uart && uart_busy;

  be_logic u_be (
    .mem_read(mem_q.ctrl.mem_read), .mem_write(mem_store_dm), .funct3(mem_q.instr[14:12]),
    .addr(mem_q.alu_result[2:0]), .rd2(mem_q.store_data), .dm_rd(dmem_rdata),
    .bedm_wd(be_wd), .write_mask(be_mask), .berf_wd(be_rf_wd));

  // single data-BRAM port: a store in MEM owns it, otherwise the BR address reads
  assign dmem_en    = !freeze;
  assign dmem_addr  = mem_store_dm ? mem_q.alu_result[DMEM_AW+2:3] : br_q.alu_result[DMEM_AW+2:3];
  assign dmem_wmask = be_mask;
  assign dmem_wdata = be_wd;

  assign mmio_we   = ce && mem_store_mmio && !freeze;
  assign mmio_addr = mem_q.alu_result;
  assign mmio_wd   = mem_q.store_data;

  assign mem_value = (mem_q.ctrl.wb_src == WB_MEM) ? (mem_is_mmio ? '0 : be_rf_wd) : mem_q.fw_value;

  assign wb_d = '{valid: mem_q.valid, pc: mem_q.pc, instr: mem_q.instr, ctrl: mem_q.ctrl,
                  rd: mem_q.rd, rd_data: mem_value, csr_wd: mem_q.alu_result};

  // ------------------------------------------------------------ WB
  assign wb_rf_we  = wb_q.valid && wb_q.ctrl.reg_write;
  assign wb_csr_we = wb_q.valid && wb_q.ctrl.csr_we && !freeze;
  assign wb_retire = wb_q.valid && !freeze;

  assign current_opcode = wb_q.instr[6:0];

  // forwarding sources {wb, mem, br}
  assign fw_we   = {wb_rf_we, mem_q.valid && mem_q.ctrl.reg_write, br_q.valid && br_q.ctrl.reg_write};
  assign fw_rd   = {wb_q.rd, mem_q.rd, br_q.rd};
  assign fw_data = {wb_q.rd_data, mem_value, br_value};

  // ------------------------------------------------------------ hazards
  logic csr_w_inflight;
  assign csr_w_inflight = (exr_q.valid && exr_q.ctrl.csr_we) || (ex_q.valid && ex_q.ctrl.csr_we) ||
                          (br_q.valid && br_q.ctrl.csr_we) || (mem_q.valid && mem_q.ctrl.csr_we) ||
                          (wb_q.valid && wb_q.ctrl.csr_we);

  hazard_unit u_hz (
    .md_wait, .mmio_stall, .redirect, .kill_br(kill_br), .b_est(b_est),
    .exr_valid(exr_q.valid), .exr_rs1(exr_q.rs1), .exr_rs2(exr_q.rs2),
    .exr_uses_rs1(exr_q.ctrl.uses_rs1), .exr_uses_rs2(exr_q.ctrl.uses_rs2),
    .ex_we(ex_q.valid && ex_q.ctrl.reg_write), .ex_rd(ex_q.rd),
    .br_load(br_q.valid && br_q.ctrl.mem_read), .br_rd(br_q.rd),
    .mem_store(mem_store_dm),
    .id_csr_read(id_q.valid && (id_ctrl.csr_op || id_ctrl.mret)), .csr_w_inflight,
    .freeze, .pc_hold, .hold_io, .hold_id, .hold_exr, .hold_ex, .hold_br, .hold_mem, .hold_wb,
    .flush_io, .flush_id, .flush_exr, .flush_ex, .flush_br, .flush_mem,
    .exec_use, .load_use, .write_done, .csr_hazard);

  // the M units are started only by the ALU controller, one at a time
  assert property (@(posedge clk) disable iff (rst) !(mul_start && div_start));
endmodule
