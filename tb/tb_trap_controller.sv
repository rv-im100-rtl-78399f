// tb_trap_controller: checks trap entry and return. An exception in BR
// redirects to mtvec, kills the BR instruction and writes mepc = BR PC,
// mcause and mtval; an MRET (without exception) redirects to mepc and
// restores mstatus (mret_do); otherwise nothing happens. Random inputs,
// combinational.
// The paper names the block and its signals; the behaviour checked is the RISC-V privileged specification's.
module tb_trap_controller;
  logic exception, mret, trapped, kill_br, trap_we, mret_do;
  logic [3:0] cause;
  logic [63:0] tval, br_pc, mtvec, mepc, t_target, trap_mepc, trap_mcause, trap_mtval;
  int checks = 0, failures = 0;
  trap_controller #(.XLEN(64)) dut (.*);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      exception = $urandom_range(0, 1); mret = $urandom_range(0, 1); cause = 4'($urandom);
      tval = {$urandom, $urandom}; br_pc = {$urandom, $urandom};
      mtvec = {$urandom, $urandom}; mepc = {$urandom, $urandom};
      #1;
      check(trapped == (exception || mret), "trapped");
      check(kill_br == exception && trap_we == exception, "kill/write on exception");
      check(mret_do == (mret && !exception), "mret_do");
      if (exception) begin
        check(t_target == mtvec, "target mtvec");
        check(trap_mepc == br_pc && trap_mcause == 64'(cause) && trap_mtval == tval, "trap CSR values");
      end else if (mret) check(t_target == mepc, "target mepc");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
