// tb_pc_controller: checks the next-PC priority of the PC controller with
// random inputs: trap/MRET target, then BR-stage jump target, then the
// corrected branch target on a misprediction, then hold (pc_stall), then the
// predicted-taken target from IO, else pc + 4. redirect_br must be high
// exactly when one of the three BR-stage sources wins. Combinational, checked
// 1 ns after each input change (zero-cycle latency).
// The redirect sources follow the paper's block diagram; the priority order is this design's.
module tb_pc_controller;
  logic trapped, br_jump, bp_miss, pc_stall, b_est, redirect_br;
  logic [63:0] t_target, j_target, btarget_actu, b_target, pc, next_pc, exp;
  int checks = 0, failures = 0;
  pc_controller #(.XLEN(64)) dut (.*);

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      {trapped, br_jump, bp_miss, pc_stall, b_est} = 5'($urandom);
      if ($urandom_range(0, 1)) {trapped, br_jump, bp_miss} = '0;
      t_target = {$urandom, $urandom}; j_target = {$urandom, $urandom};
      btarget_actu = {$urandom, $urandom}; b_target = {$urandom, $urandom};
      pc = {$urandom, $urandom};
      #1;
      if (trapped)       exp = t_target;
      else if (br_jump)  exp = j_target;
      else if (bp_miss)  exp = btarget_actu;
      else if (pc_stall) exp = pc;
      else if (b_est)    exp = b_target;
      else               exp = pc + 4;
      checks++;
      if (next_pc !== exp || redirect_br !== (trapped || br_jump || bp_miss)) begin
        failures++;
        $display("FAIL: in %b next_pc %h expected %h", {trapped, br_jump, bp_miss, pc_stall, b_est}, next_pc, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
