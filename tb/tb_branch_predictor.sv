// tb_branch_predictor: checks the single shared 2-bit saturating counter.
// After reset the counter is weakly not-taken (01). A scoreboard counter is
// trained with random branch outcomes from BR; b_est must be high exactly for
// a valid conditional branch in IO while the counter is 10 or 11, with the
// target io_pc + B-immediate. Training takes effect on the next cycle
// (one-cycle latency); a cycle with ce low must not train.
// The 2-bit saturating counter follows the paper; the shared counter, reset state 01 and IO-stage prediction checked here are this design's choices.
module tb_branch_predictor;
  import rv_asm_pkg::*;
  logic clk = 0, rst = 1, ce = 1;
  logic io_valid, b_est, br_branch, br_taken;
  logic [63:0] io_pc, b_target;
  logic [31:0] io_instr;
  int cnt, off;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  branch_predictor #(.XLEN(64)) dut (.*);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    br_branch = 0; br_taken = 0; io_valid = 0; io_pc = 0; io_instr = NOP();
    @(posedge clk); @(negedge clk); rst = 0; cnt = 1;
    for (int i = 0; i < 1000; i++) begin
      off = 2 * $urandom_range(0, 2047) - 2048;
      io_valid = $urandom_range(0, 3) != 0;
      io_pc = {$urandom, $urandom};
      io_instr = $urandom_range(0, 3) != 0 ? BR($urandom_range(0, 7), 1, 2, off) : ADD(1, 2, 3);
      // bias the outcomes so that both saturations are reached
      br_branch = $urandom_range(0, 1);
      br_taken = (i % 200 < 100) ? ($urandom_range(0, 4) != 0) : ($urandom_range(0, 4) == 0);
      ce = $urandom_range(0, 7) != 0;
      #1;
      check(b_est == (io_valid && io_instr[6:0] == 7'b1100011 && cnt >= 2),
            $sformatf("b_est %b with counter %0d", b_est, cnt));
      if (b_est) check(b_target == io_pc + 64'(longint'(off)), "b_target");
      @(posedge clk);
      if (ce && br_branch) cnt = br_taken ? (cnt == 3 ? 3 : cnt + 1) : (cnt == 0 ? 0 : cnt - 1);
      @(negedge clk);
      check(dut.counter == 2'(cnt), $sformatf("counter %0d expected %0d", dut.counter, cnt));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
