// tb_program_counter: checks the PC register. After reset pc is RESET_PC;
// each enabled clock loads next_pc (one-cycle latency), a disabled clock
// (ce low) holds it, and pc_plus4 is always pc + 4. Random next_pc values
// are applied for 200 cycles with ce toggled at random.
// The paper only names the block.
module tb_program_counter;
  logic clk = 0, rst = 1, ce = 0;
  logic [63:0] next_pc, pc, pc_plus4, exp_pc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  program_counter #(.XLEN(64), .RESET_PC(64'h0)) dut (.*);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    next_pc = 64'h1234;
    @(posedge clk); @(negedge clk);
    check(pc == 64'h0, "reset value");
    rst = 0; exp_pc = 64'h0;
    for (int i = 0; i < 200; i++) begin
      next_pc = {$urandom, $urandom};
      ce = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (ce) exp_pc = next_pc;                 // loaded on this edge: 1-cycle latency
      @(negedge clk);
      check(pc == exp_pc, $sformatf("pc %h expected %h", pc, exp_pc));
      check(pc_plus4 == pc + 4, "pc_plus4");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
