// tb_register_file: checks the 32 x 64-bit register file. Reset clears all
// registers; writes happen on the clock edge when we and ce are high; x0
// always reads zero; a read of the register being written in the same cycle
// returns the new value (write-through, zero-cycle forwarding). Random
// reads/writes for 2000 cycles against a scoreboard.
// Write-through is what lets the paper drop the retire forwarding source.
module tb_register_file;
  logic clk = 0, rst = 1, ce = 1, we = 0;
  logic [4:0] ra1, ra2, wa;
  logic [63:0] rd1, rd2, wd;
  logic [63:0] m [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  register_file #(.XLEN(64)) dut (.*);

  task automatic check(bit c, string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin : watchdog
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ra1 = 0; ra2 = 0; wa = 0; wd = 0;
    @(posedge clk); @(negedge clk); rst = 0;
    foreach (m[i]) m[i] = '0;
    for (int i = 0; i < 32; i++) begin
      ra1 = 5'(i); #1; check(rd1 == 0, $sformatf("x%0d cleared by reset", i));
    end
    for (int i = 0; i < 2000; i++) begin
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = {$urandom, $urandom};
      ce = $urandom_range(0, 5) != 0;
      ra1 = $urandom_range(0, 2) == 0 ? wa : 5'($urandom); ra2 = 5'($urandom);
      #1;
      check(rd1 == ((we && ce && wa == ra1 && ra1 != 0) ? wd : m[ra1]), $sformatf("rd1 x%0d", ra1));
      check(rd2 == ((we && ce && wa == ra2 && ra2 != 0) ? wd : m[ra2]), $sformatf("rd2 x%0d", ra2));
      @(posedge clk);
      if (we && ce && wa != 0) m[wa] = wd;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
