// tb_instr_mem: checks the instruction BRAM (16384 x 32 bits). The program
// is written through the load port (prog_we/prog_addr/prog_data, one word
// per clock); the fetch port takes a byte address, reads word addr[15:2]
// synchronously and presents it after the clock edge (one-cycle latency,
// the IF-to-IO BRAM stage); en low holds the output.
// The one-cycle synchronous read follows the paper; the load port and depth are this design's.
module tb_instr_mem;
  localparam int D = 16384;
  logic clk = 0, en = 0, prog_we = 0;
  logic [15:0] addr = 0;
  logic [13:0] prog_addr = 0;
  logic [31:0] prog_data = 0, rdata, last;
  logic [31:0] m [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  instr_mem #(.DEPTH_WORDS(D)) dut (.*);

  initial begin : watchdog
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      prog_we = 1; prog_addr = 14'(i); prog_data = $urandom; m[i] = prog_data;
      @(negedge clk);
    end
    prog_we = 0;
    en = 1; addr = 0; @(negedge clk); last = rdata;
    for (int i = 0; i < 20000; i++) begin
      addr = {14'($urandom_range(0, D - 1)), 2'b00};
      en = $urandom_range(0, 4) != 0;
      @(negedge clk);
      checks++;
      if (rdata !== (en ? m[addr[15:2]] : last)) begin
        failures++; $display("FAIL: fetch %h = %h", addr, rdata);
      end
      last = rdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
