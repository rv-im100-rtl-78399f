// tb_mmio_interface: checks MMIO store decoding. A store to the UART
// address gives, one clock later, a one-cycle mmio_tx_start with the low
// byte of the store data on mmio_tx_data; stores to other addresses, stores
// with ce low and idle cycles give no start. Random store streams with a
// UART that is never busy.
// The block and signal names are the paper's; the UART address and byte width are this design's.
module tb_mmio_interface;
  logic clk = 0, rst = 1, ce = 1, mmio_dm_we = 0, uart_busy = 0, mmio_tx_start;
  logic [63:0] mmio_dm_address = 0, mmio_dm_wd = 0;
  logic [7:0] mmio_tx_data;
  bit exp_start; logic [7:0] exp_data;
  int n_start = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mmio_interface #(.XLEN(64)) dut (.*);

  initial begin : watchdog
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 2000; i++) begin
      mmio_dm_we = $urandom_range(0, 1);
      mmio_dm_address = $urandom_range(0, 2) != 0 ? 64'h1000_0000 : 64'h1000_0000 + 64'($urandom_range(1, 64));
      mmio_dm_wd = {$urandom, $urandom}; ce = $urandom_range(0, 5) != 0;
      exp_start = ce && mmio_dm_we && mmio_dm_address == 64'h1000_0000;
      exp_data = mmio_dm_wd[7:0];
      @(negedge clk);                  // one-clock latency
      checks++;
      if (mmio_tx_start !== exp_start || (exp_start && mmio_tx_data !== exp_data)) begin
        failures++; $display("FAIL: start %b expected %b data %h expected %h", mmio_tx_start, exp_start, mmio_tx_data, exp_data);
      end
      if (mmio_tx_start) n_start++;
    end
    checks++; if (n_start == 0) begin failures++; $display("FAIL: no UART store seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
