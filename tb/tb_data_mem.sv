// tb_data_mem: checks the data BRAM (8192 x 64 bits) with byte write mask
// and synchronous read. A cycle with a non-zero mask writes the masked bytes;
// a cycle with a zero mask reads, and the data appears after the clock edge
// (one-cycle read latency); en low changes nothing. The whole memory is
// first written, then random masked writes and reads are checked against a
// model.
// The synchronous one-cycle BRAM read follows the paper; the depth and byte mask are this design's choices.
module tb_data_mem;
  localparam int D = 8192;
  logic clk = 0, en = 0;
  logic [12:0] addr = 0;
  logic [7:0] write_mask = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] m [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  data_mem #(.DEPTH_WORDS(D)) dut (.*);

  initial begin : watchdog
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    en = 1; write_mask = 8'hFF;
    for (int i = 0; i < D; i++) begin
      addr = 13'(i); wdata = {$urandom, $urandom}; m[i] = wdata;
      @(negedge clk);
    end
    for (int i = 0; i < 20000; i++) begin
      addr = 13'($urandom_range(0, 63));
      en = $urandom_range(0, 5) != 0;
      write_mask = $urandom_range(0, 1) ? 8'($urandom) : 8'h00;
      wdata = {$urandom, $urandom};
      @(negedge clk);
      if (en && write_mask != 0) begin
        for (int k = 0; k < 8; k++) if (write_mask[k]) m[addr][8*k +: 8] = wdata[8*k +: 8];
      end else if (en) begin
        checks++;
        if (rdata !== m[addr]) begin failures++; $display("FAIL: read %0d = %h expected %h", addr, rdata, m[addr]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
