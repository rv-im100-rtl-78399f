// tb_be_logic: checks the byte-enable logic of the 64-bit data memory port.
// Stores: the data is shifted to its byte lane and the write mask covers
// 1, 2, 4 or 8 bytes at the address offset; no mask without mem_write.
// Loads: the addressed bytes are extracted from the 64-bit memory word and
// sign- or zero-extended for LB, LH, LW, LD, LBU, LHU, LWU. Random naturally
// aligned accesses. Combinational.
// The expected values come from the RISC-V specification, not from the RTL; the block name is the paper's.
module tb_be_logic;
  logic mem_read, mem_write;
  logic [2:0] funct3, addr;
  logic [63:0] rd2, dm_rd, bedm_wd, berf_wd, w, e;
  logic [7:0] write_mask, em;
  int checks = 0, failures = 0;
  be_logic dut (.*);

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int n;
      mem_read = $urandom_range(0, 1); mem_write = !mem_read && $urandom_range(0, 3) != 0;
      funct3 = mem_write ? 3'($urandom_range(0, 3)) : 3'($urandom_range(0, 6));
      n = 1 << funct3[1:0];
      addr = 3'($urandom_range(0, 7)) & ~3'(n - 1);
      rd2 = {$urandom, $urandom}; dm_rd = {$urandom, $urandom};
      #1;
      em = mem_write ? 8'((1 << n) - 1) << addr : 8'h00;
      w = dm_rd >> (8 * addr);
      case (funct3)
        0: e = {{56{w[7]}}, w[7:0]};   1: e = {{48{w[15]}}, w[15:0]};
        2: e = {{32{w[31]}}, w[31:0]}; 3: e = w;
        4: e = {56'b0, w[7:0]};        5: e = {48'b0, w[15:0]};
        default: e = {32'b0, w[31:0]};
      endcase
      checks++;
      if (write_mask !== em) begin failures++; $display("FAIL: mask %b expected %b", write_mask, em); end
      if (mem_write) begin
        for (int k = 0; k < 8; k++) if (em[k]) begin
          checks++;
          if (bedm_wd[8*k +: 8] !== rd2[8*(k - addr) +: 8]) begin failures++; $display("FAIL: store lane %0d", k); end
        end
      end
      if (mem_read) begin
        checks++;
        if (berf_wd !== e) begin failures++; $display("FAIL: load f3=%0d @%0d %h expected %h", funct3, addr, berf_wd, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
