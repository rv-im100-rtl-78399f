// tb_forward_unit: checks operand forwarding in EXR. For random producer
// sets in BR, MEM and WB (often with the same rd) each
// operand must take the value of the newest matching producer (BR, then
// MEM, then WB), else the register-file value; x0 never
// forwards; the select vectors are one-hot and name the chosen source.
// Combinational.
// The BR/MEM/WB sources, the missing retire source and the one-hot selection follow the paper.
module tb_forward_unit;
  logic [4:0] rs1, rs2;
  logic [63:0] rf_rs1, rf_rs2, fw_a, fw_b;
  logic [2:0] src_we;
  logic [2:0][4:0] src_rd;
  logic [2:0][63:0] src_data;
  logic [3:0] sel_a, sel_b;
  int hits [4];
  int checks = 0, failures = 0;
  forward_unit #(.XLEN(64)) dut (.*);

  function automatic int newest(logic [4:0] rs);
    if (rs == 0) return -1;
    for (int i = 0; i < 3; i++) if (src_we[i] && src_rd[i] == rs) return i;
    return -1;
  endfunction

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (hits[i]) hits[i] = 0;
    for (int i = 0; i < 5000; i++) begin
      int na, nb;
      rs1 = 5'($urandom_range(0, 3)); rs2 = 5'($urandom_range(0, 3));
      rf_rs1 = {$urandom, $urandom}; rf_rs2 = {$urandom, $urandom};
      src_we = 3'($urandom);
      for (int k = 0; k < 3; k++) begin src_rd[k] = 5'($urandom_range(0, 3)); src_data[k] = {$urandom, $urandom}; end
      #1;
      na = newest(rs1); nb = newest(rs2);
      checks++;
      if (fw_a !== (na < 0 ? rf_rs1 : src_data[na]) || fw_b !== (nb < 0 ? rf_rs2 : src_data[nb]) ||
          sel_a !== (na < 0 ? 4'b0001 : 4'b0010 << na) || sel_b !== (nb < 0 ? 4'b0001 : 4'b0010 << nb)) begin
        failures++; $display("FAIL: rs1 %0d rs2 %0d sel %b %b", rs1, rs2, sel_a, sel_b);
      end
      hits[na + 1]++;
    end
    checks++;
    if (hits[0] == 0 || hits[1] == 0 || hits[2] == 0 || hits[3] == 0) begin
      failures++; $display("FAIL: not every source used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
