// tb_hazard_unit: checks stall and flush control with random hazard inputs
// against a reference of the priority order: freeze (mul/div or UART busy:
// everything holds) > BR redirect (flush IF..EX outputs, MEM too on an
// exception) > write_done (hold to BR, bubble into MEM) > execution-use or
// load-use (hold to EXR, bubble into EX) > CSR hazard (hold to ID, bubble
// into EXR) > predicted-taken branch (squash IO). Also checks the hazard
// detection flags themselves, including that x0 and unused operands never
// cause a stall. Combinational.
// The execution-use, load-use, write_done, M-unit and misprediction cases follow the paper; the priority order is this design's.
module tb_hazard_unit;
  logic md_wait, mmio_stall, redirect, kill_br, b_est, exr_valid, exr_uses_rs1, exr_uses_rs2;
  logic ex_we, br_load, mem_store, id_csr_read, csr_w_inflight;
  logic [4:0] exr_rs1, exr_rs2, ex_rd, br_rd;
  logic freeze, pc_hold, hold_io, hold_id, hold_exr, hold_ex, hold_br, hold_mem, hold_wb;
  logic flush_io, flush_id, flush_exr, flush_ex, flush_br, flush_mem;
  logic exec_use, load_use, write_done, csr_hazard;
  logic [6:0] eh; logic [5:0] ef; logic eph;
  int seen [6];
  int checks = 0, failures = 0;
  hazard_unit dut (.*);

  initial begin : watchdog
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (seen[i]) seen[i] = 0;
    for (int i = 0; i < 20000; i++) begin
      bit eu, lu, wd, ch;
      md_wait = $urandom_range(0, 9) == 0; mmio_stall = $urandom_range(0, 9) == 0;
      redirect = $urandom_range(0, 5) == 0; kill_br = $urandom_range(0, 1);
      b_est = $urandom_range(0, 1); exr_valid = $urandom_range(0, 3) != 0;
      exr_rs1 = 5'($urandom_range(0, 3)); exr_rs2 = 5'($urandom_range(0, 3));
      exr_uses_rs1 = $urandom_range(0, 1); exr_uses_rs2 = $urandom_range(0, 1);
      ex_we = $urandom_range(0, 1); ex_rd = 5'($urandom_range(0, 3));
      br_load = $urandom_range(0, 2) == 0; br_rd = 5'($urandom_range(0, 3));
      mem_store = $urandom_range(0, 3) == 0; id_csr_read = $urandom_range(0, 2) == 0;
      csr_w_inflight = $urandom_range(0, 1);
      #1;
      eu = exr_valid && ex_we && ex_rd != 0 &&
           ((exr_uses_rs1 && exr_rs1 == ex_rd) || (exr_uses_rs2 && exr_rs2 == ex_rd));
      lu = exr_valid && br_load && br_rd != 0 &&
           ((exr_uses_rs1 && exr_rs1 == br_rd) || (exr_uses_rs2 && exr_rs2 == br_rd));
      wd = mem_store && br_load;
      ch = id_csr_read && csr_w_inflight;
      // expected {pc_hold, io, id, exr, ex, br, mem/wb} holds and {io..mem} flushes
      eh = '0; ef = '0;
      if (md_wait || mmio_stall) begin eh = 7'b1111111; seen[0]++; end
      else if (redirect)   begin ef = {5'b11111, kill_br}; seen[1]++; end
      else if (wd)         begin eh = 7'b1111110; ef = 6'b000001; seen[2]++; end
      else if (eu || lu)   begin eh = 7'b1111000; ef = 6'b000100; seen[3]++; end
      else if (ch)         begin eh = 7'b1110000; ef = 6'b001000; seen[4]++; end
      else if (b_est)      begin ef = 6'b100000; seen[5]++; end
      checks++;
      if (exec_use !== eu || load_use !== lu || write_done !== wd || csr_hazard !== ch ||
          freeze !== (md_wait || mmio_stall) ||
          {pc_hold, hold_io, hold_id, hold_exr, hold_ex, hold_br, hold_mem} !== eh || hold_wb !== eh[0] ||
          {flush_io, flush_id, flush_exr, flush_ex, flush_br, flush_mem} !== ef) begin
        failures++;
        $display("FAIL: holds %b%b%b%b%b%b%b expected %b, flushes %b%b%b%b%b%b expected %b", pc_hold, hold_io,
                 hold_id, hold_exr, hold_ex, hold_br, hold_mem, eh, flush_io, flush_id, flush_exr, flush_ex,
                 flush_br, flush_mem, ef);
      end
    end
    foreach (seen[i]) begin
      checks++; if (seen[i] == 0) begin failures++; $display("FAIL: case %0d never hit", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
