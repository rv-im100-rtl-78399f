// tb_csr_file: checks the machine-mode CSR file against a scoreboard with
// random CSR writes, trap entries, MRETs and retire pulses. Reads are
// combinational; writes take effect on the next enabled clock (one-cycle
// latency). A trap write beats MRET, which beats a CSR instruction write;
// mtvec/mepc drop the two low bits; mstatus keeps MIE/MPIE and reads MPP =
// 11; misa reads RV64 I+M; mcycle counts enabled clocks and minstret counts
// retire pulses; unimplemented addresses read zero.
// The CSR set and reset values checked are this design's choices; the paper names only the block and its ports.
module tb_csr_file;
  logic clk = 0, rst = 1, ce = 1;
  logic [11:0] csr_ra, csr_wa;
  logic [63:0] csr_rd, csr_wd, trap_mepc, trap_mcause, trap_mtval, mtvec, mepc;
  logic csr_we = 0, trap_we = 0, mret = 0, instr_retired = 0;
  logic [63:0] s_mtvec, s_mepc, s_mcause, s_mtval, s_mscratch, s_mie, s_cycle, s_inst;
  logic s_mie_b, s_mpie_b;
  logic [11:0] addrs [12] = '{12'h300, 12'h301, 12'h304, 12'h305, 12'h340, 12'h341, 12'h342,
                              12'h343, 12'hB00, 12'hB02, 12'hF14, 12'h7C0};
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  csr_file #(.XLEN(64)) dut (.*);

  function automatic logic [63:0] exp_rd(logic [11:0] a);
    case (a)
      12'h300: return {51'b0, 2'b11, 3'b0, s_mpie_b, 3'b0, s_mie_b, 3'b0};
      12'h301: return 64'h8000_0000_0000_1100;
      12'h304: return s_mie;   12'h305: return s_mtvec;
      12'h340: return s_mscratch; 12'h341: return s_mepc;
      12'h342: return s_mcause; 12'h343: return s_mtval;
      12'hB00: return s_cycle; 12'hB02: return s_inst;
      default: return '0;
    endcase
  endfunction

  initial begin : watchdog
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    csr_ra = 0; csr_wa = 0; csr_wd = 0; trap_mepc = 0; trap_mcause = 0; trap_mtval = 0;
    @(posedge clk); @(negedge clk); rst = 0;
    {s_mtvec, s_mepc, s_mcause, s_mtval, s_mscratch, s_mie, s_cycle, s_inst} = '0;
    s_mie_b = 0; s_mpie_b = 0;
    for (int i = 0; i < 3000; i++) begin
      csr_ra = addrs[$urandom_range(0, 11)];
      csr_we = $urandom_range(0, 2) == 0; csr_wa = addrs[$urandom_range(0, 9)]; csr_wd = {$urandom, $urandom};
      trap_we = $urandom_range(0, 7) == 0; mret = $urandom_range(0, 7) == 0;
      trap_mepc = {$urandom, $urandom}; trap_mcause = $urandom_range(0, 11); trap_mtval = {$urandom, $urandom};
      instr_retired = $urandom_range(0, 1); ce = $urandom_range(0, 7) != 0;
      #1;
      checks++;
      if (csr_rd !== exp_rd(csr_ra) || mtvec !== s_mtvec || mepc !== s_mepc) begin
        failures++; $display("FAIL: csr %h read %h expected %h", csr_ra, csr_rd, exp_rd(csr_ra));
      end
      @(posedge clk);
      if (ce) begin
        s_cycle++;
        if (instr_retired) s_inst++;
        if (trap_we) begin
          s_mepc = trap_mepc & ~64'd3; s_mcause = trap_mcause; s_mtval = trap_mtval;
          s_mpie_b = s_mie_b; s_mie_b = 0;
        end else if (mret) begin
          s_mie_b = s_mpie_b; s_mpie_b = 1;
        end else if (csr_we) begin
          case (csr_wa)
            12'h300: begin s_mie_b = csr_wd[3]; s_mpie_b = csr_wd[7]; end
            12'h304: s_mie = csr_wd;
            12'h305: s_mtvec = csr_wd & ~64'd3;
            12'h340: s_mscratch = csr_wd;
            12'h341: s_mepc = csr_wd & ~64'd3;
            12'h342: s_mcause = csr_wd;
            12'h343: s_mtval = csr_wd;
            12'hB00: s_cycle = csr_wd;
            12'hB02: s_inst = csr_wd;
            default: ;
          endcase
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
