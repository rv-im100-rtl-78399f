// csr_file: machine-mode control and status registers (Zicsr).
//
// Read port: combinational, addressed by the CSR field of the instruction in
// ID (csr_ra -> csr_rd). Write port: CSR instructions write in WB
// (csr_we/csr_wa/csr_wd). Trap port: the trap controller writes mepc, mcause
// and mtval and stacks mstatus.MIE into MPIE on trap entry (trap_we), and
// restores it on MRET (mret). A trap write wins over a CSR instruction write
// in the same cycle. mcycle counts every enabled clock, minstret every
// retiring instruction (instr_retired). Unimplemented CSR addresses read as
// zero and ignore writes.
// Implemented: mstatus (MIE, MPIE; MPP reads 11), misa (read-only), mie,
// mtvec (direct mode), mscratch, mepc, mcause, mtval, mip (reads 0), mcycle,
// minstret, cycle, instret, mhartid (0).
// The paper gives the CSR file and its port names (CSR_WA, CSR_RA, CSR_WE,
// CSR_WD, CSR_RD, Trapped, Instr_Retired); which CSRs exist and their reset
// values are this design's choices.
//
// Lint note: trap_mepc[1:0] are ignored because mepc is kept 4-byte aligned (no
// compressed instructions).
module csr_file #(
  parameter int unsigned XLEN = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ce,
  input  logic [11:0]     csr_ra,
  output logic [XLEN-1:0] csr_rd,
  input  logic            csr_we,
  input  logic [11:0]     csr_wa,
  input  logic [XLEN-1:0] csr_wd,
  input  logic            trap_we,
  input  logic [XLEN-1:0] trap_mepc,
  input  logic [XLEN-1:0] trap_mcause,
  input  logic [XLEN-1:0] trap_mtval,
  input  logic            mret,
  input  logic            instr_retired,
  output logic [XLEN-1:0] mtvec,
  output logic [XLEN-1:0] mepc
);
  import rv_pkg::*;

  logic            mie_bit, mpie_bit;
  logic [XLEN-1:0] mie_q, mscratch, mcause, mtval;
  logic [63:0]     mcycle, minstret;
  logic [XLEN-1:0] mstatus_v, misa_v;

  assign mstatus_v = XLEN'({51'b0, 2'b11, 3'b0, mpie_bit, 3'b0, mie_bit, 3'b0});
  // MXL (1 = 32-bit, 2 = 64-bit) in the top two bits; extensions I and M
  assign misa_v    = {(XLEN == 64) ? 2'b10 : 2'b01, {(XLEN-2){1'b0}}} | XLEN'(1 << 8) | XLEN'(1 << 12);

  always_comb begin
    unique case (csr_ra)
      CSR_MSTATUS:              csr_rd = mstatus_v;
      CSR_MISA:                 csr_rd = misa_v;
      CSR_MIE:                  csr_rd = mie_q;
      CSR_MTVEC:                csr_rd = mtvec;
      CSR_MSCRATCH:             csr_rd = mscratch;
      CSR_MEPC:                 csr_rd = mepc;
      CSR_MCAUSE:               csr_rd = mcause;
      CSR_MTVAL:                csr_rd = mtval;
      CSR_MCYCLE, CSR_CYCLE:    csr_rd = XLEN'(mcycle);
      CSR_MINSTRET, CSR_INSTRET: csr_rd = XLEN'(minstret);
      default:                  csr_rd = '0;   // mip, mhartid and unimplemented
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mie_bit <= 1'b0; mpie_bit <= 1'b0;
      mie_q <= '0; mtvec <= '0; mscratch <= '0; mepc <= '0;
      mcause <= '0; mtval <= '0; mcycle <= '0; minstret <= '0;
    end else if (ce) begin
      mcycle   <= mcycle + 64'd1;
      if (instr_retired) minstret <= minstret + 64'd1;
      if (trap_we) begin
        mepc     <= {trap_mepc[XLEN-1:2], 2'b00};
        mcause   <= trap_mcause;
        mtval    <= trap_mtval;
        mpie_bit <= mie_bit;
        mie_bit  <= 1'b0;
      end else if (mret) begin
        mie_bit  <= mpie_bit;
        mpie_bit <= 1'b1;
      end else if (csr_we) begin
        unique case (csr_wa)
          CSR_MSTATUS:  begin mie_bit <= csr_wd[3]; mpie_bit <= csr_wd[7]; end
          CSR_MIE:      mie_q    <= csr_wd;
          CSR_MTVEC:    mtvec    <= {csr_wd[XLEN-1:2], 2'b00};
          CSR_MSCRATCH: mscratch <= csr_wd;
          CSR_MEPC:     mepc     <= {csr_wd[XLEN-1:2], 2'b00};
          CSR_MCAUSE:   mcause   <= csr_wd;
          CSR_MTVAL:    mtval    <= csr_wd;
          CSR_MCYCLE:   mcycle   <= 64'(csr_wd);
          CSR_MINSTRET: minstret <= 64'(csr_wd);
          default: ;
        endcase
      end
    end
  end
endmodule
