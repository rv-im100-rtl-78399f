// trap_controller: turns an exception or MRET in the BR stage into a PC
// redirect and the CSR updates of trap entry.
//
// Combinational. On an exception: trapped = 1, t_target = mtvec, and the CSR
// trap port is driven with mepc = BR PC, mcause = cause and mtval. On MRET:
// trapped = 1 and t_target = mepc; the CSR file restores mstatus.MIE.
// "trapped" makes the hazard unit flush every instruction younger than the
// BR stage, and for an exception the BR instruction itself. Only machine mode
// and synchronous exceptions exist; the paper names the trap controller and
// its signals (Trap_Status, T_Target, CSR_T.Addr, CSR_T.WD, CSR_WE) but not
// its behaviour, which is taken from the RISC-V privileged specification.
module trap_controller #(
  parameter int unsigned XLEN = 64
) (
  input  logic            exception,
  input  logic [3:0]      cause,
  input  logic [XLEN-1:0] tval,
  input  logic            mret,
  input  logic [XLEN-1:0] br_pc,
  input  logic [XLEN-1:0] mtvec,
  input  logic [XLEN-1:0] mepc,
  output logic            trapped,
  output logic            kill_br,     // the BR instruction must not retire
  output logic [XLEN-1:0] t_target,
  output logic            trap_we,
  output logic [XLEN-1:0] trap_mepc,
  output logic [XLEN-1:0] trap_mcause,
  output logic [XLEN-1:0] trap_mtval,
  output logic            mret_do
);
  assign trapped     = exception || mret;
  assign kill_br     = exception;
  assign t_target    = exception ? mtvec : mepc;
  assign trap_we     = exception;
  assign trap_mepc   = br_pc;
  assign trap_mcause = XLEN'(cause);
  assign trap_mtval  = tval;
  assign mret_do     = mret && !exception;
endmodule
