// program_counter: the fetch-stage program counter register and its PC+4 adder
// (the "Program Counter" and "PCplus4" boxes of the block diagrams).
//
// The register loads next_pc on every rising clock edge where the clock
// enable ce is high, and returns to RESET_PC on a synchronous active-high
// reset. The next PC itself (including holding the PC during a stall) is
// chosen by pc_controller; this block only stores it and adds 4. The PC+4 output
// is combinational from the register. The reset value and synchronous reset
// are this design's choice; the paper does not give them.
module program_counter #(
  parameter int unsigned     XLEN     = 64,
  parameter logic [XLEN-1:0] RESET_PC = '0
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ce,
  input  logic [XLEN-1:0] next_pc,
  output logic [XLEN-1:0] pc,
  output logic [XLEN-1:0] pc_plus4
);
  always_ff @(posedge clk) begin
    if (rst)     pc <= RESET_PC;
    else if (ce) pc <= next_pc;
  end

  assign pc_plus4 = pc + XLEN'(4);
endmodule
