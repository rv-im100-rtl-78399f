// register_file: the 32 x XLEN integer register file, two read ports and one
// write port; x0 always reads zero.
//
// Reads are combinational (ID stage). The write happens on the rising edge in
// the WB stage; a read of the register being written in the same cycle
// returns the new value (write-through), so an instruction in ID sees a result
// that is in WB. Write-through and the reset to zero are this design's
// choices.
module register_file #(
  parameter int unsigned XLEN = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ce,
  input  logic [4:0]      ra1,
  input  logic [4:0]      ra2,
  output logic [XLEN-1:0] rd1,
  output logic [XLEN-1:0] rd2,
  input  logic            we,
  input  logic [4:0]      wa,
  input  logic [XLEN-1:0] wd
);
  logic [XLEN-1:0] regs [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (ce && we && wa != 5'd0) begin
      regs[wa] <= wd;
    end
  end

  always_comb begin
    if (ra1 == 5'd0)                 rd1 = '0;
    else if (we && ce && wa == ra1)  rd1 = wd;
    else                             rd1 = regs[ra1];
    if (ra2 == 5'd0)                 rd2 = '0;
    else if (we && ce && wa == ra2)  rd2 = wd;
    else                             rd2 = regs[ra2];
  end
endmodule
