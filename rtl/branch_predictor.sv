// branch_predictor: a single 2-bit saturating counter predictor.
//
// Prediction happens in the IO stage, where the instruction word first leaves
// the instruction BRAM: if the word is a conditional branch and the counter is
// in one of its two "taken" states (2'b10, 2'b11), b_est is raised and b_target
// = IO PC + B-type immediate. The counter is trained by every conditional
// branch that resolves in the BR stage (br_branch), counting up when it was
// taken and down when not, saturating at 0 and 3. Reset sets weakly not-taken
// (2'b01). The paper describes a 2-bit saturating counter with no branch
// history or target tables; that it is one counter shared by all branches,
// its reset state, and prediction in IO are this design's reading.
//
// Lint note: Bits 24:12 of io_instr are not needed: the predictor reads the opcode
// and the B-immediate fields only.
module branch_predictor #(
  parameter int unsigned XLEN = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ce,
  input  logic            io_valid,
  input  logic [XLEN-1:0] io_pc,
  input  logic [31:0]     io_instr,
  output logic            b_est,
  output logic [XLEN-1:0] b_target,
  input  logic            br_branch,   // a conditional branch resolves in BR
  input  logic            br_taken
);
  logic [1:0] counter;
  logic [XLEN-1:0] bimm;

  assign bimm = {{(XLEN-12){io_instr[31]}}, io_instr[7], io_instr[30:25], io_instr[11:8], 1'b0};
  assign b_est    = io_valid && (io_instr[6:0] == 7'b1100011) && counter[1];
  assign b_target = io_pc + bimm;

  always_ff @(posedge clk) begin
    if (rst) counter <= 2'b01;
    else if (ce && br_branch) begin
      if (br_taken && counter != 2'b11)       counter <= counter + 2'd1;
      else if (!br_taken && counter != 2'b00) counter <= counter - 2'd1;
    end
  end
endmodule
