// pc_controller: chooses the next fetch address of the 8-stage pipeline.
//
// Priority, highest first:
//   1. trap / MRET redirect from the trap controller (t_target),
//   2. a taken jump (JAL/JALR) resolved in the BR stage (j_target),
//   3. a branch misprediction found in the BR stage: the actual target
//      (btarget_actu) is the taken target or the fall-through PC+4,
//   4. a pipeline stall (pc_stall): the PC holds,
//   5. a predicted-taken branch in the IO stage (b_est, b_target),
//   6. sequential fetch, PC+4.
// Purely combinational. The input names follow the block diagram of the
// 8-stage core; the priority order is this design's choice (redirects from
// older instructions win over anything younger).
module pc_controller #(
  parameter int unsigned XLEN = 64
) (
  input  logic            trapped,      // trap entry or MRET in BR
  input  logic [XLEN-1:0] t_target,
  input  logic            br_jump,      // jump in BR stage
  input  logic [XLEN-1:0] j_target,
  input  logic            bp_miss,      // misprediction in BR stage
  input  logic [XLEN-1:0] btarget_actu,
  input  logic            pc_stall,
  input  logic            b_est,        // predicted taken in IO stage
  input  logic [XLEN-1:0] b_target,
  input  logic [XLEN-1:0] pc,
  output logic [XLEN-1:0] next_pc,
  output logic            redirect_br   // a BR-stage or trap redirect is taken
);
  always_comb begin
    redirect_br = 1'b1;
    if (trapped)       next_pc = t_target;
    else if (br_jump)  next_pc = j_target;
    else if (bp_miss)  next_pc = btarget_actu;
    else begin
      redirect_br = 1'b0;
      if (pc_stall)    next_pc = pc;
      else if (b_est)  next_pc = b_target;
      else             next_pc = pc + XLEN'(4);
    end
  end
endmodule
