// hazard_unit: stall and flush control of the 8-stage pipeline
// (IF, IO, ID, EXR, EX, BR, MEM, WB).
//
// Combinational. From highest priority:
//  * freeze: a multiply or divide in EX that has not finished (md_wait), or a
//    store to the UART in MEM while the UART is busy (mmio_stall). Every
//    register of the pipeline holds.
//  * BR-stage redirect (taken jump, branch misprediction, trap, MRET): the
//    five younger instructions (IF, IO, ID, EXR, EX) are flushed; for an
//    exception the BR instruction too.
//  * write_done: a load in BR behind a store in MEM waits one cycle for the
//    data BRAM port; IF..BR hold and a bubble enters MEM.
//  * execution-use / load-use: the EXR instruction needs a register that the
//    instruction in EX will write, or that a load in BR will write; IF..EXR
//    hold and a bubble enters EX. This is the one-cycle execution-use hazard
//    created by moving forwarding into EXR, plus the load-use case.
//  * CSR hazard: a CSR instruction or MRET in ID waits while an older
//    instruction that writes a CSR is still in EXR..WB (the CSR file is
//    written in WB and CSR values are not forwarded). IF..ID hold and a
//    bubble enters EXR.
//  * predicted-taken branch in IO: the instruction fetched behind it in IF is
//    squashed.
// hold_* keeps a pipeline register, flush_* loads a bubble into it; the
// register is named by the stage it feeds. The hazard classes are the
// paper's; their exact conditions and priorities are this design's.
module hazard_unit (
  input  logic       md_wait,
  input  logic       mmio_stall,
  input  logic       redirect,     // BR-stage jump/mispredict/trap/MRET
  input  logic       kill_br,      // exception: BR instruction squashed too
  input  logic       b_est,        // predicted-taken branch in IO
  // EXR consumer
  input  logic       exr_valid,
  input  logic [4:0] exr_rs1,
  input  logic [4:0] exr_rs2,
  input  logic       exr_uses_rs1,
  input  logic       exr_uses_rs2,
  // producers
  input  logic       ex_we,        // valid && reg_write
  input  logic [4:0] ex_rd,
  input  logic       br_load,      // valid && mem_read
  input  logic [4:0] br_rd,
  input  logic       mem_store,    // valid store in MEM (data memory)
  // CSR
  input  logic       id_csr_read,  // valid CSR instruction or MRET in ID
  input  logic       csr_w_inflight,
  // outputs
  output logic       freeze,
  output logic       pc_hold,
  output logic       hold_io, hold_id, hold_exr, hold_ex, hold_br, hold_mem, hold_wb,
  output logic       flush_io, flush_id, flush_exr, flush_ex, flush_br, flush_mem,
  output logic       exec_use, load_use, write_done, csr_hazard
);
  function automatic logic match(input logic [4:0] rd, input logic [4:0] rs, input logic use_rs);
    return use_rs && (rd != 5'd0) && (rd == rs);
  endfunction

  assign exec_use   = exr_valid && ex_we &&
                      (match(ex_rd, exr_rs1, exr_uses_rs1) || match(ex_rd, exr_rs2, exr_uses_rs2));
  assign load_use   = exr_valid && br_load &&
                      (match(br_rd, exr_rs1, exr_uses_rs1) || match(br_rd, exr_rs2, exr_uses_rs2));
  assign write_done = mem_store && br_load;
  assign csr_hazard = id_csr_read && csr_w_inflight;
  assign freeze     = md_wait || mmio_stall;

  always_comb begin
    pc_hold  = 1'b0;
    hold_io  = 1'b0; hold_id  = 1'b0; hold_exr = 1'b0; hold_ex = 1'b0; hold_br = 1'b0;
    hold_mem = 1'b0; hold_wb  = 1'b0;
    flush_io = 1'b0; flush_id = 1'b0; flush_exr = 1'b0; flush_ex = 1'b0; flush_br = 1'b0;
    flush_mem = 1'b0;
    if (freeze) begin
      pc_hold = 1'b1;
      hold_io = 1'b1; hold_id = 1'b1; hold_exr = 1'b1; hold_ex = 1'b1; hold_br = 1'b1;
      hold_mem = 1'b1; hold_wb = 1'b1;
    end else if (redirect) begin
      flush_io = 1'b1; flush_id = 1'b1; flush_exr = 1'b1; flush_ex = 1'b1; flush_br = 1'b1;
      flush_mem = kill_br;
    end else if (write_done) begin
      pc_hold = 1'b1;
      hold_io = 1'b1; hold_id = 1'b1; hold_exr = 1'b1; hold_ex = 1'b1; hold_br = 1'b1;
      flush_mem = 1'b1;
    end else if (exec_use || load_use) begin
      pc_hold = 1'b1;
      hold_io = 1'b1; hold_id = 1'b1; hold_exr = 1'b1;
      flush_ex = 1'b1;
    end else if (csr_hazard) begin
      pc_hold = 1'b1;
      hold_io = 1'b1; hold_id = 1'b1;
      flush_exr = 1'b1;
    end else if (b_est) begin
      flush_io = 1'b1;
    end
  end
endmodule
