// forward_unit: resolves the two source operands of the instruction in the
// EXR stage from the newest in-flight producer.
//
// Sources, newest first: the BR stage (registered ALU result, or the CSR
// value, LUI immediate or PC+4 it will write), the MEM stage (including load
// data just read from the data BRAM) and the WB stage. A value written back
// earlier than that is read from the register file in ID, which passes a
// same-cycle write straight through, so no retire source is needed (the
// paper removes it as one of its timing optimisations). A source matches when it is
// valid, writes a register and its rd equals the operand's rs (x0 never
// matches); if none matches the register-file value read in ID is used.
// Each operand's select is one-hot and the value is an AND-OR of the
// candidates, a single wide-OR level instead of a cascaded multiplexer.
// Producers still in EX, and loads still in BR, have no value yet: the hazard
// unit stalls for those. Combinational. The source set, the one-hot form and
// the retire source follow the paper; the priority logic is this design's.
module forward_unit #(
  parameter int unsigned XLEN = 64
) (
  input  logic [4:0]      rs1,
  input  logic [4:0]      rs2,
  input  logic [XLEN-1:0] rf_rs1,
  input  logic [XLEN-1:0] rf_rs2,
  // per source: {wb, mem, br}
  input  logic [2:0]      src_we,       // valid && reg_write
  input  logic [2:0][4:0] src_rd,
  input  logic [2:0][XLEN-1:0] src_data,
  output logic [3:0]      sel_a,        // one-hot {wb, mem, br, regfile}
  output logic [3:0]      sel_b,
  output logic [XLEN-1:0] fw_a,
  output logic [XLEN-1:0] fw_b
);
  function automatic logic [3:0] pick(input logic [4:0] rs, input logic [2:0] we,
                                      input logic [2:0][4:0] rd);
    logic [3:0] s;
    s = 4'b0001;
    if (rs != 5'd0) begin
      for (int i = 2; i >= 0; i--)           // oldest first, newest overrides
        if (we[i] && rd[i] == rs) s = 4'b0010 << i;
    end
    return s;
  endfunction

  function automatic logic [XLEN-1:0] andor(input logic [3:0] s, input logic [XLEN-1:0] rf,
                                            input logic [2:0][XLEN-1:0] d);
    logic [XLEN-1:0] v;
    v = {XLEN{s[0]}} & rf;
    for (int i = 0; i < 3; i++) v |= {XLEN{s[i+1]}} & d[i];
    return v;
  endfunction

  assign sel_a = pick(rs1, src_we, src_rd);
  assign sel_b = pick(rs2, src_we, src_rd);
  assign fw_a  = andor(sel_a, rf_rs1, src_data);
  assign fw_b  = andor(sel_b, rf_rs2, src_data);
endmodule
