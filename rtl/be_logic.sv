// be_logic: byte-enable logic between the core and the 64-bit data memory.
//
// Stores: from funct3 (SB, SH, SW, SD) and address bits [2:0] it forms the
// 8-bit write mask and shifts the store data (rd2) into the addressed byte
// lanes (bedm_wd). Loads: from the memory word dm_rd it extracts the
// addressed byte, halfword, word or doubleword and sign-extends (LB, LH, LW)
// or zero-extends (LBU, LHU, LWU) it to 64 bits (berf_wd). Combinational.
// Misaligned accesses are trapped by the exception detector, so the lane
// arithmetic here assumes a naturally aligned address. Doubleword and LWU
// support are the paper's RV64 additions; signal names follow its diagram.
module be_logic (
  input  logic        mem_read,
  input  logic        mem_write,
  input  logic [2:0]  funct3,
  input  logic [2:0]  addr,
  input  logic [63:0] rd2,
  input  logic [63:0] dm_rd,
  output logic [63:0] bedm_wd,
  output logic [7:0]  write_mask,
  output logic [63:0] berf_wd
);
  logic [5:0]  sh;
  logic [63:0] word;
  assign sh   = {addr, 3'b000};
  assign word = dm_rd >> sh;

  always_comb begin
    bedm_wd    = rd2 << sh;
    write_mask = '0;
    if (mem_write) begin
      unique case (funct3[1:0])
        2'b00:   write_mask = 8'b0000_0001 << addr;
        2'b01:   write_mask = 8'b0000_0011 << addr;
        2'b10:   write_mask = 8'b0000_1111 << addr;
        default: write_mask = 8'b1111_1111;
      endcase
    end
  end

  always_comb begin
    berf_wd = '0;
    if (mem_read) begin
      unique case (funct3)
        3'b000:  berf_wd = {{56{word[7]}},  word[7:0]};
        3'b001:  berf_wd = {{48{word[15]}}, word[15:0]};
        3'b010:  berf_wd = {{32{word[31]}}, word[31:0]};
        3'b100:  berf_wd = {56'b0, word[7:0]};
        3'b101:  berf_wd = {48'b0, word[15:0]};
        3'b110:  berf_wd = {32'b0, word[31:0]};
        default: berf_wd = word;
      endcase
    end
  end
endmodule
