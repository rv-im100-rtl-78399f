// data_mem: data memory, a single-port synchronous block RAM of 64-bit words
// with a byte write mask.
//
// On a rising edge with en high: if any write_mask bit is set, the masked
// bytes of wdata are written at addr; otherwise the word at addr is read and
// appears on rdata after the edge. When en is low rdata holds. The core
// presents a load's address in the BR stage (the registered ALU result), so
// the word is ready in MEM; a store writes from MEM, and a load in BR behind a
// store in MEM waits one cycle for the port (the write_done stall). The
// synchronous BRAM and the early address are the paper's; the depth (64 KiB)
// and the single shared port are this design's choices.
module data_mem #(
  parameter int unsigned DEPTH_WORDS = 8192,
  parameter int unsigned AW          = $clog2(DEPTH_WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic [AW-1:0] addr,        // doubleword index
  input  logic [7:0]    write_mask,
  input  logic [63:0]   wdata,
  output logic [63:0]   rdata
);
  logic [63:0] mem [DEPTH_WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (|write_mask) begin
        for (int i = 0; i < 8; i++)
          if (write_mask[i]) mem[addr][8*i +: 8] <= wdata[8*i +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
