// instr_mem: instruction memory, a synchronous-read block RAM of 32-bit words.
//
// The address (a byte address; bits [1:0] are ignored) is presented in the IF
// stage and the word appears on rdata one clock later, in the IO stage. When
// en is low the output register holds, so a stalled IO stage keeps its
// instruction. A separate write port (prog_we/prog_addr/prog_data) loads the
// program before the core runs. The synchronous read and the extra IO stage
// that absorbs its latency follow the paper; the depth (64 KiB) and the load
// port are this design's choices, as the paper gives neither.
//
// Lint note: addr[1:0] are ignored: instructions are 32-bit words and always aligned.
module instr_mem #(
  parameter int unsigned DEPTH_WORDS = 16384,
  parameter int unsigned AW          = $clog2(DEPTH_WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic [AW+1:0] addr,
  output logic [31:0]   rdata,
  input  logic          prog_we,
  input  logic [AW-1:0] prog_addr,
  input  logic [31:0]   prog_data
);
  logic [31:0] mem [DEPTH_WORDS];

  always_ff @(posedge clk) begin
    if (prog_we) mem[prog_addr] <= prog_data;
  end

  always_ff @(posedge clk) begin
    if (en) rdata <= mem[addr[AW+1:2]];
  end
endmodule
