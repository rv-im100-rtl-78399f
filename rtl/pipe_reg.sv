// pipe_reg: one pipeline register of the core (IF/IO, IO/ID, ID/EXR, EXR/EX,
// EX/BR, BR/MEM or MEM/WB), generic over the struct type it carries.
//
// On a rising edge with ce high: flush loads all zeros (a bubble: the valid
// bit and every control bit clear), otherwise hold keeps the content,
// otherwise d is captured. Synchronous active-high reset also loads zeros.
// Flush wins over hold, so a redirect can squash a stalled stage. The paper
// gives the stage names and that every register has clock enable, reset,
// stall and flush; the zero bubble encoding is this design's choice.
module pipe_reg #(
  parameter type T = logic [7:0]
) (
  input  logic clk,
  input  logic rst,
  input  logic ce,
  input  logic hold,
  input  logic flush,
  input  T     d,
  output T     q
);
  always_ff @(posedge clk) begin
    if (rst)          q <= '0;
    else if (ce) begin
      if (flush)      q <= '0;
      else if (!hold) q <= d;
    end
  end
endmodule
