// uart_tx: 8N1 serial transmitter (one start bit, eight data bits LSB first,
// one stop bit, no parity).
//
// A one-cycle tx_start while idle latches tx_data and starts a frame; each
// bit lasts CLKS_PER_BIT clocks. tx_busy is high from the cycle after
// tx_start until the stop bit has been sent; tx idles high. A tx_start while
// busy is ignored. The paper only names the block and its signals; the frame
// format and the default rate (115200 baud from a 100 MHz clock) are this
// design's choices.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       tx_start,
  input  logic [7:0] tx_data,
  output logic       tx,
  output logic       tx_busy
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  logic [9:0]    frame;
  logic [3:0]    bit_idx;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx <= 1'b1; tx_busy <= 1'b0; frame <= '1; bit_idx <= '0; cnt <= '0;
    end else if (!tx_busy) begin
      tx <= 1'b1;
      if (tx_start) begin
        frame   <= {1'b1, tx_data, 1'b0};
        tx_busy <= 1'b1;
        bit_idx <= '0;
        cnt     <= '0;
        tx      <= 1'b0;          // start bit
      end
    end else begin
      if (cnt == CW'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bit_idx == 4'd9) begin
          tx_busy <= 1'b0;
          tx      <= 1'b1;
        end else begin
          bit_idx <= bit_idx + 4'd1;
          tx      <= frame[bit_idx + 4'd1];
        end
      end else begin
        cnt <= cnt + CW'(1);
      end
    end
  end
endmodule
