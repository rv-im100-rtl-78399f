// mmio_interface: decodes the core's memory-mapped stores.
//
// A store (mmio_dm_we) to UART_ADDR sends the low byte of the store data to
// the UART: mmio_tx_data is registered and mmio_tx_start pulses for one
// cycle. Stores to other MMIO addresses are ignored. The core itself holds a
// UART store in its MEM stage while uart_busy is high, so a request never
// arrives while the UART is busy; an assertion checks that. The block and
// its port names are the paper's (SoC diagram); the address (0x1000_0000) and
// the byte-wide data are this design's choices.
//
// Lint note: Only mmio_dm_wd[7:0] is used; the UART takes one byte per store.
module mmio_interface #(
  parameter int unsigned     XLEN      = 64,
  parameter logic [XLEN-1:0] UART_ADDR = XLEN'(64'h1000_0000)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ce,
  input  logic            mmio_dm_we,
  input  logic [XLEN-1:0] mmio_dm_address,
  input  logic [XLEN-1:0] mmio_dm_wd,
  input  logic            uart_busy,
  output logic [7:0]      mmio_tx_data,
  output logic            mmio_tx_start
);
  logic hit;
  assign hit = ce && mmio_dm_we && (mmio_dm_address == UART_ADDR);

  always_ff @(posedge clk) begin
    if (rst) begin
      mmio_tx_start <= 1'b0;
      mmio_tx_data  <= '0;
    end else begin
      mmio_tx_start <= hit;
      if (hit) mmio_tx_data <= mmio_dm_wd[7:0];
    end
  end

  assert property (@(posedge clk) disable iff (rst) hit |-> !uart_busy);
endmodule
