// uart_controller: the "unified UART controller" between the MMIO interface,
// the board's UP button and the UART transmitter.
//
// A byte request from the MMIO interface (mmio_tx_start/mmio_tx_data) is
// passed to the transmitter as tx_start/tx_data when the transmitter is idle,
// or kept in a one-byte holding register and sent as soon as it becomes idle.
// busy (to the core and MMIO interface) is high while the transmitter is busy,
// a byte is held or a request is arriving, so the core never overruns the
// holding register. The UP
// button is synchronised with two flip-flops and its rising edge gives a
// one-cycle benchmark_start pulse. The paper names the block and these
// signals only; the holding register and the synchroniser are this design's.
module uart_controller (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] mmio_tx_data,
  input  logic       mmio_tx_start,
  input  logic       btn_up,
  input  logic       tx_busy,
  output logic       tx_start,
  output logic [7:0] tx_data,
  output logic       busy,
  output logic       benchmark_start
);
  logic       pend;
  logic [7:0] pend_data;
  logic [2:0] btn_sync;

  always_ff @(posedge clk) begin
    if (rst) begin
      pend <= 1'b0; pend_data <= '0; tx_start <= 1'b0; tx_data <= '0;
      btn_sync <= '0; benchmark_start <= 1'b0;
    end else begin
      tx_start <= 1'b0;
      if (mmio_tx_start) begin
        pend      <= 1'b1;
        pend_data <= mmio_tx_data;
      end else if (pend && !tx_busy && !tx_start) begin
        tx_start <= 1'b1;
        tx_data  <= pend_data;
        pend     <= 1'b0;
      end
      btn_sync        <= {btn_sync[1:0], btn_up};
      benchmark_start <= btn_sync[1] && !btn_sync[2];
    end
  end

  assign busy = tx_busy || pend || tx_start || mmio_tx_start;
endmodule
