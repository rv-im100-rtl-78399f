// rv_im100_soc: the RV-IM100 system on chip around the 8-stage RV64IM core.
//
// It connects the core to a 64 KiB instruction BRAM (32-bit words) and a
// 64 KiB data BRAM (64-bit words, byte writes), the MMIO interface, the
// unified UART controller and the UART transmitter, and drives eight LEDs with
// the opcode of the instruction in WB (LEDs 6..0) and the inverted CPU clock
// enable (LED 7). The CPU reset button is active low and is synchronised to
// the clock; the core runs on cycles where cpu_clk_enable is high. A program
// is loaded through prog_we/prog_dmem/prog_addr/prog_data, one 32-bit word
// per clock, while the core is held in reset: prog_dmem = 0 writes the
// instruction BRAM word prog_addr, prog_dmem = 1 writes the data BRAM at byte
// address 4 * prog_addr (initialised data and constants). The PLL that
// makes the clock is not part of this RTL: clk is its output. Block set and
// connections follow the paper's SoC diagram; the memory sizes, the load
// port, the LED assignment and the reset polarity are this design's choices.
module rv_im100_soc #(
  parameter int unsigned IMEM_WORDS   = 16384,
  parameter int unsigned DMEM_WORDS   = 8192,
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic        clk,
  input  logic        cpu_reset_n,
  input  logic        cpu_clk_enable,
  input  logic        btn_up,
  output logic        uart_txd,
  output logic [7:0]  leds,
  output logic        benchmark_start,
  input  logic        prog_we,
  input  logic        prog_dmem,
  input  logic [$clog2(IMEM_WORDS)-1:0] prog_addr,
  input  logic [31:0] prog_data
);
  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);

  logic [1:0] rst_sync;
  logic       rst;
  always_ff @(posedge clk) rst_sync <= {rst_sync[0], !cpu_reset_n};
  assign rst = rst_sync[1];

  logic [IAW+1:0] imem_addr;
  logic           imem_en;
  logic [31:0]    imem_rdata;
  logic           dmem_en;
  logic [DAW-1:0] dmem_addr;
  logic [7:0]     dmem_wmask;
  logic [63:0]    dmem_wdata, dmem_rdata;
  logic           mmio_we;
  logic [63:0]    mmio_addr, mmio_wd;
  logic           uart_busy, tx_busy, tx_start, mmio_tx_start;
  logic [7:0]     tx_data, mmio_tx_data;
  logic [6:0]     current_opcode;

  rv64im_core #(.XLEN(64), .IMEM_AW(IAW), .DMEM_AW(DAW)) u_core (
    .clk, .rst, .ce(cpu_clk_enable),
    .imem_addr, .imem_en, .imem_rdata,
    .dmem_en, .dmem_addr, .dmem_wmask, .dmem_wdata, .dmem_rdata,
    .mmio_we, .mmio_addr, .mmio_wd, .uart_busy, .current_opcode);

  instr_mem #(.DEPTH_WORDS(IMEM_WORDS)) u_imem (
    .clk, .en(imem_en && cpu_clk_enable), .addr(imem_addr), .rdata(imem_rdata),
    .prog_we(prog_we && !prog_dmem), .prog_addr, .prog_data);

  // data BRAM port: the core, or the program loader while it writes
  logic           dm_load;
  logic           dm_en;
  logic [DAW-1:0] dm_addr;
  logic [7:0]     dm_mask;
  logic [63:0]    dm_wdata;
  assign dm_load  = prog_we && prog_dmem;
  assign dm_en    = dm_load || (dmem_en && cpu_clk_enable);
  assign dm_addr  = dm_load ? DAW'(prog_addr >> 1) : dmem_addr;
  assign dm_mask  = dm_load ? (prog_addr[0] ? 8'hF0 : 8'h0F) : dmem_wmask;
  assign dm_wdata = dm_load ? {prog_data, prog_data} : dmem_wdata;

  data_mem #(.DEPTH_WORDS(DMEM_WORDS)) u_dmem (
    .clk, .en(dm_en), .addr(dm_addr), .write_mask(dm_mask),
    .wdata(dm_wdata), .rdata(dmem_rdata));

  mmio_interface #(.XLEN(64)) u_mmio (
    .clk, .rst, .ce(cpu_clk_enable), .mmio_dm_we(mmio_we), .mmio_dm_address(mmio_addr),
    .mmio_dm_wd(mmio_wd), .uart_busy, .mmio_tx_data, .mmio_tx_start);

  uart_controller u_uctl (
    .clk, .rst, .mmio_tx_data, .mmio_tx_start, .btn_up, .tx_busy,
    .tx_start, .tx_data, .busy(uart_busy), .benchmark_start);

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst, .tx_start, .tx_data, .tx(uart_txd), .tx_busy);

  assign leds = {!cpu_clk_enable, current_opcode};
endmodule
