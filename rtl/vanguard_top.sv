// vanguard_top: control logic of the two-DAC ion-trap electrode module.
//
// The module sets 32 DC electrode voltages with two 16-channel, 16-bit
// DAC81416 converters. A host computer defines the voltages and sends them,
// as register writes, over a USB-to-serial cable; the FPGA forwards each
// write to the converter it names, either at once or, for timed sequences,
// after storing it until an edge on the external trigger pin. The chain is:
//
//   clk_50m_i -> clk_rst_gen -> 10 MHz logic clock and reset
//   uart_rx_i -> uart_rx -> cmd_decoder -+-> dac_spi_ctrl (SPI_0) -> DAC_0 pins
//                              |         +-> dac_spi_ctrl (SPI_1) -> DAC_1 pins
//   uart_tx_o <- uart_tx <-----+ (one reply byte per command)
//   trig_i    -> trigger_sync -> both SPI controllers
//
// After reset both controllers configure their converter (seven writes each,
// about 36 us); writes sent before that wait. The blocks and their
// connections follow the module's control diagram; the host protocol, the
// baud rate, the trigger buffer and the reset input are this design's choice
// (see the files of the blocks). The converters' data outputs are not used.
module vanguard_top
  import vanguard_pkg::*;
#(
  parameter int unsigned CLK_DIV      = 5,     // 50 MHz -> 10 MHz
  parameter int unsigned CLKS_PER_BIT = 87,    // 115200 baud at 10 MHz
  parameter int unsigned BUF_DEPTH    = 1024,  // trigger buffer per DAC, writes
  parameter int unsigned SCLK_HALF    = 1,     // SCLK = 10 MHz / (2*SCLK_HALF)
  parameter int unsigned CS_HIGH      = 2
) (
  input  logic                 clk_50m_i,   // board oscillator
  input  logic                 rst_ni,      // board reset, active low
  input  logic                 uart_rx_i,   // from the host
  output logic                 uart_tx_o,   // to the host
  input  logic                 trig_i,      // external trigger pin
  output logic [DAC_COUNT-1:0] dac_sclk_o,
  output logic [DAC_COUNT-1:0] dac_sdi_o,
  output logic [DAC_COUNT-1:0] dac_cs_no
);
  logic clk, rst_n;

  clk_rst_gen #(.DIV(CLK_DIV)) u_clk (
    .clk_i (clk_50m_i), .rst_ni,
    .clk_o (clk), .rst_no (rst_n)
  );

  // host link
  logic [7:0] rx_data, tx_data;
  logic       rx_valid, rx_err, tx_valid, tx_ready;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk_i (clk), .rst_ni (rst_n),
    .rx_i (uart_rx_i), .data_o (rx_data), .valid_o (rx_valid), .frame_err_o (rx_err)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk_i (clk), .rst_ni (rst_n),
    .data_i (tx_data), .valid_i (tx_valid), .ready_o (tx_ready), .tx_o (uart_tx_o)
  );

  // command routing
  host_cmd_t            cmd;
  logic [DAC_COUNT-1:0] cmd_valid, cmd_ready, buf_full;

  cmd_decoder u_dec (
    .clk_i (clk), .rst_ni (rst_n),
    .rx_data_i (rx_data), .rx_valid_i (rx_valid), .rx_err_i (rx_err),
    .cmd_o (cmd), .cmd_valid_o (cmd_valid), .cmd_ready_i (cmd_ready), .buf_full_i (buf_full),
    .tx_data_o (tx_data), .tx_valid_o (tx_valid), .tx_ready_i (tx_ready)
  );

  // external trigger
  logic trig;

  trigger_sync u_trig (
    .clk_i (clk), .rst_ni (rst_n), .trig_pin_i (trig_i), .trig_o (trig)
  );

  // one SPI controller per converter
  logic [DAC_COUNT-1:0] init_done, playing;

  for (genvar d = 0; d < DAC_COUNT; d++) begin : g_dac
    dac_spi_ctrl #(.BUF_DEPTH(BUF_DEPTH), .SCLK_HALF(SCLK_HALF), .CS_HIGH(CS_HIGH)) u_ctrl (
      .clk_i (clk), .rst_ni (rst_n),
      .cmd_valid_i   (cmd_valid[d]),
      .cmd_preload_i (cmd.preload),
      .cmd_wr_i      (cmd.wr),
      .cmd_ready_o   (cmd_ready[d]),
      .buf_full_o    (buf_full[d]),
      .trig_i        (trig),
      .init_done_o   (init_done[d]),
      .playing_o     (playing[d]),
      .sclk_o (dac_sclk_o[d]), .sdi_o (dac_sdi_o[d]), .cs_no (dac_cs_no[d])
    );
  end

endmodule
