// uart_rx: receives 8N1 bytes from the host's USB-to-serial cable.
//
// The host computer sends the voltage code, the DAC index and the register
// address over a UART. The line idles high; a byte is a low start bit, eight
// data bits LSB first and a high stop bit, each CLKS_PER_BIT clock cycles
// long. The line passes a two-flop synchronizer. A falling edge starts a
// frame; the start bit is checked again at its middle (a shorter glitch is
// dropped), then each data bit and the stop bit are sampled at their middle.
// A byte whose stop bit is high is delivered as a one-cycle valid_o pulse
// with data_o, at the middle of the stop bit; one with a low stop bit is
// dropped, frame_err_o pulses and the receiver waits for the line to go high
// before it looks for the next start bit.
//
// The UART link follows the module description; the 8N1 format and the baud
// rate (115200 baud: 87 cycles of the 10 MHz clock) are this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 87
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       rx_i,         // serial line, idle high
  output logic [7:0] data_o,
  output logic       valid_o,      // one-cycle pulse: data_o holds a new byte
  output logic       frame_err_o   // one-cycle pulse: stop bit was low
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [2:0] {IDLE, START, DATA, STOP, WAIT_HIGH} state_e;

  state_e        state_q;
  logic [CW-1:0] cnt_q;
  logic [2:0]    bit_q;
  logic [7:0]    shift_q;
  logic [1:0]    sync_q;
  logic          rx;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sync_q <= 2'b11;
    else         sync_q <= {sync_q[0], rx_i};
  end
  assign rx = sync_q[1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= IDLE;
      cnt_q       <= '0;
      bit_q       <= '0;
      shift_q     <= '0;
      data_o      <= '0;
      valid_o     <= 1'b0;
      frame_err_o <= 1'b0;
    end else begin
      valid_o     <= 1'b0;
      frame_err_o <= 1'b0;
      unique case (state_q)
        IDLE: begin
          cnt_q <= '0;
          if (!rx) state_q <= START;
        end
        START: begin
          if (cnt_q == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt_q   <= '0;
            bit_q   <= '0;
            state_q <= rx ? IDLE : DATA;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        DATA: begin
          if (cnt_q == CW'(CLKS_PER_BIT - 1)) begin
            cnt_q   <= '0;
            shift_q <= {rx, shift_q[7:1]};
            bit_q   <= bit_q + 1'b1;
            if (bit_q == 3'd7) state_q <= STOP;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        STOP: begin
          if (cnt_q == CW'(CLKS_PER_BIT - 1)) begin
            cnt_q <= '0;
            if (rx) begin
              data_o  <= shift_q;
              valid_o <= 1'b1;
              state_q <= IDLE;
            end else begin
              frame_err_o <= 1'b1;
              state_q     <= WAIT_HIGH;
            end
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        WAIT_HIGH: if (rx) state_q <= IDLE;   // line must idle before the next start bit
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
