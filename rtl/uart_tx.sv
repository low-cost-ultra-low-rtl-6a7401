// uart_tx: sends 8N1 bytes back to the host.
//
// The FPGA side of the host link is a UART receiver/transmitter pair. The
// transmitter answers each host command with one status byte (see
// vanguard_pkg). A byte is accepted with valid_i && ready_o; the line then
// carries a low start bit, eight data bits LSB first and a high stop bit,
// each CLKS_PER_BIT cycles long, so one byte takes 10*CLKS_PER_BIT cycles
// and ready_o returns high the cycle after the stop bit ends.
// The transmitter is named by the module description; what it sends, the
// 8N1 format and the baud rate are this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 87
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [7:0] data_i,
  input  logic       valid_i,
  output logic       ready_o,
  output logic       tx_o        // serial line, idle high
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [CW-1:0] cnt_q;
  logic [3:0]    bit_q;      // bits left to send, including start and stop
  logic [9:0]    shift_q;    // {stop, data, start}, sent LSB first

  assign ready_o = (bit_q == 4'd0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q   <= '0;
      bit_q   <= '0;
      shift_q <= '1;
      tx_o    <= 1'b1;
    end else if (bit_q == 4'd0) begin
      tx_o <= 1'b1;
      if (valid_i) begin
        shift_q <= {1'b1, data_i, 1'b0};
        bit_q   <= 4'd10;
        cnt_q   <= '0;
        tx_o    <= 1'b0;   // start bit goes out on the next cycle
      end
    end else if (cnt_q == CW'(CLKS_PER_BIT - 1)) begin
      cnt_q   <= '0;
      bit_q   <= bit_q - 1'b1;
      shift_q <= {1'b1, shift_q[9:1]};
      tx_o    <= (bit_q == 4'd1) ? 1'b1 : shift_q[1];
    end else begin
      cnt_q <= cnt_q + 1'b1;
    end
  end

endmodule
