// cmd_decoder: turns the host's byte stream into register writes and hands
// each one to the SPI controller of the DAC it names.
//
// A host command carries a 16-bit voltage code, the register address of the
// DAC channel and the DAC index (see vanguard_pkg for the four-byte layout).
// Bytes are collected in order; a first byte whose top nibble is not the
// frame marker is dropped, which lets the decoder find the frame start again
// after a lost byte, and a UART framing error restarts collection. When the
// fourth byte arrives the command is offered, with a valid/ready handshake,
// to the controller selected by the DAC index only. A command to be held for
// the trigger (preload bit set) is refused at once if that controller's
// trigger buffer is full. The decoder then queues one reply byte for the
// UART transmitter: ACK for a command taken, NAK for one refused.
//
// The host must wait for the reply before sending the next command; a byte
// that arrives while a command is still being offered is dropped.
// The routing by DAC index follows the module description; the byte layout,
// the replies and the flow control are this design's choice.
module cmd_decoder
  import vanguard_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // from the UART receiver
  input  logic [7:0]           rx_data_i,
  input  logic                 rx_valid_i,
  input  logic                 rx_err_i,
  // to the SPI controllers
  output host_cmd_t            cmd_o,
  output logic [DAC_COUNT-1:0] cmd_valid_o,
  input  logic [DAC_COUNT-1:0] cmd_ready_i,
  input  logic [DAC_COUNT-1:0] buf_full_i,
  // to the UART transmitter
  output logic [7:0]           tx_data_o,
  output logic                 tx_valid_o,
  input  logic                 tx_ready_i
);
  logic [1:0] idx_q;
  logic [1:0]        hdr_q;    // {preload, dac} of the header byte
  logic [ADDR_W-1:0] addr_q;
  logic [7:0]        hi_q;
  logic       pend_q;       // a complete command is being offered
  host_cmd_t  cmd_q;

  assign cmd_o = cmd_q;

  always_comb begin
    cmd_valid_o = '0;
    if (pend_q) cmd_valid_o[cmd_q.dac] = 1'b1;
  end

  // refused: preload command for a DAC whose trigger buffer is full
  logic refuse, accept;
  assign refuse = pend_q && cmd_q.preload && buf_full_i[cmd_q.dac];
  assign accept = pend_q && !refuse && cmd_ready_i[cmd_q.dac];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      idx_q      <= '0;
      hdr_q      <= '0;
      addr_q     <= '0;
      hi_q       <= '0;
      pend_q     <= 1'b0;
      cmd_q      <= '0;
      tx_data_o  <= '0;
      tx_valid_o <= 1'b0;
    end else begin
      if (tx_valid_o && tx_ready_i) tx_valid_o <= 1'b0;

      if (pend_q) begin
        if (refuse || accept) begin
          pend_q     <= 1'b0;
          tx_data_o  <= refuse ? NAK_BYTE : ACK_BYTE;
          tx_valid_o <= 1'b1;
        end
      end else if (rx_err_i) begin
        idx_q <= '0;
      end else if (rx_valid_i) begin
        unique case (idx_q)
          2'd0: if (rx_data_i[7:4] == HDR_MARK) begin
                  hdr_q <= rx_data_i[1:0];
                  idx_q <= 2'd1;
                end
          2'd1: begin addr_q <= rx_data_i[ADDR_W-1:0]; idx_q <= 2'd2; end
          2'd2: begin hi_q   <= rx_data_i; idx_q <= 2'd3; end
          default: begin
            idx_q  <= 2'd0;
            pend_q <= 1'b1;
            cmd_q  <= '{preload: hdr_q[1], dac: hdr_q[0],
                        wr: '{addr: addr_q, data: {hi_q, rx_data_i}}};
          end
        endcase
      end
    end
  end

`ifndef SYNTHESIS
  // a command is offered to at most one controller
  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(cmd_valid_o));
  // a queued reply is not replaced before the transmitter took it
  a_reply: assert property (@(posedge clk_i) disable iff (!rst_ni)
                            tx_valid_o && !tx_ready_i |=> tx_valid_o && $stable(tx_data_o));
`endif

endmodule
