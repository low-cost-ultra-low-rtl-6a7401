// dac_spi_ctrl: the SPI controller of one DAC81416 (SPI_0 or SPI_1).
//
// After reset it configures the converter with INIT_LEN register writes
// (vanguard_pkg::init_write): power the device up, enable the internal
// reference, power on all 16 channels and set every channel to +/-10 V. Then
// it takes register writes from the command decoder in two ways:
//   - immediate (preload = 0): sent to the converter at once; in the
//     converter's asynchronous mode the output follows when the frame ends;
//   - preloaded (preload = 1): stored in a cmd_fifo and sent, back to back
//     and in arrival order, when the external trigger pulses.
// Immediate writes are taken only when configuration is over, no triggered
// sequence is playing and the serial link is free (cmd_ready_o). Preloaded
// writes are taken whenever the buffer has room, except while a sequence is
// playing. A trigger that comes during configuration is remembered and
// served afterwards; one that comes while a sequence plays is ignored.
// Played back, consecutive writes leave the controller every
// FRAME + 1 cycles (53 cycles, 5.3 us at 10 MHz, with the default link
// timing); the first write's chip select falls 2 clock edges after the edge
// that samples the trigger pulse.
//
// The configuration contents and the trigger-started playback follow the
// module description; the order of the configuration writes, the trigger
// buffer and the arbitration between the two paths are this design's choice.
module dac_spi_ctrl
  import vanguard_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 1024,  // trigger buffer, writes
  parameter int unsigned SCLK_HALF = 1,
  parameter int unsigned CS_HIGH   = 2
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // commands from the decoder
  input  logic       cmd_valid_i,
  input  logic       cmd_preload_i,
  input  reg_write_t cmd_wr_i,
  output logic       cmd_ready_o,
  output logic       buf_full_o,
  // trigger pulse
  input  logic       trig_i,
  // status
  output logic       init_done_o,
  output logic       playing_o,
  // DAC serial interface
  output logic       sclk_o,
  output logic       sdi_o,
  output logic       cs_no
);
  localparam int unsigned WW = $bits(reg_write_t);
  localparam int unsigned IW = $clog2(INIT_LEN + 1);

  typedef enum logic [1:0] {INIT, READY, PLAY, PLAY_SEND} state_e;

  state_e        state_q;
  logic [IW-1:0] init_idx_q;
  logic          trig_pend_q;

  // serial engine
  logic [FRAME_W-1:0] spi_frame;
  logic               spi_valid, spi_ready;

  spi_master #(.SCLK_HALF(SCLK_HALF), .CS_HIGH(CS_HIGH)) u_spi (
    .clk_i, .rst_ni,
    .frame_i (spi_frame),
    .valid_i (spi_valid),
    .ready_o (spi_ready),
    .done_o  (),
    .sclk_o, .sdi_o, .cs_no
  );

  // trigger buffer
  logic             buf_push, buf_pop, buf_empty;
  logic [WW-1:0]    buf_rdata;

  cmd_fifo #(.WIDTH(WW), .DEPTH(BUF_DEPTH)) u_buf (
    .clk_i, .rst_ni,
    .push_i  (buf_push),
    .wdata_i (cmd_wr_i),
    .pop_i   (buf_pop),
    .rdata_o (buf_rdata),
    .full_o  (buf_full_o),
    .empty_o (buf_empty),
    .count_o ()
  );

  // command acceptance
  logic imm_ok, pre_ok;
  assign imm_ok = (state_q == READY) && spi_ready;
  assign pre_ok = (state_q == INIT || state_q == READY) && !buf_full_o;

  assign cmd_ready_o = cmd_preload_i ? pre_ok : imm_ok;
  assign buf_push    = cmd_valid_i && cmd_preload_i && pre_ok;
  assign buf_pop     = (state_q == PLAY) && !buf_empty && spi_ready;

  // what goes to the serial engine
  always_comb begin
    spi_valid = 1'b0;
    spi_frame = write_frame(cmd_wr_i);
    unique case (state_q)
      INIT: begin
        spi_valid = (init_idx_q < IW'(INIT_LEN));
        spi_frame = write_frame(init_write(int'(init_idx_q)));
      end
      READY: spi_valid = cmd_valid_i && !cmd_preload_i;
      PLAY_SEND: begin
        spi_valid = 1'b1;
        spi_frame = write_frame(reg_write_t'(buf_rdata));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= INIT;
      init_idx_q  <= '0;
      trig_pend_q <= 1'b0;
    end else begin
      unique case (state_q)
        INIT: begin
          if (trig_i) trig_pend_q <= 1'b1;
          if (spi_valid && spi_ready) init_idx_q <= init_idx_q + 1'b1;
          if (init_idx_q == IW'(INIT_LEN) && spi_ready) state_q <= READY;
        end
        READY: begin
          // a trigger wins over an immediate write offered in the same cycle
          if ((trig_i || trig_pend_q) && !(spi_valid && spi_ready)) begin
            trig_pend_q <= 1'b0;
            state_q     <= PLAY;
          end else if (trig_i) begin
            trig_pend_q <= 1'b1;
          end
        end
        PLAY: begin
          if (buf_pop)                     state_q <= PLAY_SEND;
          else if (buf_empty && spi_ready) state_q <= READY;
        end
        PLAY_SEND: if (spi_ready) state_q <= PLAY;
        default: state_q <= READY;
      endcase
    end
  end

  assign init_done_o = (state_q != INIT);
  assign playing_o   = (state_q == PLAY) || (state_q == PLAY_SEND);

`ifndef SYNTHESIS
  a_no_imm_in_play: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                     playing_o |-> !(cmd_valid_i && !cmd_preload_i && cmd_ready_o));
  a_frame_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 spi_valid && !spi_ready && state_q != READY |=> spi_valid);
`endif

endmodule
