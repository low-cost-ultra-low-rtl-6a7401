// spi_master: sends one 24-bit frame to a DAC81416 over its serial interface.
//
// The converter takes a frame MSB first while its chip select (SYNC) is low;
// it samples SDIN on the falling edge of SCLK, so this master changes SDIN on
// each rising edge (clock idle low). In asynchronous update mode, which the
// module uses, the addressed output register takes the new value when chip
// select returns high.
//
// Timing, in clock cycles with H = SCLK_HALF: a frame is accepted with
// valid_i && ready_o; chip select falls on the next edge; the first SCLK
// rising edge follows H cycles later; 24 SCLK periods of 2H cycles follow;
// chip select rises H cycles after the last falling edge and stays high at
// least CS_HIGH cycles, after which done_o pulses and ready_o is high again.
// Chip select is low for 49*H cycles, and a frame occupies
// (2*24+1)*H + CS_HIGH + 1 cycles from acceptance to the next acceptance
// (52 cycles with the defaults). With the 10 MHz logic clock and
// H = 1, SCLK runs at 5 MHz, well below the converter's 50 MHz limit.
// The frame format and the 4-wire link follow the converter; the clock rate
// and the chip-select margins are this design's choice. The converter's data
// output is not read: the module does not read back DAC registers.
module spi_master
  import vanguard_pkg::*;
#(
  parameter int unsigned SCLK_HALF = 1,  // clock cycles per SCLK half period
  parameter int unsigned CS_HIGH   = 2   // minimum chip-select high time, cycles
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [FRAME_W-1:0] frame_i,
  input  logic               valid_i,
  output logic               ready_o,
  output logic               done_o,     // one-cycle pulse when chip select has risen and the gap is over
  output logic               sclk_o,
  output logic               sdi_o,
  output logic               cs_no
);
  localparam int unsigned TW = $clog2((SCLK_HALF > CS_HIGH ? SCLK_HALF : CS_HIGH) + 1);

  typedef enum logic [1:0] {IDLE, SHIFT, HOLD, GAP} state_e;

  state_e             state_q;
  logic [TW-1:0]      tmr_q;
  logic [4:0]         bits_q;     // falling edges still to come
  logic [FRAME_W-1:0] shift_q;

  assign ready_o = (state_q == IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      tmr_q   <= '0;
      bits_q  <= '0;
      shift_q <= '0;
      sclk_o  <= 1'b0;
      sdi_o   <= 1'b0;
      cs_no   <= 1'b1;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        IDLE: if (valid_i) begin
          shift_q <= frame_i;
          bits_q  <= 5'(FRAME_W);
          tmr_q   <= '0;
          cs_no   <= 1'b0;
          state_q <= SHIFT;
        end
        SHIFT: begin
          if (tmr_q == TW'(SCLK_HALF - 1)) begin
            tmr_q <= '0;
            if (!sclk_o) begin
              sclk_o  <= 1'b1;
              sdi_o   <= shift_q[FRAME_W-1];
              shift_q <= {shift_q[FRAME_W-2:0], 1'b0};
            end else begin
              sclk_o <= 1'b0;
              bits_q <= bits_q - 1'b1;
              if (bits_q == 5'd1) state_q <= HOLD;
            end
          end else begin
            tmr_q <= tmr_q + 1'b1;
          end
        end
        HOLD: begin
          if (tmr_q == TW'(SCLK_HALF - 1)) begin
            tmr_q   <= '0;
            cs_no   <= 1'b1;
            sdi_o   <= 1'b0;
            state_q <= GAP;
          end else begin
            tmr_q <= tmr_q + 1'b1;
          end
        end
        GAP: begin
          if (tmr_q == TW'(CS_HIGH - 1)) begin
            tmr_q   <= '0;
            done_o  <= 1'b1;
            state_q <= IDLE;
          end else begin
            tmr_q <= tmr_q + 1'b1;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // SCLK only toggles while chip select is low
  a_sclk_cs: assert property (@(posedge clk_i) disable iff (!rst_ni) sclk_o |-> !cs_no);
`endif

endmodule
