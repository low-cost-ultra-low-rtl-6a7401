// dac81416_model: behavioural model of the serial interface and output
// registers of one DAC81416 16-channel, 16-bit converter. Not synthesizable;
// the converter is a bought part, and this model only serves the testbenches.
//
// While SYNC (cs_n) is low the model shifts SDIN in on each falling edge of
// SCLK. When SYNC rises after exactly 24 bits, a write frame (bit 23 = 0)
// stores bits 15:0 in the register at bits 21:16; in asynchronous mode that
// is also when a DAC data register reaches its output. A frame of any other
// non-zero length is counted in bad_frames and ignored. Reset values follow the
// converter's data sheet: device powered down (SPICONFIG 0x0AA4), internal
// reference off (GENCONFIG 0x7F00), all channels powered down (DACPWDWN
// 0xFFFF), range registers 0. vout_uv() gives a channel's output in
// microvolts when the device, the reference and the channel are on and the
// channel's range is +/-10 V, with the module's code mapping
// V = -10 V + 20 V * code / 65535; otherwise it returns VOUT_OFF.
module dac81416_model (
  input logic sclk,
  input logic sdi,
  input logic cs_n
);
  localparam int VOUT_OFF = 32'h7fff_ffff;

  logic [15:0] regs [64];
  logic [23:0] sh;
  int          nbits;
  int          writes;        // accepted write frames
  int          bad_frames;    // frames that were not 24 bits long
  int          sclk_at_cs_fall_high;  // SCLK was high when SYNC fell (wrong mode)
  logic [5:0]  last_addr;
  logic [15:0] last_data;
  time         last_write_t;

  initial begin
    foreach (regs[i]) regs[i] = 16'h0000;
    regs[6'h03] = 16'h0AA4;
    regs[6'h04] = 16'h7F00;
    regs[6'h09] = 16'hFFFF;
    nbits = 0; writes = 0; bad_frames = 0; sclk_at_cs_fall_high = 0;
    sh = '0; last_addr = '0; last_data = '0; last_write_t = 0;
  end

  always @(negedge cs_n) begin
    nbits = 0;
    if (sclk) sclk_at_cs_fall_high++;
  end

  always @(negedge sclk) if (!cs_n) begin
    sh = {sh[22:0], sdi};
    nbits++;
  end

  always @(posedge cs_n) begin
    if (nbits != 24 && nbits != 0) bad_frames++;   // a select pulse without clocks is harmless
    else if (nbits == 24 && !sh[23]) begin
      regs[sh[21:16]] = sh[15:0];
      last_addr = sh[21:16];
      last_data = sh[15:0];
      last_write_t = $time;
      writes++;
    end
  end

  function automatic int vout_uv(int ch);
    logic [3:0] rng;
    longint     v;
    rng = regs[6'h0A + ch / 4][4*(ch%4) +: 4];
    if (regs[6'h03][5] || regs[6'h04][14] || regs[6'h09][ch] || rng != 4'hA) return VOUT_OFF;
    v = -64'sd10_000_000 + (longint'(regs[6'h10 + ch]) * 64'sd20_000_000 + 64'sd32767) / 64'sd65535;
    return int'(v);
  endfunction

  function automatic logic [15:0] code(int ch);
    return regs[6'h10 + ch];
  endfunction

endmodule
