// tb_vanguard_top: end-to-end test of the module's control logic at its
// default parameters (10 MHz logic clock from 50 MHz, 115200 baud, 1024-word
// trigger buffers), with two DAC81416 models on the serial outputs and a host
// model on the UART that sends four-byte commands at a true 115200 baud and
// waits for each reply byte.
//
// It runs, in order:
//   - configuration of both converters after reset;
//   - the output-voltage measurement pattern: full-scale and mid-scale codes
//     on all 32 channels, checked as voltages with V = -10 V + 20 V*code/65535
//     (0000h -> -10 V, 7FFFh -> -152.59 uV, FFFFh -> +10 V);
//   - the resolution sweep 7FFFh..8005h on channel 0 of DAC_0 and channel 15
//     of DAC_1,
//     checking one 305 uV step per code;
//   - the full-range step 0000h -> FFFFh -> 0000h written directly, checking
//     the time from the middle of the command's last stop bit to the
//     converter update (4.9 to 5.8 us);
//   - a triggered sequence loaded into both converters' buffers and started
//     by one edge on the trigger pin: both converters start in the same
//     clock cycle;
//   - a damaged frame (junk byte, framing error) followed by a good command;
//   - a buffer overflow: 1025 preloaded writes to one converter, the last
//     refused with NAK, then all 1024 played on the next trigger.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_vanguard_top;
  import vanguard_pkg::*;
  int checks = 0, failures = 0;

  localparam realtime BIT_NS = 1.0e9 / 115200.0;

  logic clk = 0, rst_n = 0, rx = 1, trig = 0;
  logic tx;
  logic [1:0] sclk, sdi, cs_n;
  always #10 clk = ~clk;  // 50 MHz

  vanguard_top dut (.clk_50m_i(clk), .rst_ni(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .trig_i(trig),
                    .dac_sclk_o(sclk), .dac_sdi_o(sdi), .dac_cs_no(cs_n));

  dac81416_model dac0 (.sclk(sclk[0]), .sdi(sdi[0]), .cs_n(cs_n[0]));
  dac81416_model dac1 (.sclk(sclk[1]), .sdi(sdi[1]), .cs_n(cs_n[1]));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_config = 0, n_immediate = 0, n_preload = 0, n_played = 0, n_nak = 0, n_resync = 0;
  int n_dac [2] = '{0, 0};

  // ---- host model -------------------------------------------------------
  task automatic host_byte(logic [7:0] b, bit stop = 1'b1);
    rx = 0; #(BIT_NS);
    for (int i = 0; i < 8; i++) begin rx = b[i]; #(BIT_NS); end
    rx = stop; #(BIT_NS);
    rx = 1;
  endtask

  task automatic host_read(output logic [7:0] b);
    @(negedge tx);
    #(BIT_NS * 1.5);
    for (int i = 0; i < 8; i++) begin b[i] = tx; #(BIT_NS); end
    check(tx == 1, "reply stop bit");
  endtask

  realtime t_cmd_end;
  task automatic host_cmd(bit pre, bit d, logic [5:0] a, logic [15:0] v, output logic [7:0] reply);
    fork
      begin
        host_byte({HDR_MARK, 2'b00, pre, d});
        host_byte({2'b00, a});
        host_byte(v[15:8]);
        host_byte(v[7:0]);
        t_cmd_end = $realtime;
      end
      host_read(reply);
    join
  endtask

  task automatic write_now(bit d, int ch, logic [15:0] v);
    logic [7:0] r;
    host_cmd(1'b0, d, REG_DAC0 + 6'(ch), v, r);
    check(r == ACK_BYTE, $sformatf("immediate write ACK (%02h)", r));
    n_immediate++; n_dac[d]++;
  endtask

  task automatic write_pre(bit d, int ch, logic [15:0] v, output logic [7:0] r);
    host_cmd(1'b1, d, REG_DAC0 + 6'(ch), v, r);
    if (r == ACK_BYTE) n_preload++;
    if (r == NAK_BYTE) n_nak++;
    n_dac[d]++;
  endtask

  function automatic int ideal_uv(logic [15:0] code);
    // V = -10 V + 20 V * code / 65535, rounded to 1 uV
    return int'(-64'sd10_000_000 + (longint'(code) * 64'sd20_000_000 + 64'sd32767) / 64'sd65535);
  endfunction

  function automatic int vout(bit d, int ch);
    return d ? dac1.vout_uv(ch) : dac0.vout_uv(ch);
  endfunction

  // trigger-start times of each converter
  int cyc = 0;
  always @(posedge clk) cyc++;
  int first_fall [2] = '{-1, -1};
  bit arm = 0;
  always @(negedge cs_n[0]) if (arm && first_fall[0] < 0) first_fall[0] = cyc;
  always @(negedge cs_n[1]) if (arm && first_fall[1] < 0) first_fall[1] = cyc;

  // write latency: end of last stop bit to chip-select rise
  realtime t_update;
  always @(posedge cs_n[0]) t_update = $realtime;

  initial begin
    logic [7:0] r;
    logic [15:0] seq0 [16], seq1 [16];
    int w0;
    #1000 rst_n = 1;

    // ---- configuration ----
    #100us;
    check(dac0.writes == INIT_LEN && dac1.writes == INIT_LEN,
          $sformatf("configuration writes %0d %0d", dac0.writes, dac1.writes));
    for (int ch = 0; ch < 16; ch++)
      check(vout(0, ch) == -10_000_000 && vout(1, ch) == -10_000_000, $sformatf("ch %0d configured", ch));
    if (dac0.writes == INIT_LEN && dac1.writes == INIT_LEN) n_config++;

    // ---- output voltage pattern (Fig. 4 style): one code per channel ----
    for (int d = 0; d < 2; d++)
      for (int ch = 0; ch < 16; ch++) begin
        logic [15:0] code;
        code = (ch % 4 == 0) ? 16'h0000 : (ch % 4 == 1) ? 16'hFFFF : (ch % 4 == 2) ? 16'h7FFF : 16'(ch * 4099);
        write_now(d[0], ch, code);
        #20us;
        check(vout(d[0], ch) == ideal_uv(code), $sformatf("DAC%0d ch %0d code %04h: %0d uV", d, ch, code, vout(d[0], ch)));
      end
    check(vout(0, 4) == -10_000_000 && vout(0, 1) == 10_000_000 && vout(0, 2) == -153,
          "0000h, FFFFh, 7FFFh give -10 V, +10 V, -152.59 uV");

    // ---- resolution sweep 7FFFh..8005h (Fig. 5) ----
    for (int d = 0; d < 2; d++) begin
      int prev, ch;
      ch = d ? 15 : 0;
      for (int c = 16'h7FFF; c <= 16'h8005; c++) begin
        write_now(d[0], ch, 16'(c));
        #20us;
        if (c > 16'h7FFF) check(vout(d[0], ch) - prev >= 305 && vout(d[0], ch) - prev <= 306,
                                $sformatf("DAC%0d LSB step %0d uV", d, vout(d[0], ch) - prev));
        prev = vout(d[0], ch);
      end
    end

    // ---- full-range step, written directly ----
    for (int k = 0; k < 3; k++) begin
      logic [15:0] code;
      code = (k == 1) ? 16'hFFFF : 16'h0000;
      write_now(1'b0, 7, code);
      #20us;
      check(dac0.code(7) == code, "step code");
      // middle of the last stop bit (where the receiver takes the byte) to
      // the converter update: synchronizer, decode, one 49-cycle frame
      $display("step latency from stop-bit middle: %0t", t_update - (t_cmd_end - BIT_NS / 2));
      check(t_update - (t_cmd_end - BIT_NS / 2) > 4.9us && t_update - (t_cmd_end - BIT_NS / 2) < 5.8us,
            $sformatf("step latency %0t", t_update - (t_cmd_end - BIT_NS / 2)));
    end

    // ---- triggered sequence on both converters ----
    w0 = dac0.writes + dac1.writes;
    for (int k = 0; k < 16; k++) begin
      seq0[k] = 16'($urandom); seq1[k] = 16'($urandom);
      write_pre(1'b0, k, seq0[k], r); check(r == ACK_BYTE, "preload DAC0");
      write_pre(1'b1, k, seq1[k], r); check(r == ACK_BYTE, "preload DAC1");
    end
    #50us;
    check(dac0.writes + dac1.writes == w0, "preloads held before trigger");
    w0 = dac0.writes;
    arm = 1; first_fall = '{-1, -1};
    #3us trig = 1;
    #200us trig = 0;
    arm = 0;
    check(dac0.writes == w0 + 16, $sformatf("played %0d", dac0.writes - w0));
    check(first_fall[0] >= 0 && first_fall[0] == first_fall[1], "both converters start together");
    for (int k = 0; k < 16; k++)
      check(dac0.code(k) == seq0[k] && dac1.code(k) == seq1[k], $sformatf("triggered ch %0d", k));
    n_played += dac0.writes - w0;

    // ---- damaged frame, then a good command ----
    host_byte(8'h55);              // no frame marker: skipped
    host_byte(8'hA0);              // header ...
    host_byte(8'h11, 1'b0);        // ... then a byte with a broken stop bit
    #(BIT_NS * 2);
    write_now(1'b1, 9, 16'h1357);
    #20us;
    check(dac1.code(9) == 16'h1357, "command after damaged frame");
    if (dac1.code(9) == 16'h1357) n_resync++;

    // ---- buffer overflow on DAC1 ----
    for (int k = 0; k < 1025; k++) begin
      write_pre(1'b1, k % 16, 16'(k), r);
      check((k < 1024) ? r == ACK_BYTE : r == NAK_BYTE, $sformatf("preload %0d reply %02h", k, r));
    end
    w0 = dac1.writes;
    #3us trig = 1;
    #6ms trig = 0;
    check(dac1.writes == w0 + 1024, $sformatf("overflow playback %0d", dac1.writes - w0));
    check(dac1.code(15) == 16'd1023, "last buffered write played, refused one not");
    n_played += dac1.writes - w0;

    check(dac0.bad_frames == 0 && dac1.bad_frames == 0, "no malformed SPI frames");
    check(dac0.sclk_at_cs_fall_high == 0 && dac1.sclk_at_cs_fall_high == 0, "SPI clock polarity");

    // ---- every mechanism happened ----
    $display("mechanisms: config=%0d immediate=%0d preload=%0d played=%0d nak=%0d resync=%0d dac0=%0d dac1=%0d",
             n_config, n_immediate, n_preload, n_played, n_nak, n_resync, n_dac[0], n_dac[1]);
    check(n_config > 0, "configuration happened");
    check(n_immediate > 0, "immediate write happened");
    check(n_preload > 0, "preload happened");
    check(n_played > 0, "triggered playback happened");
    check(n_nak > 0, "buffer overflow happened");
    check(n_resync > 0, "resynchronisation happened");
    check(n_dac[0] > 0 && n_dac[1] > 0, "both converters addressed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2s;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
