// tb_paper_workloads: the register-write patterns of the module's bench
// measurements, run through the complete control logic at default parameters
// with a 115200-baud host model and two DAC81416 models. Output voltages are
// checked against V = -10 V + 20 V*code/65535 (the converter's analog error,
// noise and slew are not modelled). Channels are numbered 0..31 across the
// two converters: channel n is channel n%16 of DAC n/16.
//   1. Static outputs: the ten codes FFFF, BFFF, 8CCC, 7FFF, 7FF0, 7EB9,
//      0000, 8146, 7333, 4000 on one channel of every bank of four (each
//      range register) of both converters; each must land within 0.5 mV of
//      its nominal value (10, 5, 1, 0, -0.0047, -0.1, -10, 0.1, -1, -5 V).
//   2. LSB sweep 7FFF..8005 on channel 0 and channel 31: one 305 uV step per
//      code, 7FFF at -152.59 uV.
//   3. Noise set-up: every channel of both converters at 0000h (-10 V).
//   4. Full-range step 0000h -> FFFFh -> 0000h on one channel while the
//      neighbouring channel holds +1 V (8CCCh) and is never rewritten.
module tb_paper_workloads;
  import vanguard_pkg::*;
  int checks = 0, failures = 0;

  localparam realtime BIT_NS = 1.0e9 / 115200.0;

  logic clk = 0, rst_n = 0, rx = 1, trig = 0;
  logic tx;
  logic [1:0] sclk, sdi, cs_n;
  always #10 clk = ~clk;

  vanguard_top dut (.clk_50m_i(clk), .rst_ni(rst_n), .uart_rx_i(rx), .uart_tx_o(tx), .trig_i(trig),
                    .dac_sclk_o(sclk), .dac_sdi_o(sdi), .dac_cs_no(cs_n));
  dac81416_model dac0 (.sclk(sclk[0]), .sdi(sdi[0]), .cs_n(cs_n[0]));
  dac81416_model dac1 (.sclk(sclk[1]), .sdi(sdi[1]), .cs_n(cs_n[1]));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic host_byte(logic [7:0] b);
    rx = 0; #(BIT_NS);
    for (int i = 0; i < 8; i++) begin rx = b[i]; #(BIT_NS); end
    rx = 1; #(BIT_NS);
  endtask

  task automatic host_read(output logic [7:0] b);
    @(negedge tx);
    #(BIT_NS * 1.5);
    for (int i = 0; i < 8; i++) begin b[i] = tx; #(BIT_NS); end
  endtask

  // write one code to global channel n and wait for the reply
  task automatic set_code(int n, logic [15:0] v);
    logic [7:0] r;
    fork
      begin
        host_byte({HDR_MARK, 3'b000, 1'(n / 16)});
        host_byte({2'b00, REG_DAC0 + 6'(n % 16)});
        host_byte(v[15:8]);
        host_byte(v[7:0]);
      end
      host_read(r);
    join
    check(r == ACK_BYTE, "ACK");
    #10us;
  endtask

  function automatic int vout(int n);
    return (n / 16) ? dac1.vout_uv(n % 16) : dac0.vout_uv(n % 16);
  endfunction

  function automatic int ideal_uv(logic [15:0] code);
    return int'(-64'sd10_000_000 + (longint'(code) * 64'sd20_000_000 + 64'sd32767) / 64'sd65535);
  endfunction

  logic [15:0] fig_codes [10] = '{16'hFFFF, 16'hBFFF, 16'h8CCC, 16'h7FFF, 16'h7FF0,
                                  16'h7EB9, 16'h0000, 16'h8146, 16'h7333, 16'h4000};
  int fig_uv [10] = '{10_000_000, 5_000_000, 1_000_000, 0, -4_700,
                      -100_000, -10_000_000, 100_000, -1_000_000, -5_000_000};

  initial begin
    int nbr_writes;
    #1000 rst_n = 1;
    #100us;

    // 1. static outputs, one channel per bank of four on both converters
    for (int c = 0; c < 10; c++)
      for (int bank = 0; bank < 8; bank++) begin
        int n;
        n = bank * 4 + (bank % 4);
        set_code(n, fig_codes[c]);
        check(vout(n) == ideal_uv(fig_codes[c]), $sformatf("ch %0d code %04h: %0d uV", n, fig_codes[c], vout(n)));
        check(vout(n) - fig_uv[c] < 500 && fig_uv[c] - vout(n) < 500,
              $sformatf("ch %0d code %04h within 0.5 mV of nominal", n, fig_codes[c]));
      end

    // 2. LSB sweep on channels 0 and 31
    for (int k = 0; k < 2; k++) begin
      int n, prev;
      n = k ? 31 : 0;
      for (int c = 16'h7FFF; c <= 16'h8005; c++) begin
        set_code(n, 16'(c));
        if (c == 16'h7FFF) check(vout(n) == -153, $sformatf("ch %0d 7FFF at %0d uV", n, vout(n)));
        else check(vout(n) - prev >= 305 && vout(n) - prev <= 306, $sformatf("ch %0d step %0d uV", n, vout(n) - prev));
        prev = vout(n);
      end
    end

    // 3. all channels at -10 V
    for (int n = 0; n < 32; n++) set_code(n, 16'h0000);
    for (int n = 0; n < 32; n++) check(vout(n) == -10_000_000, $sformatf("ch %0d at -10 V", n));

    // 4. full-range step next to a +1 V channel
    set_code(3, 16'h8CCC);
    nbr_writes = dac0.writes;
    for (int k = 0; k < 4; k++) begin
      set_code(2, (k % 2) ? 16'h0000 : 16'hFFFF);
      check(vout(2) == ((k % 2) ? -10_000_000 : 10_000_000), "step output");
      check(vout(3) == ideal_uv(16'h8CCC) && dac0.code(3) == 16'h8CCC, "neighbour holds +1 V");
    end
    check(dac0.writes == nbr_writes + 4, "only the stepped channel was written");
    check(dac0.bad_frames == 0 && dac1.bad_frames == 0, "no malformed SPI frames");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1s;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
