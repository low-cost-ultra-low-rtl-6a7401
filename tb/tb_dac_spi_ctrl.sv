// tb_dac_spi_ctrl: one DAC controller driving the DAC81416 model.
// Checks: the configuration writes after reset and that every channel then
// reads as powered, referenced and at +/-10 V; immediate writes reach the
// output registers; preloaded writes stay in the buffer until the trigger,
// the buffer refuses a write when full, playback delivers them in order with
// one frame every 53 clock cycles and the first chip-select fall 2 cycles
// after the edge that samples the trigger pulse; immediate writes wait during playback; a trigger
// that arrives during configuration is served after it. BUF_DEPTH is 8 here.
module tb_dac_spi_ctrl;
  import vanguard_pkg::*;
  localparam int D = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_preload = 0, trig = 0;
  reg_write_t cmd_wr = '0;
  logic cmd_ready, buf_full, init_done, playing, sclk, sdi, cs_n;

  dac_spi_ctrl #(.BUF_DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n),
    .cmd_valid_i(cmd_valid), .cmd_preload_i(cmd_preload), .cmd_wr_i(cmd_wr), .cmd_ready_o(cmd_ready),
    .buf_full_o(buf_full), .trig_i(trig), .init_done_o(init_done), .playing_o(playing),
    .sclk_o(sclk), .sdi_o(sdi), .cs_no(cs_n));

  dac81416_model dac (.sclk(sclk), .sdi(sdi), .cs_n(cs_n));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cycle counter and chip-select fall times
  int cyc = 0;
  int cs_fall[$];
  always @(posedge clk) cyc++;
  always @(negedge cs_n) cs_fall.push_back(cyc);
  int taken = 0;
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) taken++;

  // offer one command and wait until it is taken
  task automatic put(bit pre, logic [5:0] a, logic [15:0] d);
    int t0;
    @(negedge clk);
    cmd_valid = 1; cmd_preload = pre; cmd_wr = '{addr: a, data: d};
    t0 = taken;
    do @(negedge clk); while (taken == t0);
    cmd_valid = 0;
  endtask

  task automatic pulse_trig();
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
  endtask

  logic [15:0] codes [16];
  int t_trig, t0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configuration
    wait (init_done);
    repeat (60) @(posedge clk);
    check(dac.writes == INIT_LEN, $sformatf("config writes %0d", dac.writes));
    check(dac.regs[6'h03] == 16'h0A84 && dac.regs[6'h04] == 16'h3F00 && dac.regs[6'h09] == 16'h0000,
          "power-up, reference, channel power words");
    for (int r = 0; r < 4; r++) check(dac.regs[6'h0A + r] == 16'hAAAA, $sformatf("range register %0d", r));
    for (int ch = 0; ch < 16; ch++) check(dac.vout_uv(ch) == -10_000_000, $sformatf("ch %0d on at code 0", ch));

    // immediate writes
    for (int ch = 0; ch < 16; ch++) begin
      codes[ch] = 16'($urandom);
      put(0, 6'h10 + 6'(ch), codes[ch]);
    end
    repeat (60) @(posedge clk);
    for (int ch = 0; ch < 16; ch++) check(dac.code(ch) == codes[ch], $sformatf("immediate ch %0d", ch));
    check(dac.writes == INIT_LEN + 16, "immediate write count");

    // preload a full buffer; nothing goes out yet
    for (int k = 0; k < D; k++) begin
      codes[k] = 16'($urandom);
      put(1, 6'h10 + 6'(k), codes[k]);
    end
    @(negedge clk);
    check(buf_full, "buffer full after D preloads");
    cmd_valid = 1; cmd_preload = 1; cmd_wr = '{addr: 6'h1F, data: 16'h1234};
    @(negedge clk);
    check(!cmd_ready, "full buffer refuses");
    cmd_valid = 0;
    repeat (100) @(posedge clk);
    check(dac.writes == INIT_LEN + 16, "preloaded writes held");
    // trigger
    cs_fall.delete();
    @(negedge clk); trig = 1; t_trig = cyc + 1; @(negedge clk); trig = 0;
    // an immediate write offered during playback must wait
    cmd_valid = 1; cmd_preload = 0; cmd_wr = '{addr: 6'h1F, data: 16'hBEEF};
    @(negedge clk);
    check(playing && !cmd_ready, "immediate write waits during playback");
    t0 = taken;
    do @(negedge clk); while (taken == t0);
    cmd_valid = 0;
    repeat (100) @(posedge clk);
    check(cs_fall.size() == D + 1, $sformatf("frames after trigger %0d", cs_fall.size()));
    check(cs_fall[0] - t_trig == 2, $sformatf("trigger to first frame %0d cycles", cs_fall[0] - t_trig));
    for (int k = 1; k < D; k++)
      check(cs_fall[k] - cs_fall[k-1] == 53, $sformatf("playback spacing %0d", cs_fall[k] - cs_fall[k-1]));
    for (int k = 0; k < D; k++) if (k != 15) check(dac.code(k) == codes[k], $sformatf("played ch %0d", k));
    check(dac.code(15) == 16'hBEEF, "immediate write after playback");
    check(dac.bad_frames == 0 && dac.sclk_at_cs_fall_high == 0, "frame format");

    // trigger during configuration is remembered
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    put(1, 6'h13, 16'h7FFF);   // taken into the buffer during configuration
    pulse_trig();
    check(!init_done, "trigger came during configuration");
    wait (init_done);
    repeat (200) @(posedge clk);
    check(dac.code(3) == 16'h7FFF, "remembered trigger played the buffer");
    check(dac.vout_uv(3) == -153, $sformatf("7FFF gives %0d uV", dac.vout_uv(3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
