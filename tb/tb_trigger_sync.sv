// tb_trigger_sync: drives the trigger pin with pulses of random length and
// spacing, changing it between clock edges, and checks that exactly one
// one-cycle trig_o pulse follows each rising edge, 2 to 3 clock edges after
// the pin rises, and none follows a falling edge or a level held high.
module tb_trigger_sync;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, pin = 0;
  logic trig;
  always #5 clk = ~clk;

  trigger_sync dut (.clk_i(clk), .rst_ni(rst_n), .trig_pin_i(pin), .trig_o(trig));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int pulses = 0, prev_trig = 0;
  always @(posedge clk) if (rst_n) begin
    if (trig) pulses++;
    if (trig && prev_trig) check(0, "pulse longer than one cycle");
    prev_trig = trig;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 100; n++) begin
      int lat, n_before;
      #($urandom_range(1, 9));
      n_before = pulses;
      pin = 1;
      lat = 0;
      while (pulses == n_before && lat < 10) begin @(posedge clk); #1; lat++; end
      check(pulses == n_before + 1, "pulse after rising edge");
      check(lat >= 2 && lat <= 3, $sformatf("latency %0d edges", lat));
      repeat ($urandom_range(3, 20)) @(posedge clk);
      check(pulses == n_before + 1, "single pulse while pin high");
      #($urandom_range(1, 9));
      pin = 0;
      repeat ($urandom_range(4, 20)) @(posedge clk);
      check(pulses == n_before + 1, "no pulse on falling edge");
    end
    check(pulses == 100, $sformatf("pulses %0d", pulses));
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
