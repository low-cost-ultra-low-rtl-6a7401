// tb_uart_rx: drives 8N1 bytes onto the receiver's line and checks what it
// delivers. Sends 200 random bytes with random idle gaps, checks each value
// and that valid_o comes within one bit time of the stop-bit middle; then a
// byte with a low stop bit (expects frame_err_o and no byte) and a short low
// glitch (expects nothing). CLKS_PER_BIT is reduced to 16 for speed.
module tb_uart_rx;
  localparam int CPB = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, rx = 1;
  logic [7:0] data;
  logic valid, ferr;
  always #5 clk = ~clk;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk_i(clk), .rst_ni(rst_n), .rx_i(rx),
                                     .data_o(data), .valid_o(valid), .frame_err_o(ferr));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int got = 0, errs = 0;
  logic [7:0] exp_q[$];
  always @(posedge clk) begin
    if (rst_n && valid) begin
      got++;
      if (exp_q.size() == 0) check(0, $sformatf("unexpected byte %02h at %0t errs %0d", data, $time, errs));
      else begin
        logic [7:0] e;
        e = exp_q.pop_front();
        check(data == e, $sformatf("byte %02h expected %02h", data, e));
      end
    end
    if (rst_n && ferr) errs++;
  end

  task automatic send(logic [7:0] b, bit stop);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = stop; repeat (CPB) @(posedge clk);
    rx = 1;
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      exp_q.push_back(b);
      send(b, 1'b1);
      repeat ($urandom_range(0, 3 * CPB)) @(posedge clk);
    end
    repeat (2 * CPB) @(posedge clk);
    check(got == 200, $sformatf("received %0d of 200", got));
    check(exp_q.size() == 0, "all bytes delivered");
    // low stop bit
    send(8'h5A, 1'b0);
    repeat (3 * CPB) @(posedge clk);
    check(errs == 1, $sformatf("framing errors %0d", errs));
    check(got == 200, "bad byte not delivered");
    // glitch shorter than half a bit
    rx = 0; repeat (CPB / 4) @(posedge clk); rx = 1;
    repeat (12 * CPB) @(posedge clk);
    check(got == 200 && errs == 1, "glitch ignored");
    // delivery time: valid within 10 bit times of the start bit
    exp_q.push_back(8'hC3);
    fork
      send(8'hC3, 1'b1);
      begin
        int c = 0;
        while (!valid && c < 12 * CPB) begin @(posedge clk); c++; end
        check(c >= 9 * CPB + CPB / 2 && c <= 9 * CPB + CPB / 2 + 4, $sformatf("latency %0d cycles", c));
      end
    join
    repeat (2 * CPB) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
