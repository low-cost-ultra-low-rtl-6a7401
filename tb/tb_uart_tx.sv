// tb_uart_tx: sends bytes through the transmitter and decodes its line
// independently: samples each bit in its middle, checks start, data and stop
// bits, that ready_o stays low for exactly 10*CLKS_PER_BIT cycles per byte,
// and that the line idles high. CLKS_PER_BIT is reduced to 12 for speed.
module tb_uart_tx;
  localparam int CPB = 12;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, valid = 0;
  logic [7:0] data = 0;
  logic ready, tx;
  always #5 clk = ~clk;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk_i(clk), .rst_ni(rst_n), .data_i(data),
                                     .valid_i(valid), .ready_o(ready), .tx_o(tx));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // independent line decoder
  logic [7:0] exp_q[$];
  int decoded = 0;
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      check(tx == 0, "start bit");
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = tx; end
      repeat (CPB) @(posedge clk);
      check(tx == 1, "stop bit");
      if (exp_q.size() > 0) begin
        logic [7:0] e;
        e = exp_q.pop_front();
        check(b == e, $sformatf("line byte %02h expected %02h", b, e));
      end else check(0, "unexpected byte");
      decoded++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(tx == 1 && ready, "idle after reset");
    for (int n = 0; n < 60; n++) begin
      int busy;
      @(negedge clk);
      data = 8'($urandom); valid = 1;
      exp_q.push_back(data);
      @(negedge clk); valid = 0; data = 8'($urandom);
      busy = 0;
      while (!ready) begin @(negedge clk); busy++; end
      check(busy == 10 * CPB, $sformatf("busy %0d cycles", busy));
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (2 * CPB) @(posedge clk);
    check(decoded == 60, $sformatf("decoded %0d", decoded));
    check(tx == 1, "idle high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
