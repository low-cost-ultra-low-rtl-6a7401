// tb_cmd_decoder: feeds host command bytes to the decoder and plays the two
// SPI controllers and the UART transmitter with random ready delays. Checks
// for every command that it is offered to the named DAC only, with the
// right address, code and preload flag, and held until taken; that the reply
// is ACK for a taken command and NAK for a preload command to a full buffer;
// that a first byte without the frame marker is skipped and that a framing
// error restarts byte collection.
module tb_cmd_decoder;
  import vanguard_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] rx_data = 0;
  logic rx_valid = 0, rx_err = 0;
  host_cmd_t cmd;
  logic [1:0] cmd_valid, cmd_ready = 0, buf_full = 0;
  logic [7:0] tx_data;
  logic tx_valid, tx_ready = 0;

  cmd_decoder dut (.clk_i(clk), .rst_ni(rst_n), .rx_data_i(rx_data), .rx_valid_i(rx_valid), .rx_err_i(rx_err),
    .cmd_o(cmd), .cmd_valid_o(cmd_valid), .cmd_ready_i(cmd_ready), .buf_full_i(buf_full),
    .tx_data_o(tx_data), .tx_valid_o(tx_valid), .tx_ready_i(tx_ready));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic byte_in(logic [7:0] b);
    @(negedge clk); rx_data = b; rx_valid = 1;
    @(negedge clk); rx_valid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  task automatic send_cmd(bit pre, bit dac, logic [5:0] a, logic [15:0] d);
    byte_in({HDR_MARK, 2'b00, pre, dac});
    byte_in({2'b00, a});
    byte_in(d[15:8]);
    byte_in(d[7:0]);
  endtask

  // wait for the command, take it after a random delay, then collect the reply
  task automatic expect_cmd(bit pre, bit dac, logic [5:0] a, logic [15:0] d, bit full, string tag);
    int w = 0, delay;
    logic [7:0] reply;
    buf_full[dac] = full;
    while (cmd_valid == 0 && w < 50) begin @(negedge clk); w++; end
    check(cmd_valid == (2'b01 << dac), $sformatf("%s: routed to %b", tag, cmd_valid));
    check(cmd.dac == dac && cmd.preload == pre && cmd.wr.addr == a && cmd.wr.data == d,
          $sformatf("%s: fields %0d %0d %02h %04h", tag, cmd.preload, cmd.dac, cmd.wr.addr, cmd.wr.data));
    if (!full || !pre) begin
      delay = $urandom_range(0, 6);
      repeat (delay) begin
        @(negedge clk);
        check(cmd_valid == (2'b01 << dac), $sformatf("%s: held while not ready", tag));
      end
      cmd_ready[dac] = 1; @(negedge clk); cmd_ready[dac] = 0;
    end else begin
      @(negedge clk);
    end
    check(cmd_valid == 0, $sformatf("%s: released", tag));
    // reply handshake
    w = 0;
    while (!tx_valid && w < 20) begin @(negedge clk); w++; end
    repeat ($urandom_range(0, 4)) @(negedge clk);
    reply = tx_data;
    tx_ready = 1; @(negedge clk); tx_ready = 0;
    check(reply == ((full && pre) ? NAK_BYTE : ACK_BYTE), $sformatf("%s: reply %02h", tag, reply));
    buf_full = '0;
  endtask

  int n_ack = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      bit pre, dac, full;
      logic [5:0] a;
      logic [15:0] d;
      pre = 1'($urandom); dac = 1'($urandom); full = ($urandom_range(0, 3) == 0);
      a = 6'($urandom); d = 16'($urandom);
      if (n % 17 == 5) byte_in(8'h3C);                  // junk before a frame: skipped
      if (n % 23 == 7) begin byte_in(8'hA1); byte_in(8'h11);
                             @(negedge clk); rx_err = 1; @(negedge clk); rx_err = 0; end  // broken frame
      fork
        send_cmd(pre, dac, a, d);
        expect_cmd(pre, dac, a, d, full, $sformatf("cmd %0d", n));
      join
    end
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
