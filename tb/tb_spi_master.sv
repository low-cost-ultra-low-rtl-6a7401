// tb_spi_master: sends random frames and decodes the serial lines the way
// the DAC81416 does (SDIN taken on SCLK falling edges while SYNC is low). It
// checks each received frame, that frames are exactly 24 bits, that SCLK is
// low whenever SYNC changes, and the timing: SYNC low for 49*H cycles and a
// frame every 49*H + CS_HIGH + 1 cycles when frames are offered back to
// back. Runs the default timing (H = 1, CS_HIGH = 2) and H = 3, CS_HIGH = 4.
module tb_spi_master;
  import vanguard_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [1:0][23:0] frame;
  logic [1:0] valid, ready, done, sclk, sdi, cs_n;

  spi_master dut0 (.clk_i(clk), .rst_ni(rst_n), .frame_i(frame[0]), .valid_i(valid[0]),
                   .ready_o(ready[0]), .done_o(done[0]), .sclk_o(sclk[0]), .sdi_o(sdi[0]), .cs_no(cs_n[0]));
  spi_master #(.SCLK_HALF(3), .CS_HIGH(4)) dut1 (.clk_i(clk), .rst_ni(rst_n), .frame_i(frame[1]),
                   .valid_i(valid[1]), .ready_o(ready[1]), .done_o(done[1]), .sclk_o(sclk[1]), .sdi_o(sdi[1]), .cs_no(cs_n[1]));

  // independent receivers
  logic [23:0] exp_q0[$], exp_q1[$];
  int rx_frames [2] = '{0, 0};
  int low_cycles [2] = '{0, 0};
  logic [23:0] sh [2];
  int nb [2];
  for (genvar i = 0; i < 2; i++) begin : g_rx
    always @(negedge cs_n[i]) begin nb[i] = 0; check(sclk[i] == 0, "SCLK low at SYNC fall"); end
    always @(negedge sclk[i]) if (!cs_n[i]) begin sh[i] = {sh[i][22:0], sdi[i]}; nb[i]++; end
    always @(posedge cs_n[i]) if (rst_n) begin
      logic [23:0] e;
      check(sclk[i] == 0, "SCLK low at SYNC rise");
      check(nb[i] == 24, $sformatf("frame length %0d", nb[i]));
      e = (i == 0) ? exp_q0.pop_front() : exp_q1.pop_front();
      check(sh[i] == e, $sformatf("dut%0d frame %06h expected %06h", i, sh[i], e));
      rx_frames[i]++;
    end
    always @(posedge clk) if (rst_n && !cs_n[i]) low_cycles[i]++;
  end

  // acceptance monitor
  int cyc = 0;
  int acc_n [2] = '{0, 0};
  int acc_t [2][$];
  always @(posedge clk) begin
    cyc++;
    for (int i = 0; i < 2; i++)
      if (rst_n && valid[i] && ready[i]) begin acc_n[i]++; acc_t[i].push_back(cyc); end
  end

  task automatic run(int i, int h, int csh, int n);
    int lc0 = low_cycles[i];
    int a0 = acc_n[i];
    for (int k = 0; k < n; k++) begin
      int a;
      @(negedge clk);
      frame[i] = 24'($urandom); valid[i] = 1;
      if (i == 0) exp_q0.push_back(frame[i]); else exp_q1.push_back(frame[i]);
      a = acc_n[i];
      do @(negedge clk); while (acc_n[i] == a);
      valid[i] = 0;
    end
    repeat (60 * h) @(posedge clk);
    for (int k = a0 + 1; k < acc_n[i]; k++)
      check(acc_t[i][k] - acc_t[i][k-1] == 49 * h + csh + 1,
            $sformatf("dut%0d frame spacing %0d, expected %0d", i, acc_t[i][k] - acc_t[i][k-1], 49 * h + csh + 1));
    check(low_cycles[i] - lc0 == n * 49 * h,
          $sformatf("dut%0d SYNC low %0d cycles", i, low_cycles[i] - lc0));
  endtask

  initial begin
    valid = '0; frame = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(cs_n == 2'b11 && sclk == 2'b00, "idle after reset");
    run(0, 1, 2, 40);
    run(1, 3, 4, 20);
    check(rx_frames[0] == 40 && rx_frames[1] == 20,
          $sformatf("frames %0d %0d", rx_frames[0], rx_frames[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
