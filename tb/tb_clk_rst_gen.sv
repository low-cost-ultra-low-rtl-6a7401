// tb_clk_rst_gen: checks the 50 MHz -> 10 MHz divider and the reset release.
// Measures, in input clock cycles, the period and high time of the divided
// clock over many periods (expected 5 and 2 for DIV = 5), checks that the
// synchronised reset stays low while the board reset is low and rises on the
// second divided clock edge after release, and repeats for DIV = 4.
module tb_clk_rst_gen;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic clk5, rst5, clk4, rst4;
  always #1 clk = ~clk;

  clk_rst_gen #(.DIV(5)) dut5 (.clk_i(clk), .rst_ni(rst_n), .clk_o(clk5), .rst_no(rst5));
  clk_rst_gen #(.DIV(4)) dut4 (.clk_i(clk), .rst_ni(rst_n), .clk_o(clk4), .rst_no(rst4));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // count input cycles between edges of a divided clock
  task automatic measure(input int div, input int hi_exp);
    int n, hi, rises, cyc;
    logic prev;
    n = 0; hi = 0; rises = 0; cyc = 0;
    prev = (div == 5) ? clk5 : clk4;
    repeat (div * 40) begin
      logic cur;
      @(negedge clk);
      cur = (div == 5) ? clk5 : clk4;
      cyc++;
      if (cur) hi++;
      if (cur && !prev) begin
        if (rises > 0) begin
          check(cyc == div, $sformatf("DIV=%0d period %0d", div, cyc));
          check(hi - 1 == hi_exp, $sformatf("DIV=%0d high %0d", div, hi));
        end
        rises++; cyc = 0; hi = 1;
      end
      prev = cur;
    end
    check(rises >= 38, $sformatf("DIV=%0d rises %0d", div, rises));
  endtask

  initial begin
    repeat (10) @(posedge clk);
    check(!rst5 && !rst4, "reset held low");
    @(negedge clk); rst_n = 1;
    // reset released on the second divided-clock rising edge
    @(posedge clk5); @(negedge clk); check(!rst5, "reset low after first edge");
    @(posedge clk5); @(negedge clk); check(rst5, "reset high after second edge");
    measure(5, 2);
    measure(4, 2);
    // reset again in the middle of operation
    @(negedge clk); rst_n = 0; #0.1;
    check(!rst5 && !clk5, "asynchronous reset");
    @(negedge clk); rst_n = 1;
    repeat (40) @(posedge clk);
    check(rst5 && rst4, "reset released again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
