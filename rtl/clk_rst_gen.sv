// clk_rst_gen: derives the 10 MHz logic clock from the 50 MHz board oscillator
// and a reset that is released synchronously to it.
//
// The module's oscillator delivers 50 MHz; the control logic runs at 10 MHz,
// obtained by plain clock division, which leaves wide setup margin on the
// serial links. Division is by DIV with a counter; the output clock is a
// register (no glitches), high for the first DIV/2 input cycles of each
// period (40 % duty for DIV = 5). The division ratio follows the module
// description; the duty cycle and the reset scheme are this design's choice.
//
// rst_ni is an asynchronous active-low reset. rst_no is asserted at once and
// released two rising edges of clk_o after rst_ni goes high.
module clk_rst_gen #(
  parameter int unsigned DIV = 5   // 50 MHz / 5 = 10 MHz
) (
  input  logic clk_i,     // 50 MHz oscillator
  input  logic rst_ni,    // asynchronous reset, active low
  output logic clk_o,     // divided clock
  output logic rst_no     // reset synchronous to clk_o, active low
);
  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt_q;
  logic [1:0]    rst_sync_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      clk_o <= 1'b0;
    end else begin
      cnt_q <= (cnt_q == CW'(DIV - 1)) ? '0 : cnt_q + 1'b1;
      // next count value decides the next clock level
      clk_o <= ((cnt_q == CW'(DIV - 1)) ? CW'(0) : cnt_q + 1'b1) < CW'(DIV / 2);
    end
  end

  always_ff @(posedge clk_o or negedge rst_ni) begin
    if (!rst_ni) rst_sync_q <= 2'b00;
    else         rst_sync_q <= {rst_sync_q[0], 1'b1};
  end

  assign rst_no = rst_sync_q[1];

endmodule
