// cmd_fifo: the FPGA memory that holds register writes loaded ahead of the
// external trigger.
//
// Writes for a timed sequence are uploaded over the slow host link in
// advance, stored here, and played out to the DAC when the trigger arrives.
// It is a first-in first-out buffer of DEPTH words of WIDTH bits, written as
// an array with a registered read port so that it maps onto block RAM.
// push_i stores wdata_i unless full_o; pop_i (ignored when empty_o) moves the
// oldest word to rdata_o on the next clock edge, where it stays until the
// next pop. Simultaneous push and pop are allowed. count_o is the fill level.
// The buffer follows the module description's "storing it on FPGA memory";
// its depth and organisation are this design's choice.
module cmd_fifo #(
  parameter int unsigned WIDTH = 22,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         rdata_o,
  output logic                     full_o,
  output logic                     empty_o,
  output logic [$clog2(DEPTH):0]   count_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr_q, rptr_q;
  logic [AW:0]      cnt_q;
  logic             do_push, do_pop;

  assign full_o  = (cnt_q == (AW+1)'(DEPTH));
  assign empty_o = (cnt_q == '0);
  assign count_o = cnt_q;
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wptr_q] <= wdata_i;
    if (do_pop)  rdata_o     <= mem[rptr_q];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (do_push) wptr_q <= (wptr_q == AW'(DEPTH - 1)) ? '0 : wptr_q + 1'b1;
      if (do_pop)  rptr_q <= (rptr_q == AW'(DEPTH - 1)) ? '0 : rptr_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

`ifndef SYNTHESIS
  a_level: assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= (AW+1)'(DEPTH));
`endif

endmodule
