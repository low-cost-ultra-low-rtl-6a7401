// trigger_sync: brings the external trigger pin into the logic clock domain
// and turns each rising edge into a one-cycle pulse.
//
// The module has one external digital trigger input, wired to an FPGA pin;
// it starts the writes that were loaded into FPGA memory beforehand. The pin
// is asynchronous to the logic clock, so it passes a two-flop synchronizer;
// a third flop detects the 0->1 transition. trig_o is high for the one
// cycle that follows the second clock edge at which the pin is seen high. Treating the rising edge as the event is
// this design's choice; the pin itself follows the module description.
module trigger_sync (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic trig_pin_i,   // asynchronous trigger input
  output logic trig_o        // one-cycle pulse per rising edge
);
  logic [2:0] sync_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sync_q <= 3'b000;
    else         sync_q <= {sync_q[1:0], trig_pin_i};
  end

  assign trig_o = sync_q[1] & ~sync_q[2];

endmodule
