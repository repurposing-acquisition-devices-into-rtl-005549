// fiber_link: behavioural model of an optical trigger fiber, for testbenches.
//
// A pure transport delay of DELAY_NS nanoseconds on a single trigger level.
// It stands for the fiber time of flight plus the electro-optical converters
// at both ends; the calibrated figures are 450 ns for a 100 m hub-to-hub
// fiber and 140 ns for a 30 m device fiber. Time unit 1 ns.
module fiber_link #(
  parameter realtime DELAY_NS = 140.0
) (
  input  logic in,
  output logic out
);
  initial out = 1'b0;
  // every edge is scheduled on its own, so pulses shorter than the delay
  // pass unchanged (transport, not inertial, delay)
  always @(posedge in) fork
    begin
      #(DELAY_NS);
      out = 1'b1;
    end
  join_none

  always @(negedge in) fork
    begin
      #(DELAY_NS);
      out = 1'b0;
    end
  join_none
endmodule
