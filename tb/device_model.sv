// device_model: behavioural model of an acquisition device, for testbenches.
//
// Stands for a transient recorder board in the trigger network. It is armed
// at start. A local event (task `local_event`, the breakdown seen by its own
// threshold) or a rising edge on trig_in (a trigger dispatched by the hub)
// starts a transient: trig_out goes high after DTH_NS (threshold path,
// activation time plus N_th sample periods) or DTR_NS (external trigger
// path) and stays high PULSE_NS. The device then stays busy for DEAD_NS,
// during which further triggers are ignored, and re-arms. `cause` tells
// whether the last transient was started locally (1) or externally (0).
// Time unit 1 ps.
module device_model #(
  parameter realtime DTH_NS   = 93.0,     // 85 ns + 1 sample of 8 ns
  parameter realtime DTR_NS   = 100.0,
  parameter realtime PULSE_NS = 2000.0,
  parameter realtime DEAD_NS  = 40000.0
) (
  input  logic trig_in,
  output logic trig_out
);
  bit busy = 0;
  bit cause = 0;
  int transients = 0;
  initial trig_out = 1'b0;

  task automatic start(input bit local_cause);
    if (!busy) begin
      busy = 1;
      cause = local_cause;
      transients++;
      fork
        begin
          if (local_cause) #(DTH_NS);
          else             #(DTR_NS);
          trig_out = 1'b1;
          #(PULSE_NS);
          trig_out = 1'b0;
        end
        begin
          #(DEAD_NS);
          busy = 0;
        end
      join_none
    end
  endtask

  task automatic local_event();
    start(1'b1);
  endtask

  always @(posedge trig_in) start(1'b0);
endmodule
