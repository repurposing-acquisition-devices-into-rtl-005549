// trig_plex: configurable trigger dispatch matrix of a Timing Hub.
//
// Every hub port has a trigger input and a trigger output. The trigger level
// arriving on port i is forwarded to the output of every port j for which
// route_map[i][j] is set:
//
//     trig_out[j] = OR over i != j of (trig_in[i] AND route_map[i][j])
//
// The diagonal of the map is ignored, so a trigger is never sent back out of
// the port it arrived on. This is what lets hubs be chained into a tree
// without trigger loops, as the hub design requires; the mapping itself is
// free, so the tree topology can be chosen per installation.
//
// Interface: trig_in / trig_out are levels, route_map is a static
// configuration. Timing: purely combinational, zero clock cycles, so the
// dispatch delay is only the gate delay (the hub is meant to forward
// triggers with minimal delay). Making it combinational is this design's
// choice; the source only states the dispatch function.
module trig_plex #(
  parameter int unsigned NUM_PORTS = thub_pkg::NUM_PORTS
) (
  input  logic [NUM_PORTS-1:0]                trig_in,
  input  logic [NUM_PORTS-1:0][NUM_PORTS-1:0] route_map,  // [from][to]
  output logic [NUM_PORTS-1:0]                trig_out
);

  always_comb begin
    trig_out = '0;
    for (int unsigned j = 0; j < NUM_PORTS; j++) begin
      for (int unsigned i = 0; i < NUM_PORTS; i++) begin
        if (i != j) trig_out[j] = trig_out[j] | (trig_in[i] & route_map[i][j]);
      end
    end
  end

endmodule
