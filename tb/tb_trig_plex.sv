// tb_trig_plex: self-checking test of the trigger dispatch matrix.
//
// Applies random trigger levels and random route maps (plus one-hot and
// all-ones cases) and compares every output with a reference computed here
// from the dispatch rule: port j is driven when some other port i is high and
// routed to j; a port never drives itself, even if the map's diagonal is set.
module tb_trig_plex;
  localparam int unsigned N = 6;

  logic [N-1:0]        trig_in, trig_out;
  logic [N-1:0][N-1:0] route_map;
  int checks = 0, failures = 0;
  int self_blocked = 0;

  trig_plex #(.NUM_PORTS(N)) dut (.trig_in, .route_map, .trig_out);

  function automatic logic [N-1:0] ref_out(input logic [N-1:0] ti, input logic [N-1:0][N-1:0] m);
    logic [N-1:0] r = '0;
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++)
        if (i != j && ti[i] && m[i][j]) r[j] = 1'b1;
    return r;
  endfunction

  task automatic check(input string what);
    #1;
    checks++;
    if (trig_out !== ref_out(trig_in, route_map)) begin
      failures++;
      $display("FAIL %s: in=%b map=%h out=%b exp=%b", what, trig_in, route_map, trig_out,
               ref_out(trig_in, route_map));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // all-to-all map including the diagonal: a single input reaches every
    // other port and never itself
    route_map = '1;
    for (int i = 0; i < N; i++) begin
      trig_in = N'(1) << i;
      check("all-to-all");
      checks++;
      if (trig_out !== ~trig_in) begin
        failures++; $display("FAIL reflection on port %0d: out=%b", i, trig_out);
      end else self_blocked++;
    end
    // diagonal only: nothing is forwarded
    route_map = '0;
    for (int i = 0; i < N; i++) route_map[i][i] = 1'b1;
    trig_in = '1;
    check("diagonal");
    checks++;
    if (trig_out !== '0) begin failures++; $display("FAIL diagonal forwarded"); end
    // chain: port 0 is the parent, forward parent to ports 1..5 and ports
    // 1..5 to the parent only
    route_map = '0;
    for (int j = 1; j < N; j++) begin route_map[0][j] = 1'b1; route_map[j][0] = 1'b1; end
    trig_in = 6'b000001; check("parent->children");
    checks++; if (trig_out !== 6'b111110) begin failures++; $display("FAIL parent fanout %b", trig_out); end
    trig_in = 6'b000100; check("child->parent");
    checks++; if (trig_out !== 6'b000001) begin failures++; $display("FAIL child up %b", trig_out); end
    // random
    for (int k = 0; k < 2000; k++) begin
      trig_in   = N'($urandom);
      for (int i = 0; i < N; i++) route_map[i] = N'($urandom);
      check("random");
    end
    if (self_blocked != N) begin failures++; $display("FAIL self-block not seen on all ports"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
