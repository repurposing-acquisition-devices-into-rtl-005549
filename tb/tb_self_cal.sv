// tb_self_cal: self-checking test of the round-trip calibration unit.
//
// The testbench plays the far end of a line: when it sees the calibration
// pulse it raises the chosen return line exactly D clocks after the pulse's
// first cycle, so the expected round_trip is D. It checks the pulse width and
// port, the count for many random delays and port pairs, a return line that
// is already high at start (it must fall and rise again), that start is
// ignored while busy, and the timeout.
module tb_self_cal;
  localparam int N = 6;
  localparam int PLEN = 8;
  localparam int TMO = 300;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  always #4 clk = ~clk;

  logic start = 0;
  logic [2:0] tx_port = '0, rx_port = '0;
  logic [N-1:0] rx_lines = '0, pulse;
  logic busy, done, timed_out;
  logic [15:0] round_trip;

  self_cal #(.NUM_PORTS(N), .PULSE_LEN(PLEN), .CNT_W(16), .TIMEOUT(TMO)) dut (
    .clk, .rst_n, .start, .tx_port, .rx_port, .rx_lines, .pulse,
    .busy, .done, .timed_out, .round_trip);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One measurement: return edge D clocks after the first pulse cycle
  // (D < 0: no return). pre_high: return line high at start, low later.
  task automatic measure(input int tx, input int rx, input int d, input bit pre_high);
    int width, k;
    bit seen_done;
    width = 0; seen_done = 0;
    @(negedge clk);
    rx_lines = '0;
    if (pre_high) rx_lines[rx] = 1'b1;
    tx_port = 3'(tx); rx_port = 3'(rx); start = 1;
    @(negedge clk); start = 0;
    // first pulse cycle
    chk(pulse == (N'(1) << tx), $sformatf("pulse on port %0d: %b", tx, pulse));
    for (k = 0; k < TMO + 20 && !seen_done; k++) begin
      if (pulse != '0) begin
        width++;
        chk(pulse == (N'(1) << tx), "pulse only on tx port");
      end
      if (pre_high && k == 2) rx_lines[rx] = 1'b0;
      if (d >= 0 && k == d) rx_lines[rx] = 1'b1;
      if (k == 3) begin  // a second start while busy is ignored
        start = 1; tx_port = 3'((tx + 1) % N);
      end else start = 0;
      @(negedge clk);
      if (done) seen_done = 1;
    end
    start = 0;
    chk(seen_done, "done seen");
    if (d >= 0) begin
      chk(!timed_out && round_trip == 16'(d),
          $sformatf("tx %0d rx %0d: round trip %0d exp %0d (timeout %b)", tx, rx, round_trip, d, timed_out));
    end else begin
      chk(timed_out && round_trip == 16'(TMO), $sformatf("timeout flag %b count %0d", timed_out, round_trip));
    end
    // the pulse lasts PLEN cycles unless the answer ends the measurement first
    if (d < 0 || d >= PLEN) chk(width == PLEN, $sformatf("pulse width %0d", width));
    chk(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    measure(1, 1, 48, 0);     // about 380 ns device round trip
    measure(2, 2, 83, 0);
    measure(0, 0, 160, 0);    // through a second hub
    measure(3, 5, 20, 0);     // answer on another port
    measure(4, 4, 30, 1);     // line high at start: needs a new edge
    measure(5, 5, -1, 0);     // no answer: timeout
    for (int r = 0; r < 40; r++) measure($urandom % N, $urandom % N, 9 + $urandom % 250, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
