// self_cal: round-trip delay measurement for calibrating a hub's trigger
// lines.
//
// Because a hub is connected to both the trigger-in and the trigger-out of
// every device, it can measure a line's delay by itself. It fires a trigger out
// of one port and counts sample clocks until an answer comes back: on the same
// port from an externally triggered device (2 l tau + Delta_tr), or on another
// port through a second hub. The result is a raw round trip, from which the
// fiber delay offsets used in the offline time reconstruction are derived.
//
// Operation: a `start` pulse latches tx_port and rx_port and starts the count.
// From the next clock the block drives a PULSE_LEN-cycle pulse on
// pulse[tx_port] (OR-ed into the hub's trigger outputs) and watches rx_lines,
// the already synchronized trigger inputs. On the first rising edge of
// rx_lines[rx_port] it stores the cycle count in round_trip and pulses `done`.
// If no edge arrives within TIMEOUT cycles it pulses `done` with `timed_out`
// set. A line that is already high at start has to fall and rise again.
// `busy` is high from start to done; start is ignored while busy.
//
// Timing: count 0 is the first cycle the pulse is high. With the return edge
// arriving RT after that cycle's clock edge and an S-stage synchronizer,
// round_trip = ceil(RT / 8 ns) + S - 1. Subtracting the constant (S - 1)
// cycles of hub delay leaves the physical round trip, rounded up to whole
// samples.
//
// The source proposes this self-calibration (a trigger generated by the hub
// and the round-trip delay measured on the same line) without detailing it.
// The port selection, pulse width, timeout and count format are this design's
// own.
module self_cal #(
  parameter int unsigned NUM_PORTS = thub_pkg::NUM_PORTS,
  parameter int unsigned PULSE_LEN = 8,
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned TIMEOUT   = 65535,
  localparam int unsigned PW = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [PW-1:0]        tx_port,
  input  logic [PW-1:0]        rx_port,
  input  logic [NUM_PORTS-1:0] rx_lines,   // synchronized trigger inputs
  output logic [NUM_PORTS-1:0] pulse,      // calibration trigger, per port
  output logic                 busy,
  output logic                 done,
  output logic                 timed_out,
  output logic [CNT_W-1:0]     round_trip
);

  logic [PW-1:0]    tx_q, rx_q;
  logic [CNT_W-1:0] cnt;
  logic             rx_prev;
  logic [$clog2(PULSE_LEN+1)-1:0] plen;
  logic             rx_now;

  assign rx_now = rx_lines[rx_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_q       <= '0;
      rx_q       <= '0;
      cnt        <= '0;
      rx_prev    <= 1'b0;
      plen       <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      timed_out  <= 1'b0;
      round_trip <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy      <= 1'b1;
          tx_q      <= tx_port;
          rx_q      <= rx_port;
          cnt       <= '0;
          plen      <= ($bits(plen))'(PULSE_LEN);
          rx_prev   <= rx_lines[rx_port];
          timed_out <= 1'b0;
        end
      end else begin
        if (plen != '0) plen <= plen - 1'b1;
        rx_prev <= rx_now;
        if (rx_now && !rx_prev) begin
          busy       <= 1'b0;
          done       <= 1'b1;
          round_trip <= cnt;
        end else if (cnt == CNT_W'(TIMEOUT)) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          timed_out <= 1'b1;
          round_trip <= cnt;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  always_comb begin
    pulse = '0;
    if (busy && plen != '0) pulse[tx_q] = 1'b1;
  end

  initial begin
    assert (TIMEOUT < (1 << CNT_W)) else $error("self_cal: TIMEOUT does not fit CNT_W");
  end

endmodule
