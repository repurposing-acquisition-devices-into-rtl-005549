// thub_top: one Timing Hub (THub).
//
// A hub joins up to NUM_PORTS trigger ports. Each port carries, over a fiber
// pair, the trigger-out of a device (or of a child/parent hub) into the hub
// and the dispatched trigger back to it. The hub does two things at once:
//
//  * Dispatch. trig_plex forwards every incoming trigger to the ports enabled
//    in route_map, never back to its own port, with no clock delay.
//  * Calibration. self_cal can fire a trigger out of one port and count the
//    clocks until the answer returns, giving the round-trip delay of a line.
//  * Recording. The same incoming lines are sampled every 8 ns clock by
//    trig_capture, which stands where the ADC parallel bus normally is, and
//    fed as a bit field to transient_recorder. With the level trigger on and
//    threshold 0 the first set bit starts a transient; the stored window then
//    shows, sample by sample, when each port's trigger went high. Counting the
//    samples between the rising edges of different bits gives the relative
//    arrival times, which offline software corrects by each line's calibrated
//    delay to recover the true event order.
//
// Interface: trig_in / trig_out are the port trigger levels (trig_in is
// asynchronous). route_map, rec_cfg, arm, stop, sw_trig and ext_trig come from
// the board processor; ext_trig and sw_trig must be synchronous to clk. The
// recorded windows leave on the m_axis_* stream toward the processor memory,
// with the trigger sources in m_axis_tuser. rec_trig_out is the recorder's own
// trigger-out pulse, one per recorded event. cal_* start a round-trip
// measurement and return its result in sample clocks.
//
// Timing: trig_in to trig_out is combinational. trig_in reaches the recorder
// after the SYNC_STAGES synchronizer; with hold = 1 a rising edge on an idle
// armed hub is the validated sample and rec_trig_out rises SYNC_STAGES + 1
// clocks after it was sampled.
//
// The calibration pulse uses the recorder's trigger-out width.
// The split into dispatch matrix and recorder in parallel, the six ports, the
// 125 MHz sampling of the rerouted ADC bus and the zero threshold follow the
// published hub. Recording the input side of the lines, the bit order, the
// synchronizer, the buffer depth and the form of the calibration unit are
// this design's choices.
module thub_top #(
  parameter int unsigned NUM_PORTS    = thub_pkg::NUM_PORTS,
  parameter int unsigned DEPTH        = 16384,
  parameter int unsigned SYNC_STAGES  = 2,
  parameter int unsigned TRIG_OUT_LEN = 8,
  parameter int unsigned CAL_CNT_W    = 16,
  localparam int unsigned CAL_PW      = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // trigger ports
  input  logic [NUM_PORTS-1:0]                trig_in,
  output logic [NUM_PORTS-1:0]                trig_out,
  // processor side
  input  logic [NUM_PORTS-1:0][NUM_PORTS-1:0] route_map,
  input  thub_pkg::rec_cfg_t                            rec_cfg,
  input  logic                                arm,
  input  logic                                stop,
  input  logic                                sw_trig,
  input  logic                                ext_trig,
  output logic [thub_pkg::SAMPLE_W-1:0]       m_axis_tdata,
  output logic                                m_axis_tvalid,
  input  logic                                m_axis_tready,
  output logic                                m_axis_tlast,
  output thub_pkg::trig_src_t                 m_axis_tuser,
  output logic                                rec_trig_out,
  output thub_pkg::rec_state_e                rec_state,
  output logic [31:0]                         event_count,
  output logic [thub_pkg::CNT_W-1:0]          pre_len,
  // line calibration
  input  logic                                cal_start,
  input  logic [CAL_PW-1:0]                   cal_tx_port,
  input  logic [CAL_PW-1:0]                   cal_rx_port,
  output logic                                cal_busy,
  output logic                                cal_done,
  output logic                                cal_timed_out,
  output logic [CAL_CNT_W-1:0]                cal_round_trip
);

  logic [NUM_PORTS-1:0] plex_out, cal_pulse;

  trig_plex #(.NUM_PORTS(NUM_PORTS)) u_plex (
    .trig_in, .route_map, .trig_out(plex_out)
  );

  // a calibration trigger leaves on its port together with dispatched ones
  assign trig_out = plex_out | cal_pulse;

  logic [thub_pkg::SAMPLE_W-1:0] smp_tdata;
  logic                smp_tvalid;

  trig_capture #(
    .NUM_PORTS   (NUM_PORTS),
    .ADC_BITS    (thub_pkg::ADC_BITS),
    .SAMPLE_W    (thub_pkg::SAMPLE_W),
    .SYNC_STAGES (SYNC_STAGES)
  ) u_cap (
    .clk, .rst_n,
    .trig_lines (trig_in),
    .m_tdata    (smp_tdata),
    .m_tvalid   (smp_tvalid)
  );

  self_cal #(
    .NUM_PORTS (NUM_PORTS),
    .PULSE_LEN (TRIG_OUT_LEN),
    .CNT_W     (CAL_CNT_W),
    .TIMEOUT   ((1 << CAL_CNT_W) - 1)
  ) u_cal (
    .clk, .rst_n,
    .start      (cal_start),
    .tx_port    (cal_tx_port),
    .rx_port    (cal_rx_port),
    .rx_lines   (smp_tdata[NUM_PORTS-1:0]),
    .pulse      (cal_pulse),
    .busy       (cal_busy),
    .done       (cal_done),
    .timed_out  (cal_timed_out),
    .round_trip (cal_round_trip)
  );

  transient_recorder #(
    .DEPTH        (DEPTH),
    .DATA_W       (thub_pkg::SAMPLE_W),
    .TRIG_OUT_LEN (TRIG_OUT_LEN)
  ) u_rec (
    .clk, .rst_n,
    .s_tdata     (smp_tdata),
    .s_tvalid    (smp_tvalid),
    .cfg         (rec_cfg),
    .arm, .stop, .ext_trig, .sw_trig,
    .m_tdata     (m_axis_tdata),
    .m_tvalid    (m_axis_tvalid),
    .m_tready    (m_axis_tready),
    .m_tlast     (m_axis_tlast),
    .m_tuser     (m_axis_tuser),
    .trig_out    (rec_trig_out),
    .state       (rec_state),
    .event_count,
    .pre_len
  );

endmodule
