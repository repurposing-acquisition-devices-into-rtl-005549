// thub_pkg: types and constants shared by the Timing Hub (THub) modules.
//
// A THub is a trigger multiplexer with a transient recorder connected in
// parallel. The recorder stores the logic state of every trigger line as one
// sample word per clock, so a stored window shows in which order, and how many
// sample periods apart, the triggers arrived.
//
// The constants below that come from the hub described in the source
// publication are the port count (six LVDS trigger inputs), the ADC width
// (14 bit) and the 125 MHz sample rate (8 ns per sample). Word widths of the
// configuration fields are this design's own choice.
package thub_pkg;

  // Number of trigger ports on one hub (six LVDS inputs).
  localparam int unsigned NUM_PORTS   = 6;
  // Width of the ADC parallel bus the trigger lines replace.
  localparam int unsigned ADC_BITS    = 14;
  // Width of one sample word on the AXI-Stream sample path.
  localparam int unsigned SAMPLE_W    = 16;
  // Sample period at 125 Msps, in ns.
  localparam int unsigned SAMPLE_NS   = 8;
  // Width of the sample-count configuration fields (pre, post, hold).
  localparam int unsigned CNT_W       = 24;

  // Which trigger source(s) caused a recorded event.
  // th: level (threshold) trigger, tr: external hardware trigger,
  // sw: software command.
  typedef struct packed {
    logic sw;
    logic tr;
    logic th;
  } trig_src_t;

  // Trigger-detector configuration.
  typedef struct packed {
    logic                  lvl_en;    // level trigger enable
    logic                  ext_en;    // external trigger enable
    logic [SAMPLE_W-1:0]   threshold; // level trigger fires when sample > threshold
    logic [CNT_W-1:0]      hold;      // N_th: samples the condition must last (0 = 1)
  } trig_cfg_t;

  // Recorder configuration.
  typedef struct packed {
    trig_cfg_t             trig;
    logic [CNT_W-1:0]      pre;       // requested pre-trigger samples
    logic [CNT_W-1:0]      post;      // post-trigger samples, trigger sample included
    logic                  multi;     // re-arm automatically after each transient
  } rec_cfg_t;

  // Recorder state machine.
  typedef enum logic [2:0] {
    REC_IDLE  = 3'd0,
    REC_ARMED = 3'd1,
    REC_CHECK = 3'd2,
    REC_POST  = 3'd3,
    REC_READ  = 3'd4
  } rec_state_e;

endpackage
