// rec_trigger: trigger condition and duration check of the transient recorder.
//
// Three sources can start a transient and are listened to at the same time:
//   th - level trigger: the sample, read as an unsigned number, is greater
//        than cfg.threshold. With threshold 0 any set bit fires, which is how
//        the hub records its trigger bit field;
//   tr - the external hardware trigger input, a level;
//   sw - a software command, a one-cycle pulse remembered until the event is
//        validated or the detector is disabled.
// The condition is the OR of the enabled sources. Before it is accepted it
// must hold for cfg.hold consecutive valid samples (N_th; 0 counts as 1):
// while it is being counted `checking` is high. On the sample that completes
// the count `fire` pulses for one cycle and `src` tells which sources were
// active on that sample. If the condition drops during the check the count
// restarts.
//
// Timing: `fire` and `hit` are combinational from the current sample, so the
// validated sample is the one presented in the cycle `fire` is high. With
// hold = N the event fires on the N-th consecutive sample of the condition,
// i.e. N-1 sample periods after the condition first appears, which is the
// N_th / f_s term of the threshold-trigger delay.
// ext_trig and sw_trig must be synchronous to clk.
// The source sets this sequence (condition, checking state, validation,
// recorded source); the strict greater-than comparison, the sticky software
// request and the check applied to every source are this design's choices.
module rec_trigger
  import thub_pkg::*;
#(
  parameter int unsigned DATA_W = SAMPLE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,        // armed: look for a trigger
  input  logic [DATA_W-1:0] sample,
  input  logic              sample_valid,
  input  logic              ext_trig,
  input  logic              sw_trig,
  input  trig_cfg_t         cfg,
  output logic              hit,           // condition true on this valid sample
  output logic              checking,      // condition seen, duration not yet reached
  output logic              fire,          // trigger validated on this sample
  output trig_src_t         src            // sources active on the validated sample
);

  logic [CNT_W-1:0] cnt;       // consecutive samples with the condition
  logic             sw_pend;
  logic [CNT_W-1:0] hold_eff;
  logic             c_th, c_tr;

  assign hold_eff = (cfg.hold == '0) ? CNT_W'(1) : cfg.hold;
  assign c_th     = cfg.lvl_en && (SAMPLE_W'(sample) > cfg.threshold);
  assign c_tr     = cfg.ext_en && ext_trig;
  assign hit      = enable && sample_valid && (c_th || c_tr || sw_pend || sw_trig);
  assign fire     = hit && ((cnt + 1'b1) >= hold_eff);
  assign checking = (cnt != '0);

  always_comb begin
    src    = '0;
    src.th = c_th;
    src.tr = c_tr;
    src.sw = sw_pend || sw_trig;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      sw_pend <= 1'b0;
    end else if (!enable || fire) begin
      cnt     <= '0;
      sw_pend <= 1'b0;
    end else begin
      if (sw_trig) sw_pend <= 1'b1;
      if (sample_valid) cnt <= hit ? cnt + 1'b1 : '0;
    end
  end

endmodule
