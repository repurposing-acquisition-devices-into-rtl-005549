// tb_transient_recorder: self-checking test of the transient recorder.
//
// The sample stream carries its own index: bits 14:0 are the running number
// of the valid sample and bit 15 is a marker the testbench sets to make the
// level trigger (threshold 0x7fff) fire. Each recorded window must therefore
// be the consecutive indices fire-pre_len .. fire+post-1, where the fire
// index and the expected pre-trigger length are worked out here from the
// stimulus: the fire sample is the hold-th marked sample, and pre_len is the
// smaller of the requested pre count and the samples written since arming.
//
// Mechanisms exercised and counted: single-shot and multi-trigger re-arm,
// short pre-trigger lock after an early trigger, duration check rejecting a
// glitch, external and software triggers, output backpressure, gaps in the
// input stream, stop while armed, clamping of oversize windows, buffer
// wrap-around, the trigger-out pulse (width and delay) and the readout
// length (window + 1 cycles without backpressure).
module tb_transient_recorder;
  import thub_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned TOL   = 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  logic [15:0] s_tdata = '0;
  logic s_tvalid = 0;
  rec_cfg_t cfg;
  logic arm = 0, stop = 0, ext_trig = 0, sw_trig = 0;
  logic [15:0] m_tdata;
  logic m_tvalid, m_tready = 1, m_tlast, trig_out;
  trig_src_t m_tuser;
  rec_state_e state;
  logic [31:0] event_count;
  logic [CNT_W-1:0] pre_len;

  transient_recorder #(.DEPTH(DEPTH), .DATA_W(16), .TRIG_OUT_LEN(TOL)) dut (
    .clk, .rst_n, .s_tdata, .s_tvalid, .cfg, .arm, .stop, .ext_trig, .sw_trig,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast, .m_tuser,
    .trig_out, .state, .event_count, .pre_len);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%0d] %s", cyc, what); end
  endtask

  // ------------------------------------------------------------ stimulus
  int  t_next = 0;          // index of the next valid sample
  int  flag_left = 0;       // marked valid samples still to send
  int  t_flag0 = -1;        // index of the first marked sample
  int  ext_left = 0;
  int  t_ext0 = -1;         // index of the first sample with ext_trig high
  bit  gaps = 0, bp = 0;
  int  t_first = 0;         // first index written after (re)arming
  int  cyc_of_t [int];      // cycle in which each index was presented

  always @(negedge clk) begin
    s_tvalid <= gaps ? (($urandom % 3) != 0) : 1'b1;
    m_tready <= bp ? (($urandom % 2) != 0) : 1'b1;
    ext_trig <= (ext_left > 0);
    if (ext_left > 0) ext_left <= ext_left - 1;
  end
  // data follows the valid decision made at the same edge
  always @(negedge clk) begin
    #1;
    if (s_tvalid) begin
      s_tdata = {1'b0, 15'(t_next)};
      if (flag_left > 0) begin
        s_tdata[15] = 1'b1;
        if (t_flag0 < 0) t_flag0 = t_next;
        flag_left--;
      end
      if (ext_trig && t_ext0 < 0) t_ext0 = t_next;
      cyc_of_t[t_next] = cyc;
      t_next++;
    end else begin
      s_tdata = 16'hdead;  // never recorded
    end
  end

  // ------------------------------------------------------------ monitors
  logic [15:0] beat_d [$];
  logic        beat_l [$];
  trig_src_t   beat_u [$];
  int read_cycles = 0, tout_high = 0, tout_rise_cyc = -1;
  logic tout_q = 0;
  always @(posedge clk) begin
    if (m_tvalid && m_tready) begin
      beat_d.push_back(m_tdata); beat_l.push_back(m_tlast); beat_u.push_back(m_tuser);
      if (m_tlast && cfg.multi) t_first = t_next;
    end
    if (state == REC_READ) read_cycles++;
    if (trig_out) tout_high++;
    if (trig_out && !tout_q) tout_rise_cyc = cyc;
    tout_q <= trig_out;
  end

  // mechanism counters
  int n_single = 0, n_rearm = 0, n_short_pre = 0, n_glitch = 0, n_ext = 0, n_sw = 0,
      n_bp = 0, n_gap = 0, n_stop = 0, n_clamp = 0, n_wrap = 0;

  task automatic arm_rec(input rec_cfg_t c);
    @(negedge clk); cfg = c; arm = 1;
    @(posedge clk); t_first = t_next;
    @(negedge clk); arm = 0;
  endtask

  task automatic wait_samples(input int n);
    int target = t_next + n;
    while (t_next < target) @(negedge clk);
  endtask

  // Collect one window and check it against the expected indices.
  task automatic expect_window(input int t_fire, input int pre_exp, input int post,
                               input trig_src_t src, input int ev, input string what);
    int n = pre_exp + post;
    int guard = 0;
    while (beat_d.size() < n && guard < 20000) begin @(posedge clk); guard++; end
    repeat (2) @(posedge clk);
    chk(beat_d.size() == n, $sformatf("%s: %0d beats, exp %0d", what, beat_d.size(), n));
    for (int k = 0; k < n && k < beat_d.size(); k++) begin
      chk(beat_d[k] == {1'b0, 15'(t_fire - pre_exp + k)} || beat_d[k] == {1'b1, 15'(t_fire - pre_exp + k)},
          $sformatf("%s: beat %0d = %h exp index %0d", what, k, beat_d[k], t_fire - pre_exp + k));
      chk(beat_l[k] == (k == n - 1), $sformatf("%s: tlast at beat %0d", what, k));
      chk(beat_u[k] == src, $sformatf("%s: tuser %b exp %b", what, beat_u[k], src));
    end
    chk(pre_len == CNT_W'(pre_exp), $sformatf("%s: pre_len %0d exp %0d", what, pre_len, pre_exp));
    chk(event_count == 32'(ev), $sformatf("%s: event_count %0d exp %0d", what, event_count, ev));
    beat_d.delete(); beat_l.delete(); beat_u.delete();
  endtask

  localparam trig_src_t S_TH = '{sw:1'b0, tr:1'b0, th:1'b1};
  localparam trig_src_t S_TR = '{sw:1'b0, tr:1'b1, th:1'b0};
  localparam trig_src_t S_SW = '{sw:1'b1, tr:1'b0, th:1'b0};

  function automatic rec_cfg_t mk(input int pre, input int post, input int hold, input bit multi);
    rec_cfg_t c;
    c.trig.lvl_en = 1; c.trig.ext_en = 1; c.trig.threshold = 16'h7fff;
    c.trig.hold = CNT_W'(hold); c.pre = CNT_W'(pre); c.post = CNT_W'(post); c.multi = multi;
    return c;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_fire, ev = 0;
    cfg = mk(10, 20, 1, 0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (3) @(negedge clk);
    chk(state == REC_IDLE, "idle after reset");

    // A: single shot, level trigger, hold 1, readout timing, trigger-out
    arm_rec(mk(10, 20, 1, 0));
    wait_samples(30);
    t_flag0 = -1; flag_left = 3;
    wait (t_flag0 >= 0);
    t_fire = t_flag0;
    read_cycles = 0; tout_high = 0; tout_rise_cyc = -1;
    expect_window(t_fire, 10, 20, S_TH, ++ev, "single");
    chk(read_cycles == 30 + 1, $sformatf("single: READ lasted %0d cycles, exp 31", read_cycles));
    chk(tout_high == TOL, $sformatf("single: trig_out high %0d cycles", tout_high));
    chk(tout_rise_cyc == cyc_of_t[t_fire] + 1,
        $sformatf("single: trig_out rose at %0d, fire sample at %0d", tout_rise_cyc, cyc_of_t[t_fire]));
    chk(state == REC_IDLE, "single: idle after window");
    n_single++;

    // nothing recorded while idle
    flag_left = 4; wait_samples(20);
    chk(event_count == 32'(ev) && !m_tvalid, "idle ignores triggers");

    // B: early trigger, pre-trigger window locked shorter
    arm_rec(mk(10, 8, 1, 0));
    wait_samples(3);
    t_flag0 = -1; flag_left = 1;
    wait (t_flag0 >= 0);
    t_fire = t_flag0;
    expect_window(t_fire, t_fire - t_first, 8, S_TH, ++ev, "early");
    if (t_fire - t_first < 10) n_short_pre++;

    // C: hold 4, glitch of 2 rejected, pulse of 6 fires on its 4th sample
    arm_rec(mk(12, 10, 4, 0));
    wait_samples(20);
    flag_left = 2; wait_samples(6);
    chk(event_count == 32'(ev) && state == REC_ARMED, "glitch rejected");
    n_glitch++;
    t_flag0 = -1; flag_left = 6;
    wait (t_flag0 >= 0);
    t_fire = t_flag0 + 3;
    expect_window(t_fire, 12, 10, S_TH, ++ev, "hold4");

    // D: multi-trigger: two windows, automatic re-arm
    arm_rec(mk(6, 9, 1, 1));
    for (int k = 0; k < 2; k++) begin
      int tf;
      wait_samples(15);
      t_flag0 = -1; flag_left = 1;
      wait (t_flag0 >= 0);
      tf = t_flag0;
      expect_window(tf, (tf - t_first < 6) ? tf - t_first : 6, 9, S_TH, ++ev, "multi");
      chk(state == REC_ARMED || state == REC_CHECK, "multi: re-armed");
      n_rearm++;
    end
    // E: backpressure and gaps, still multi
    bp = 1; gaps = 1;
    begin
      int tf;
      wait_samples(20);
      t_flag0 = -1; flag_left = 1;
      wait (t_flag0 >= 0);
      tf = t_flag0;
      expect_window(tf, 6, 9, S_TH, ++ev, "backpressure+gaps");
      n_bp++; n_gap++;
    end
    bp = 0; gaps = 0;
    // stop while armed
    @(negedge clk) stop = 1; @(negedge clk) stop = 0;
    flag_left = 2; wait_samples(10);
    chk(state == REC_IDLE && event_count == 32'(ev), "stop returns to idle");
    n_stop++;

    // F: external trigger
    arm_rec(mk(5, 5, 2, 0));
    wait_samples(10);
    t_ext0 = -1;
    @(negedge clk); ext_left = 4;
    wait (t_ext0 >= 0);
    t_fire = t_ext0 + 1;                   // second ext sample fires with hold 2
    expect_window(t_fire, 5, 5, S_TR, ++ev, "external");
    n_ext++;

    // G: software trigger
    arm_rec(mk(5, 5, 1, 0));
    wait_samples(10);
    @(negedge clk); sw_trig = 1; #2; t_fire = t_next - 1;
    @(negedge clk); sw_trig = 0;
    expect_window(t_fire, 5, 5, S_SW, ++ev, "software");
    n_sw++;

    // H: oversize request clamped to the buffer: post 64, pre 0
    arm_rec(mk(1000, 1000, 1, 0));
    wait_samples(10);
    t_flag0 = -1; flag_left = 1;
    wait (t_flag0 >= 0);
    expect_window(t_flag0, 0, DEPTH, S_TH, ++ev, "clamp");
    n_clamp++;

    // I: full buffer window after wrap-around
    arm_rec(mk(DEPTH - 24, 24, 1, 0));
    wait_samples(3 * DEPTH + 5);
    t_flag0 = -1; flag_left = 1;
    wait (t_flag0 >= 0);
    expect_window(t_flag0, DEPTH - 24, 24, S_TH, ++ev, "wrap");
    n_wrap++;

    chk(n_single && n_rearm == 2 && n_short_pre && n_glitch && n_ext && n_sw && n_bp && n_gap
        && n_stop && n_clamp && n_wrap, "every mechanism exercised");
    $display("mechanisms: single=%0d rearm=%0d short_pre=%0d glitch=%0d ext=%0d sw=%0d bp=%0d gap=%0d stop=%0d clamp=%0d wrap=%0d",
             n_single, n_rearm, n_short_pre, n_glitch, n_ext, n_sw, n_bp, n_gap, n_stop, n_clamp, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
