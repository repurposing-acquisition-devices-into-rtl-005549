// tb_thub_top: end-to-end test of a tree of three Timing Hubs.
//
// Topology (as in the facility the hub was built for):
//   HUB1 (root)  port0 <-> HUB2 port0 over a 450 ns (100 m) link,
//                port1 <-> D1 over 140 ns (30 m), port2 <-> D2 over 280 ns;
//   HUB2         port1 <-> HUB3 port0 over 225 ns, port2/3 <-> D3/D4 over 140 ns;
//   HUB3         port1 <-> D5 over 140 ns.
// Each hub runs on its own 125 MHz clock with its own phase, as independent
// boards do. Devices answer an external trigger after 100 ns and a local
// (threshold) event after 85 ns + one 8 ns sample. All hubs use the default
// parameters (16384-sample buffer); the recorders run with threshold 0,
// hold 1, 64 pre- and 512 post-trigger samples, multi-trigger on.
//
// Two breakdown scenarios are played. In the first D1, D3 and D2 see local
// events 0, 100 and 200 ns apart; in the second only D5, at the far leaf,
// does. Every window read out of every hub is turned into per-port relative
// times with the reconstruction rule of the hub method (first rising edge of
// each bit, counted from the first non-parent bit, in 8 ns samples) and
// compared with times worked out here from the link and device delays. The
// back-projection t_true = t_s - (t_dl + t_p) is then applied to recover the
// 100 ns and 200 ns separations of the local events, also across hubs.
//
// Mechanisms counted (each must occur): dispatch to other ports, blocked
// reflection to the arriving port, level-triggered recording, automatic
// re-arm (two windows per hub), parent-port masking, readout backpressure
// (HUB2), recorder trigger-out pulses, cross-hub reconstruction and three
// line calibrations by HUB1's round-trip unit (D1, D2, and the HUB2 link
// answered by HUB2's devices), done before the recorders are armed.
module tb_thub_top;
  import thub_pkg::*;

  localparam int NP = 6;
  // delays in ns (time unit 1 ns)
  localparam int T_DEV   = 140;
  localparam int T_DEV2  = 280;
  localparam int T_L12   = 450;
  localparam int T_L23   = 225;
  localparam int DTH     = 93;
  localparam int DTR     = 100;
  localparam int PRE = 64, POST = 512;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------- clocks
  logic [2:0] clk = '0;
  logic rst_n = 1;
  initial forever #4 clk[0] = ~clk[0];
  initial begin #2.7; forever #4 clk[1] = ~clk[1]; end
  initial begin #5.1; forever #4 clk[2] = ~clk[2]; end

  // ------------------------------------------------------------- hubs
  logic [2:0][NP-1:0] h_in, h_out;
  logic [NP-1:0][NP-1:0] map_all;
  rec_cfg_t rcfg;
  logic [2:0] arm = '0, tready;
  logic [2:0][15:0] tdata;
  logic [2:0] tvalid, tlast, rtout;
  trig_src_t [2:0] tuser;
  rec_state_e [2:0] rstate;
  logic [2:0][31:0] evcnt;
  logic [2:0][CNT_W-1:0] prel;

  logic [2:0] cal_start = '0, cal_busy, cal_done, cal_to;
  logic [2:0][2:0] cal_tx = '0, cal_rx = '0;
  logic [2:0][15:0] cal_rt;

  assign map_all = '1;

  for (genvar h = 0; h < 3; h++) begin : g_hub
    thub_top u_hub (
      .clk(clk[h]), .rst_n,
      .trig_in(h_in[h]), .trig_out(h_out[h]),
      .route_map(map_all), .rec_cfg(rcfg),
      .arm(arm[h]), .stop(1'b0), .sw_trig(1'b0), .ext_trig(1'b0),
      .m_axis_tdata(tdata[h]), .m_axis_tvalid(tvalid[h]), .m_axis_tready(tready[h]),
      .m_axis_tlast(tlast[h]), .m_axis_tuser(tuser[h]),
      .rec_trig_out(rtout[h]), .rec_state(rstate[h]), .event_count(evcnt[h]), .pre_len(prel[h]),
      .cal_start(cal_start[h]), .cal_tx_port(cal_tx[h]), .cal_rx_port(cal_rx[h]),
      .cal_busy(cal_busy[h]), .cal_done(cal_done[h]), .cal_timed_out(cal_to[h]),
      .cal_round_trip(cal_rt[h]));
  end

  // ------------------------------------------------------ links, devices
  logic [5:1] d_in, d_out;
  device_model #(.DTH_NS(DTH), .DTR_NS(DTR)) d1 (.trig_in(d_in[1]), .trig_out(d_out[1]));
  device_model #(.DTH_NS(DTH), .DTR_NS(DTR)) d2 (.trig_in(d_in[2]), .trig_out(d_out[2]));
  device_model #(.DTH_NS(DTH), .DTR_NS(DTR)) d3 (.trig_in(d_in[3]), .trig_out(d_out[3]));
  device_model #(.DTH_NS(DTH), .DTR_NS(DTR)) d4 (.trig_in(d_in[4]), .trig_out(d_out[4]));
  device_model #(.DTH_NS(DTH), .DTR_NS(DTR)) d5 (.trig_in(d_in[5]), .trig_out(d_out[5]));

  // HUB1 <-> HUB2
  fiber_link #(.DELAY_NS(T_L12)) l12 (.in(h_out[0][0]), .out(h_in[1][0]));
  fiber_link #(.DELAY_NS(T_L12)) l21 (.in(h_out[1][0]), .out(h_in[0][0]));
  // HUB2 <-> HUB3
  fiber_link #(.DELAY_NS(T_L23)) l23 (.in(h_out[1][1]), .out(h_in[2][0]));
  fiber_link #(.DELAY_NS(T_L23)) l32 (.in(h_out[2][0]), .out(h_in[1][1]));
  // devices
  fiber_link #(.DELAY_NS(T_DEV))  f1o (.in(h_out[0][1]), .out(d_in[1]));
  fiber_link #(.DELAY_NS(T_DEV))  f1i (.in(d_out[1]),    .out(h_in[0][1]));
  fiber_link #(.DELAY_NS(T_DEV2)) f2o (.in(h_out[0][2]), .out(d_in[2]));
  fiber_link #(.DELAY_NS(T_DEV2)) f2i (.in(d_out[2]),    .out(h_in[0][2]));
  fiber_link #(.DELAY_NS(T_DEV))  f3o (.in(h_out[1][2]), .out(d_in[3]));
  fiber_link #(.DELAY_NS(T_DEV))  f3i (.in(d_out[3]),    .out(h_in[1][2]));
  fiber_link #(.DELAY_NS(T_DEV))  f4o (.in(h_out[1][3]), .out(d_in[4]));
  fiber_link #(.DELAY_NS(T_DEV))  f4i (.in(d_out[4]),    .out(h_in[1][3]));
  fiber_link #(.DELAY_NS(T_DEV))  f5o (.in(h_out[2][1]), .out(d_in[5]));
  fiber_link #(.DELAY_NS(T_DEV))  f5i (.in(d_out[5]),    .out(h_in[2][1]));
  assign h_in[0][5:3] = '0;
  assign h_in[1][5:4] = '0;
  assign h_in[2][5:2] = '0;

  // ------------------------------------------------------------ monitors
  int n_dispatch = 0, n_noreflect = 0, n_bp = 0, n_rtout = 0, n_masked = 0, n_cross = 0;
  logic [15:0] win [3][$];     // window being collected, per hub
  int nwin [3];
  logic [15:0] done_win [3][2][$];

  for (genvar h = 0; h < 3; h++) begin : g_mon
    logic rt_q = 0;
    always @(posedge clk[h]) if (rst_n) begin
      for (int p = 0; p < NP; p++) begin
        // a trigger on port p alone must come out of no port but the others
        if (h_in[h] == (NP'(1) << p)) begin
          if (h_out[h][p]) begin
            failures++; checks++;
            $display("FAIL hub %0d reflected port %0d", h + 1, p);
          end else n_noreflect++;
          if ((h_out[h] & ~(NP'(1) << p)) != '0) n_dispatch++;
        end
      end
      if (tvalid[h] && !tready[h]) n_bp++;
      if (rtout[h] && !rt_q) n_rtout++;
      rt_q <= rtout[h];
      if (tvalid[h] && tready[h]) begin
        win[h].push_back(tdata[h]);
        if (tlast[h]) begin
          if (nwin[h] < 2) done_win[h][nwin[h]] = win[h];
          nwin[h]++;
          win[h].delete();
        end
      end
    end
  end
  // random backpressure on HUB2's stream only
  always @(negedge clk[1]) tready[1] <= ($urandom % 3) != 0;
  assign tready[0] = 1'b1;
  assign tready[2] = 1'b1;

  // ---------------------------------------------------- reconstruction
  // First rising edge of every bit, in samples from the first non-parent
  // bit (parent < 0: no parent). Bits never seen give -1.
  typedef int times_t [NP];
  function automatic times_t rel_times(ref logic [15:0] w [$], input int parent);
    times_t t;
    logic [NP-1:0] mask = (parent >= 0) ? (NP'(1) << parent) : '0;
    int first = -1;
    for (int i = 0; i < NP; i++) t[i] = -1;
    for (int id = 0; id < w.size(); id++) begin
      logic [NP-1:0] nb = w[id][NP-1:0] & ~mask;
      if (nb != '0) begin
        mask |= nb;
        for (int i = 0; i < NP; i++)
          if (nb[i]) begin
            if (first < 0) first = id;
            t[i] = id - first;
          end
      end
    end
    return t;
  endfunction

  // relative time of one bit against a reference bit, parent included, in ns
  function automatic int edge_ns(ref logic [15:0] w [$], input int bit_i);
    for (int id = 0; id < w.size(); id++)
      if (w[id][bit_i]) return id * SAMPLE_NS;
    return -1000000;
  endfunction

  function automatic bit near(input int meas_ns, input int exp_ns, input int tol_ns);
    return (meas_ns - exp_ns < tol_ns) && (exp_ns - meas_ns < tol_ns);
  endfunction

  task automatic chk_t(input int meas_samples, input int exp_ns, input string what);
    chk(meas_samples >= 0 && near(meas_samples * SAMPLE_NS, exp_ns, SAMPLE_NS),
        $sformatf("%s: %0d ns, exp %0d ns", what, meas_samples * SAMPLE_NS, exp_ns));
  endtask

  // ---------------------------------------------------------- watchdog
  initial begin
    #800_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Round-trip measurement from HUB1 out of port tx back on port rx; the
  // result in clocks is converted with round_trip = ceil(RT/8) + 1 (two
  // synchronizer stages) and compared with the physical round trip.
  int n_cal = 0;
  task automatic calibrate(input int tx, input int rx, input int rt_ns, input string what);
    @(negedge clk[0]); cal_tx[0] = 3'(tx); cal_rx[0] = 3'(rx); cal_start[0] = 1;
    @(negedge clk[0]); cal_start[0] = 0;
    wait (cal_done[0]);
    @(negedge clk[0]);
    chk(!cal_to[0], {what, ": no timeout"});
    begin
      int est;
      est = (int'(cal_rt[0]) - 1) * SAMPLE_NS;
      chk(est >= rt_ns && est - rt_ns < SAMPLE_NS,
          $sformatf("%s: measured %0d ns (%0d clocks), physical %0d ns", what, est, cal_rt[0], rt_ns));
    end
    n_cal++;
    #50_000;   // devices dead time
  endtask

  // ------------------------------------------------------------- main
  initial begin
    times_t t1, t2, t3;
    localparam int dth = DTH, dtr = DTR, dv = T_DEV, dv2 = T_DEV2;
    localparam int l12 = T_L12, l23 = T_L23;
    rcfg = '0;
    rcfg.trig.lvl_en = 1'b1; rcfg.trig.threshold = '0; rcfg.trig.hold = CNT_W'(1);
    rcfg.pre = CNT_W'(PRE); rcfg.post = CNT_W'(POST); rcfg.multi = 1'b1;
    #1 rst_n = 0;
    #100 rst_n = 1;
    // outputs are undefined until reset reaches them and may have fired the
    // devices: wait out their dead time first
    #50_000;
    // ---------------- line calibration from the root hub (M2 and M1 + M2)
    calibrate(1, 1, 2 * dv + dtr, "cal D1");
    calibrate(2, 2, 2 * dv2 + dtr, "cal D2");
    calibrate(0, 0, 2 * l12 + 2 * dv + dtr, "cal HUB2 link via D3/D4");
    for (int h = 0; h < 3; h++) begin
      @(negedge clk[h]) arm[h] = 1;
      @(negedge clk[h]) arm[h] = 0;
    end

    // ---------------- scenario 1: local events on D1, D3 (+100), D2 (+200)
    #20_000;
    fork
      d1.local_event();
      begin #100; d3.local_event(); end
      begin #200; d2.local_event(); end
    join
    wait (nwin[0] >= 1 && nwin[1] >= 1 && nwin[2] >= 1);
    chk(d1.cause && d2.cause && d3.cause && !d4.cause && !d5.cause, "scenario 1 trigger causes");

    // HUB1 (root): D1 first, D2 +340 ns, port0 (D3 via HUB2) +550 ns
    t1 = rel_times(done_win[0][0], -1);
    chk_t(t1[1], 0, "S1 HUB1 D1");
    chk_t(t1[2], (200 + dth + dv2) - (dth + dv), "S1 HUB1 D2");
    chk_t(t1[0], (100 + dth + dv + l12) - (dth + dv), "S1 HUB1 port0");
    // back-projection on HUB1: D2 - D1 and D3 - D1
    chk(near((t1[2] * SAMPLE_NS - (dv2 + dth)) - (t1[1] * SAMPLE_NS - (dv + dth)), 200, SAMPLE_NS),
        "S1 true(D2)-true(D1) = 200 ns");
    chk(near((t1[0] * SAMPLE_NS - (l12 + dv + dth)) - (t1[1] * SAMPLE_NS - (dv + dth)), 100, SAMPLE_NS),
        "S1 true(D3)-true(D1) = 100 ns from root");
    // HUB2 (parent port 0 masked): D3 first, D4 echo +380, HUB3 echo +830
    t2 = rel_times(done_win[1][0], 0);
    chk(t2[0] == -1, "S1 HUB2 parent port masked");
    n_masked++;
    chk_t(t2[2], 0, "S1 HUB2 D3");
    chk_t(t2[3], dv + dtr + dv, "S1 HUB2 D4 echo");
    chk_t(t2[1], l23 + dv + dtr + dv + l23, "S1 HUB2 port1 (HUB3 echo)");
    // cross-hub: D1 seen by HUB2 through its parent port
    begin
      int p0;
      p0 = edge_ns(done_win[1][0], 0) - edge_ns(done_win[1][0], 2);
      chk(near(p0, (dth + dv + l12) - (100 + dth + dv), SAMPLE_NS), $sformatf("S1 HUB2 parent edge %0d", p0));
      chk(near((0 - (dv + dth)) - (p0 - l12 - (dv + dth)), 100, SAMPLE_NS),
          "S1 true(D3)-true(D1) = 100 ns from child");
      n_cross++;
    end
    // HUB3: D5 echo only
    t3 = rel_times(done_win[2][0], 0);
    chk_t(t3[1], 0, "S1 HUB3 D5");
    chk(near(edge_ns(done_win[2][0], 1) - edge_ns(done_win[2][0], 0), dv + dtr + dv, SAMPLE_NS),
        "S1 HUB3 D5 round trip");

    // ---------------- scenario 2: local event on D5 only (after dead time)
    #60_000;
    d5.local_event();
    wait (nwin[0] >= 2 && nwin[1] >= 2 && nwin[2] >= 2);
    chk(d5.cause && !d1.cause && !d2.cause && !d3.cause && !d4.cause, "scenario 2 trigger causes");
    t1 = rel_times(done_win[0][1], -1);
    chk_t(t1[0], 0, "S2 HUB1 port0 first");
    chk_t(t1[1], dv + dtr + dv, "S2 HUB1 D1 echo");
    chk_t(t1[2], dv2 + dtr + dv2, "S2 HUB1 D2 echo");
    t2 = rel_times(done_win[1][1], 0);
    chk_t(t2[1], 0, "S2 HUB2 port1 first");
    chk_t(t2[2], dv + dtr + dv, "S2 HUB2 D3 echo");
    chk_t(t2[3], dv + dtr + dv, "S2 HUB2 D4 echo");
    t3 = rel_times(done_win[2][1], 0);
    chk_t(t3[1], 0, "S2 HUB3 D5");
    // D5's event placed in the root time base: HUB1 port0 edge minus the
    // chain delay must land dth+dv+l23+l12 earlier, i.e. D1's echo at
    // port0 + 2*dv + dtr in the root window
    chk(near(edge_ns(done_win[0][1], 1) - edge_ns(done_win[0][1], 0), dv + dtr + dv, SAMPLE_NS),
        "S2 root echo");
    begin
      int c, r;
      c = edge_ns(done_win[1][1], 1) - (l23 + dv + dth);  // true(D5) in HUB2 base
      r = edge_ns(done_win[1][1], 2) - (dv + dtr + dv);   // HUB2 dispatch instant
      chk(near(r - c, l23 + dv + dth, SAMPLE_NS), "S2 D5 back-projected through HUB3 link");
      n_cross++;
    end
    chk(evcnt[0] == 2 && evcnt[1] == 2 && evcnt[2] == 2, "two events per hub (re-arm)");
    for (int h = 0; h < 3; h++) chk(prel[h] == CNT_W'(PRE), $sformatf("hub %0d pre_len", h + 1));

    chk(n_dispatch > 0,  "dispatch seen");
    chk(n_noreflect > 0, "blocked reflection seen");
    chk(n_bp > 0,        "backpressure seen");
    chk(n_rtout == 6,    $sformatf("recorder trigger-out pulses %0d", n_rtout));
    chk(n_masked > 0,    "parent masking used");
    chk(n_cross == 2,    "cross-hub reconstruction");
    chk(n_cal == 3,      "line calibrations");
    $display("mechanisms: dispatch=%0d noreflect=%0d backpressure=%0d rec_trig_out=%0d windows=%0d/%0d/%0d masked=%0d cross=%0d cal=%0d",
             n_dispatch, n_noreflect, n_bp, n_rtout, nwin[0], nwin[1], nwin[2], n_masked, n_cross, n_cal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
