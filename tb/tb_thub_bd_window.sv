// tb_thub_bd_window: one hub at its default size recording a full
// breakdown-length window.
//
// A breakdown transient lasts about 100 us; at 8 ns per sample that is 12500
// post-trigger samples. With 3884 pre-trigger samples the window fills the
// whole 16384-sample buffer. The six trigger lines are driven synchronously
// to the hub clock with a random sequence of rising and falling edges, so the
// content of every one of the 16384 recorded samples is known exactly: it is
// the line state two clocks (the synchronizer) before the sample was taken.
// The test checks every sample, tlast, the locked pre-trigger length, the
// readout length (window + 1 cycles with tready high), and the relative
// trigger times returned by the hub reconstruction rule.
module tb_thub_bd_window;
  import thub_pkg::*;

  localparam int NP = 6;
  localparam int PRE = 3884, POST = 12500, W = PRE + POST;

  logic clk = 0, rst_n = 1;
  always #4 clk = ~clk;

  logic [NP-1:0] lines = '0, tout;
  rec_cfg_t rcfg;
  logic arm = 0;
  logic [15:0] tdata;
  logic tvalid, tlast;
  trig_src_t tuser;
  rec_state_e st;
  logic rtout;
  logic [31:0] evc;
  logic [CNT_W-1:0] prel;

  thub_top dut (
    .clk, .rst_n, .trig_in(lines), .trig_out(tout), .route_map('1), .rec_cfg(rcfg),
    .arm, .stop(1'b0), .sw_trig(1'b0), .ext_trig(1'b0),
    .m_axis_tdata(tdata), .m_axis_tvalid(tvalid), .m_axis_tready(1'b1),
    .m_axis_tlast(tlast), .m_axis_tuser(tuser), .rec_trig_out(rtout),
    .rec_state(st), .event_count(evc), .pre_len(prel),
    .cal_start(1'b0), .cal_tx_port('0), .cal_rx_port('0),
    .cal_busy(), .cal_done(), .cal_timed_out(), .cal_round_trip());

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // line state applied in each cycle, by cycle number
  int cyc = 0;
  logic [NP-1:0] applied [int];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int first_edge [NP];
  int got = 0, read_cycles = 0, arm_cyc, trig_cyc;
  logic [15:0] beats [$];
  always @(posedge clk) begin
    if (rst_n && st == REC_READ) read_cycles++;
    if (rst_n && tvalid) beats.push_back(tdata);
  end

  initial begin
    rcfg = '0;
    rcfg.trig.lvl_en = 1'b1; rcfg.trig.hold = CNT_W'(1);
    rcfg.pre = CNT_W'(PRE); rcfg.post = CNT_W'(POST);
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    // quiet for more than the pre-trigger length, then first trigger on
    // port 3 and further edges at random on all lines
    for (int i = 0; i < NP; i++) first_edge[i] = -1;
    for (int k = 0; k < PRE + POST + 8000; k++) begin
      @(negedge clk);
      if (k == 5000) begin lines[3] = 1'b1; trig_cyc = cyc; end
      else if (k > 5000 && ($urandom % 50) == 0) lines[$urandom % NP] ^= 1'b1;
      applied[cyc] = lines;
    end
    wait (tvalid);
    wait (!tvalid && st == REC_IDLE);
    repeat (2) @(posedge clk);
    chk(beats.size() == W, $sformatf("window %0d samples, exp %0d", beats.size(), W));
    chk(prel == CNT_W'(PRE), "pre_len");
    chk(read_cycles == W + 1, $sformatf("readout %0d cycles, exp %0d", read_cycles, W + 1));
    chk(evc == 1, "one event");
    // sample j of the window holds the lines applied in cycle
    // trig_cyc - PRE + j (the trigger sample is the first one showing port 3)
    for (int j = 0; j < W && j < beats.size(); j++) begin
      int c;
      logic [NP-1:0] e;
      c = trig_cyc - PRE + j;
      e = applied.exists(c) ? applied[c] : '0;
      chk(beats[j] == {10'b0, e}, $sformatf("sample %0d = %h exp %h", j, beats[j], e));
    end
    // reconstruction: first rising edge of each line after the trigger
    begin
      logic [NP-1:0] m;
      int first;
      m = '0; first = -1;
      for (int j = 0; j < beats.size(); j++) begin
        logic [NP-1:0] nb;
        nb = beats[j][NP-1:0] & ~m;
        m |= nb;
        for (int i = 0; i < NP; i++) if (nb[i]) begin
          if (first < 0) first = j;
          first_edge[i] = (j - first) * SAMPLE_NS;
        end
      end
      chk(first == PRE, "first edge at the trigger sample");
      for (int i = 0; i < NP; i++) begin
        int exp_t;
        exp_t = -1;
        for (int c = trig_cyc; c < trig_cyc + POST; c++)
          if (applied[c][i] && (c == trig_cyc || !applied[c-1][i] || i == 3)) begin
            exp_t = (c - trig_cyc) * SAMPLE_NS; break;
          end
        if (i == 3) exp_t = 0;
        chk(first_edge[i] == exp_t, $sformatf("port %0d first edge %0d ns exp %0d", i, first_edge[i], exp_t));
      end
    end
    $display("window=%0d samples (%0d us), readout=%0d cycles", beats.size(), beats.size() * SAMPLE_NS / 1000, read_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
