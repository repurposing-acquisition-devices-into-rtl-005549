// tb_rec_trigger: self-checking test of the trigger detector.
//
// Scenarios: level trigger with threshold 0 and hold 1 (fires on the first
// non-zero sample); hold 4 with a 3-sample glitch (rejected) and a longer
// pulse (fires on its 4th sample); invalid samples that must not advance the
// count; external trigger; a one-cycle software command that must survive
// a hold of 3; disabled detector; and disabled sources. Expected fire cycles
// and source flags are derived here from the scenario, not from the DUT.
module tb_rec_trigger;
  import thub_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  logic enable = 0, sample_valid = 0, ext_trig = 0, sw_trig = 0;
  logic [15:0] sample = '0;
  trig_cfg_t cfg;
  logic hit, checking, fire;
  trig_src_t src;
  int checks = 0, failures = 0;

  rec_trigger #(.DATA_W(16)) dut (.clk, .rst_n, .enable, .sample, .sample_valid,
    .ext_trig, .sw_trig, .cfg, .hit, .checking, .fire, .src);

  always #4 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Present one sample for one cycle; check fire (and src when firing).
  task automatic step(input logic [15:0] d, input logic v, input logic ex, input logic sw,
                      input logic exp_fire, input trig_src_t exp_src, input string what);
    @(negedge clk);
    sample = d; sample_valid = v; ext_trig = ex; sw_trig = sw;
    #1;
    checks++;
    if (fire !== exp_fire) begin
      failures++; $display("FAIL %s: fire=%b exp %b", what, fire, exp_fire);
    end
    if (exp_fire) begin
      checks++;
      if (src !== exp_src) begin failures++; $display("FAIL %s: src=%b exp %b", what, src, exp_src); end
    end
    @(posedge clk);
    #1;
  endtask

  localparam trig_src_t S_TH = '{sw:1'b0, tr:1'b0, th:1'b1};
  localparam trig_src_t S_TR = '{sw:1'b0, tr:1'b1, th:1'b0};
  localparam trig_src_t S_SW = '{sw:1'b1, tr:1'b0, th:1'b0};
  localparam trig_src_t S_NONE = '0;

  initial begin
    cfg = '{lvl_en:1'b1, ext_en:1'b1, threshold:16'h0, hold:24'd1};
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    enable = 1;
    // level trigger, hold 1
    step(16'h0, 1, 0, 0, 0, S_NONE, "idle zero");
    step(16'h0, 1, 0, 0, 0, S_NONE, "idle zero");
    step(16'h4, 1, 0, 0, 1, S_TH,   "bit 2 set fires");
    step(16'h0, 1, 0, 0, 0, S_NONE, "back to zero");
    // hold 4: 3-sample glitch rejected
    cfg.hold = 24'd4;
    step(16'h1, 1, 0, 0, 0, S_NONE, "glitch 1");
    checks++; if (!checking) begin failures++; $display("FAIL checking not raised"); end
    step(16'h1, 1, 0, 0, 0, S_NONE, "glitch 2");
    step(16'h1, 1, 0, 0, 0, S_NONE, "glitch 3");
    step(16'h0, 1, 0, 0, 0, S_NONE, "glitch end");
    checks++; if (checking) begin failures++; $display("FAIL checking not cleared"); end
    // long pulse with an invalid sample in between: fires on 4th valid
    step(16'h2, 1, 0, 0, 0, S_NONE, "pulse 1");
    step(16'h2, 1, 0, 0, 0, S_NONE, "pulse 2");
    step(16'h2, 0, 0, 0, 0, S_NONE, "pulse invalid");
    step(16'h2, 1, 0, 0, 0, S_NONE, "pulse 3");
    step(16'h2, 1, 0, 0, 1, S_TH,   "pulse 4 fires");
    step(16'h2, 1, 0, 0, 0, S_NONE, "after fire restarts count");
    step(16'h0, 1, 0, 0, 0, S_NONE, "zero");
    // threshold above the data: level source silent
    cfg.threshold = 16'h00ff; cfg.hold = 24'd1;
    step(16'h00ff, 1, 0, 0, 0, S_NONE, "equal to threshold");
    step(16'h0100, 1, 0, 0, 1, S_TH,   "above threshold");
    // external trigger, hold 2
    cfg.hold = 24'd2;
    step(16'h0, 1, 1, 0, 0, S_NONE, "ext 1");
    step(16'h0, 1, 1, 0, 1, S_TR,   "ext 2 fires");
    step(16'h0, 1, 0, 0, 0, S_NONE, "ext low");
    // ext disabled
    cfg.ext_en = 0;
    step(16'h0, 1, 1, 0, 0, S_NONE, "ext disabled");
    step(16'h0, 1, 1, 0, 0, S_NONE, "ext disabled");
    step(16'h0, 1, 1, 0, 0, S_NONE, "ext disabled");
    // software pulse remembered through hold 3
    cfg.hold = 24'd3;
    step(16'h0, 1, 0, 1, 0, S_NONE, "sw 1");
    step(16'h0, 1, 0, 0, 0, S_NONE, "sw 2");
    step(16'h0, 1, 0, 0, 1, S_SW,   "sw 3 fires");
    step(16'h0, 1, 0, 0, 0, S_NONE, "sw consumed");
    step(16'h0, 1, 0, 0, 0, S_NONE, "sw consumed");
    step(16'h0, 1, 0, 0, 0, S_NONE, "sw consumed");
    // disabled detector ignores everything and forgets a pending command
    cfg.ext_en = 1; cfg.threshold = 16'h0; cfg.hold = 24'd1;
    enable = 0;
    step(16'hffff, 1, 1, 1, 0, S_NONE, "disabled");
    step(16'hffff, 1, 1, 0, 0, S_NONE, "disabled");
    enable = 1;
    step(16'h0, 1, 0, 0, 0, S_NONE, "re-enabled, sw forgotten");
    // several sources at once
    step(16'h8, 1, 1, 0, 1, '{sw:1'b0, tr:1'b1, th:1'b1}, "th+tr");
    // random level stimulus against a reference count
    begin
      int run = 0;
      cfg.hold = 24'd3; cfg.ext_en = 0;
      step(16'h0, 1, 0, 0, 0, S_NONE, "reset run");
      for (int k = 0; k < 3000; k++) begin
        logic [15:0] d;
        logic ef;
        d = ($urandom % 3 == 0) ? 16'h0 : 16'($urandom % 64);
        run = (d != 0) ? run + 1 : 0;
        ef  = (run >= 3);
        if (ef) run = 0;
        step(d, 1, 0, 0, ef, S_TH, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
