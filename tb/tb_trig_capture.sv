// tb_trig_capture: self-checking test of the trigger-line capture path.
//
// Drives random trigger levels every clock and checks that each sample word
// carries, in bits 5:0, the line levels of exactly SYNC_STAGES clocks before,
// with all upper bits zero, and that the sample stream is valid on every
// clock after reset. The latency is checked by delaying the stimulus in a
// shift register kept by the testbench.
module tb_trig_capture;
  localparam int unsigned N = 6;
  localparam int unsigned STAGES = 2;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset
  logic [N-1:0]  lines = '0;
  logic [15:0]   m_tdata;
  logic          m_tvalid;
  logic [N-1:0]  hist [STAGES];
  int checks = 0, failures = 0, cyc = 0;

  trig_capture #(.NUM_PORTS(N), .ADC_BITS(14), .SAMPLE_W(16), .SYNC_STAGES(STAGES)) dut (
    .clk, .rst_n, .trig_lines(lines), .m_tdata, .m_tvalid);

  always #4 clk = ~clk;  // 125 MHz

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < STAGES; s++) hist[s] = '0;
    repeat (3) @(posedge clk);
    checks++;
    if (m_tvalid !== 1'b0) begin failures++; $display("FAIL valid during reset"); end
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      if (k > 0) begin
        checks++;
        if (!m_tvalid) begin failures++; $display("FAIL m_tvalid low at %0d", k); end
      end
      if (k >= STAGES) begin
        checks++;
        if (m_tdata !== {10'b0, hist[STAGES-1]}) begin
          failures++; $display("FAIL sample %0d: %h exp %h", k, m_tdata, hist[STAGES-1]);
        end
      end
      // new stimulus, recorded in the reference delay line
      for (int s = STAGES-1; s > 0; s--) hist[s] = hist[s-1];
      lines   = N'($urandom);
      hist[0] = lines;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
