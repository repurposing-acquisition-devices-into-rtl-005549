// tb_rec_buffer: self-checking test of the circular sample buffer.
//
// Fills the memory with random words, keeping a copy in a testbench array,
// overwrites part of it, then reads random addresses with a random read
// enable, checking the one-cycle registered read and that rdata holds while
// re is low. Also checks read-during-write of the same address returns the
// old word.
module tb_rec_buffer;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  rec_buffer #(.DEPTH(DEPTH), .DATA_W(16)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #4 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] expect_q;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = 16'($urandom); model[a] = wdata;
    end
    // random overwrite
    for (int k = 0; k < 100; k++) begin
      @(negedge clk); we = 1; waddr = AW'($urandom); wdata = 16'($urandom); model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    // first read
    re = 1; raddr = '0;
    @(negedge clk);
    expect_q = model[0];
    for (int k = 0; k < 4000; k++) begin
      checks++;
      if (rdata !== expect_q) begin
        failures++; $display("FAIL read %0d: %h exp %h", k, rdata, expect_q);
      end
      // next access
      re = ($urandom % 4) != 0;
      raddr = AW'($urandom);
      if (re) expect_q = model[raddr];
      @(negedge clk);
    end
    // read-during-write, same address: old word
    re = 1; we = 1; raddr = 8'd7; waddr = 8'd7; wdata = ~model[7];
    expect_q = model[7]; model[7] = wdata;
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== expect_q) begin failures++; $display("FAIL read-during-write %h exp %h", rdata, expect_q); end
    re = 1; @(negedge clk);
    checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL new word %h exp %h", rdata, model[7]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
