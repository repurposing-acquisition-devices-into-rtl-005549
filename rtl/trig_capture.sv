// trig_capture: samples the hub trigger lines in place of the ADC bus.
//
// In the hub the parallel bus of the board's 14-bit ADC is rerouted to the
// LVDS trigger inputs, so the recorder sees, instead of an analog sample, a
// bit field holding the state of every trigger line. This block is that
// capture path: the NUM_PORTS asynchronous trigger lines pass a SYNC_STAGES
// flip-flop synchronizer clocked by the 125 MHz sample clock and are emitted
// as one AXI-Stream sample per clock, bit i of the sample being port i.
// Bits above NUM_PORTS, up to the ADC width, read zero, and the word is
// zero-extended to SAMPLE_W bits.
//
// Interface: trig_lines (asynchronous levels) in, m_tdata/m_tvalid out.
// There is no tready: like an ADC the source cannot be stalled.
// Timing: a level change on trig_lines appears on m_tdata SYNC_STAGES clock
// cycles later. m_tvalid is low while reset is asserted and high afterwards.
// The bit order and the synchronizer depth are this design's choices; the
// source gives only the rerouting of six lines onto the ADC bus.
module trig_capture #(
  parameter int unsigned NUM_PORTS   = thub_pkg::NUM_PORTS,
  parameter int unsigned ADC_BITS    = thub_pkg::ADC_BITS,
  parameter int unsigned SAMPLE_W    = thub_pkg::SAMPLE_W,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_PORTS-1:0] trig_lines,
  output logic [SAMPLE_W-1:0]  m_tdata,
  output logic                 m_tvalid
);

  logic [SYNC_STAGES-1:0][NUM_PORTS-1:0] sync_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q   <= '0;
      m_tvalid <= 1'b0;
    end else begin
      sync_q[0] <= trig_lines;
      for (int unsigned s = 1; s < SYNC_STAGES; s++) sync_q[s] <= sync_q[s-1];
      m_tvalid <= 1'b1;
    end
  end

  // ADC-bus word: trigger bits at the bottom, unused ADC bits zero.
  logic [ADC_BITS-1:0] bus_word;
  always_comb begin
    bus_word = '0;
    bus_word[NUM_PORTS-1:0] = sync_q[SYNC_STAGES-1];
  end

  assign m_tdata = SAMPLE_W'(bus_word);

  initial begin
    assert (NUM_PORTS <= ADC_BITS) else $error("trig_capture: more ports than ADC bits");
    assert (ADC_BITS <= SAMPLE_W)  else $error("trig_capture: ADC wider than sample word");
    assert (SYNC_STAGES >= 1)      else $error("trig_capture: SYNC_STAGES must be >= 1");
  end

endmodule
