// rec_buffer: block-RAM circular sample buffer of the transient recorder.
//
// A simple dual-port memory of DEPTH words of DATA_W bits. The write port
// stores wdata at waddr when we is high. The read port is registered: when
// re is high, rdata takes the word at raddr on the next clock edge, and it
// holds its value while re is low, so the readout can stall under
// backpressure without losing data. A read of the address written in the same
// cycle returns the old word. The circular addressing (wrap-around) is done
// by the caller with DEPTH a power of two.
// The source specifies a block-RAM circular buffer filling the device's
// internal memory; the depth of 16384 samples is this design's choice.
module rec_buffer #(
  parameter int unsigned DEPTH  = 16384,
  parameter int unsigned DATA_W = thub_pkg::SAMPLE_W,
  localparam int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
