// weight_mem: on-chip weight memory of one processing element (PE).
//
// Holds the DEPTH = NF*SF words of one PE, each word SIMD weights of WBITS
// bits (weight j of the word in bits [j*WBITS +: WBITS]). Address nf*SF + sf
// holds the weights that the PE applies, for its output channel nf*PE + pe, to
// input-vector fold sf. Because one such memory exists per PE, all PEs read
// their weights in the same cycle.
//
// The write port loads weights at run time from the host (one word per cycle,
// no handshake); the read port is synchronous with an enable, so that a stalled
// pipeline keeps its read data, as a block RAM with output enable does.
//
// On-chip weight storage partitioned per PE and loading weights at run time
// follow the paper; the word layout and the write port are this design's.
module weight_mem #(
  parameter int SIMD  = 16,
  parameter int WBITS = 4,
  parameter int DEPTH = 1024,
  localparam int WW   = SIMD * WBITS,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [WW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [WW-1:0] rdata
);

  logic [WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
