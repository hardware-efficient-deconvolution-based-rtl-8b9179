// threshold_unit: multi-threshold activation of one processing element.
//
// A quantized ReLU (or any monotonic quantized activation) with ABITS output
// bits is a staircase with NT = 2^ABITS - 1 steps. This unit stores, for each
// of the NF output channels that its PE computes, NT ascending thresholds of
// ACC_BITS signed bits, and maps an accumulator value to the number of
// thresholds it reaches: act = #{ i : acc >= thr[i] }, a value 0 .. NT.
//
// Write port: threshold wt of channel slot wnf, one per cycle, loaded at run
// time. Read: the thresholds of slot rnf are fetched synchronously when re is
// high (one cycle ahead of use, like the weights); the comparison itself is
// combinational from acc to act.
//
// That activations are quantized by thresholds exported after training follows
// the paper; the storage layout, the ">=" rule and run-time loading are this
// design's choices.
module threshold_unit #(
  parameter int NF       = 16,
  parameter int ABITS    = 4,
  parameter int ACC_BITS = 20,
  localparam int NT      = (1 << ABITS) - 1,
  localparam int FW      = (NF > 1) ? $clog2(NF) : 1,
  localparam int TW      = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [FW-1:0]              wnf,
  input  logic [TW-1:0]              wt,
  input  logic signed [ACC_BITS-1:0] wdata,
  input  logic                       re,
  input  logic [FW-1:0]              rnf,
  input  logic signed [ACC_BITS-1:0] acc,
  output logic [ABITS-1:0]           act
);

  logic signed [ACC_BITS-1:0] thr   [NF][NT];
  logic signed [ACC_BITS-1:0] thr_q [NT];

  always_ff @(posedge clk) begin
    if (we && int'(wt) < NT && int'(wnf) < NF) thr[wnf][wt] <= wdata;
    if (re) thr_q <= thr[rnf];
  end

  always_comb begin
    act = '0;
    for (int i = 0; i < NT; i++)
      if (acc >= thr_q[i]) act = act + 1'b1;
  end

endmodule
