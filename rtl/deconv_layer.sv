// deconv_layer: one deconvolution (transposed convolution) engine.
//
// Each generator layer has an engine of its own. The engine takes the layer's
// input map IN_DIM x IN_DIM x CIN in raster order, SIMD channels per beat, and
// produces the output map OUT_DIM x OUT_DIM x COUT, PE channels per beat,
// OUT_DIM = (IN_DIM-1)*STRIDE - 2*PAD + K. It is a chain of three units:
//
//   deconv_expand  inserts STRIDE-1 zeros between input pixels and pads
//                  K-1-PAD zeros around the map (EDIM per side);
//   ring_swg       circular-buffer sliding window generator, emits the
//                  K x K x CIN window of each output pixel;
//   mvau           PE x SIMD matrix-vector unit with per-PE weight memories
//                  and threshold activation.
//
// The result equals out[oy][ox][co] = act_co( sum_{ky,kx,ci}
// E[oy+ky][ox+kx][ci] * W[co][ky][kx][ci] ), where E is the expanded map and
// the weight vector of output channel co is stored in the window order
// (ky, kx, ci). In scatter form an input pixel (iy, ix) meets kernel tap
// ky = iy*STRIDE + K-1-PAD - oy, i.e. W is the transposed-convolution kernel
// rotated by 180 degrees; the host stores it in that order.
//
// The window generator gets ROWS = 2*K + STRIDE rows of buffer (10 for the
// MNIST layers) instead of the minimum K+1. The slack lets the writer accept a
// producer's real row while the reader is still K rows behind, so a fully
// loaded upstream engine is not stalled (measured: 67.4k instead of 105k
// cycles per MNIST frame).
//
// Throughput: one output pixel per NF*SF = (COUT/PE)*(K*K*CIN/SIMD) cycles
// once the pipeline is full, the layer's folding factor per pixel.
// cfg_* is the layer's share of the run-time configuration port (see mvau).
//
// The engine structure (expansion, ring-buffer window generator, PE/SIMD
// matrix unit, thresholds) follows the paper; kernel size, stride, padding and
// beat ordering are parameters whose MNIST defaults are this design's choices.
module deconv_layer
  import qdcgan_pkg::*;
#(
  parameter int CIN       = 128,
  parameter int COUT      = 64,
  parameter int IN_DIM    = 4,
  parameter int K         = 4,
  parameter int STRIDE    = 2,
  parameter int PAD       = 1,
  parameter int SIMD      = 16,
  parameter int PE        = 8,
  parameter int IN_BITS   = 4,
  parameter bit IN_SIGNED = 1'b0,
  parameter int WBITS     = 4,
  parameter int ABITS     = 4,
  localparam int EDIM     = expand_dim(IN_DIM, K, STRIDE, PAD),
  localparam int OUT_DIM  = deconv_out_dim(IN_DIM, K, STRIDE, PAD),
  localparam int IW       = SIMD * IN_BITS,
  localparam int OW       = PE * ABITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  cfg_kind_e             cfg_kind,
  input  logic [CFG_PE_W-1:0]   cfg_pe,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [IW-1:0]         in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [OW-1:0]         out_data
);

  logic          e_valid, e_ready, w_valid, w_ready;
  logic [IW-1:0] e_data, w_data;

  deconv_expand #(
    .CH(CIN), .SIMD(SIMD), .EBITS(IN_BITS), .IN_DIM(IN_DIM),
    .K(K), .STRIDE(STRIDE), .PAD(PAD)
  ) u_expand (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(e_valid), .out_ready(e_ready), .out_data(e_data)
  );

  ring_swg #(
    .CH(CIN), .SIMD(SIMD), .EBITS(IN_BITS), .DIM(EDIM), .K(K), .ROWS(2 * K + STRIDE)
  ) u_swg (
    .clk, .rst_n,
    .in_valid(e_valid), .in_ready(e_ready), .in_data(e_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  mvau #(
    .MW(K * K * CIN), .MH(COUT), .SIMD(SIMD), .PE(PE),
    .IN_BITS(IN_BITS), .IN_SIGNED(IN_SIGNED), .WBITS(WBITS), .ABITS(ABITS)
  ) u_mvau (
    .clk, .rst_n,
    .cfg_we, .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
