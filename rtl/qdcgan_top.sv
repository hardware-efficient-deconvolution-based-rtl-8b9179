// qdcgan_top: streaming dataflow accelerator for the generator of a quantized
// deconvolution GAN (QDCGAN), configured by default for the MNIST generator
// with 4-bit weights and activations (W4A4).
//
// The generator maps a noise vector z (1 x 1 x CH[0]) through N_LAYERS
// transposed convolutions to an image. Every layer has its own engine
// (deconv_layer) and all engines run concurrently on successive rows and
// frames, so the frame rate is set by the slowest engine. Between two engines
// a stream_dwc re-packs PE[i] channels per beat into SIMD[i+1] channels per
// beat. Default shape: 1x1x16 -> 4x4x128 -> 8x8x64 -> 16x16x32 -> 32x32x1,
// PE = [4,8,8,1], SIMD = [4,16,16,8]; every layer then needs 32768 (layer 1)
// or 65536 cycles per frame, about 1900 frames/s at 125 MHz.
//
// Interfaces (all valid/ready streams, one clock, active-low async reset):
//   z_*    noise input, raster/channel order, SIMD[0] Z_BITS-bit signed
//          elements per beat (CH[0]/SIMD[0] beats per frame);
//   img_*  image output, raster order, PE[N-1] ABITS-bit unsigned pixels
//          (channels) per beat;
//   cfg_*  run-time loading of weights and thresholds: cfg_layer selects the
//          engine, the rest is decoded by its mvau (one write per cycle, no
//          handshake; load while no frame is in flight).
// The host processor, its DDR and the DMA that feed these streams are not
// part of this RTL.
//
// Following the paper: one engine per layer, expansion plus ring-buffer
// sliding window plus PE/SIMD matrix unit per engine, on-chip run-time
// weights, threshold activations, the MNIST layer sizes and PE/SIMD values.
// This design's own choices: kernel size, stride and padding per layer, the
// noise width, the unsigned activation coding, and the stream and
// configuration formats.
module qdcgan_top
  import qdcgan_pkg::*;
#(
  parameter int N        = N_LAYERS,
  parameter int WBITS    = 4,
  parameter int ABITS    = 4,
  parameter int Z_BITS   = 8,
  parameter int IN_DIM   = 1,
  parameter int CH     [N+1] = '{16, 128, 64, 32, 1},
  parameter int PE     [N]   = '{4, 8, 8, 1},
  parameter int SIMD   [N]   = '{4, 16, 16, 8},
  parameter int KS     [N]   = '{4, 4, 4, 4},
  parameter int STRIDE [N]   = '{1, 2, 2, 2},
  parameter int PAD    [N]   = '{0, 1, 1, 1},
  localparam int ZW    = SIMD[0] * Z_BITS,
  localparam int IMGW  = PE[N-1] * ABITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // run-time configuration
  input  logic                   cfg_we,
  input  logic [CFG_LAYER_W-1:0] cfg_layer,
  input  cfg_kind_e              cfg_kind,
  input  logic [CFG_PE_W-1:0]    cfg_pe,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [CFG_DATA_W-1:0]  cfg_data,
  // noise input
  input  logic                   z_valid,
  output logic                   z_ready,
  input  logic [ZW-1:0]          z_data,
  // generated image
  output logic                   img_valid,
  input  logic                   img_ready,
  output logic [IMGW-1:0]        img_data
);

  // Input map size of layer i.
  function automatic int dim_at(input int i);
    int d;
    d = IN_DIM;
    for (int j = 0; j < i; j++) d = deconv_out_dim(d, KS[j], STRIDE[j], PAD[j]);
    return d;
  endfunction

  // Widest stream in the chain, used to size the link arrays.
  function automatic int link_w();
    int w;
    w = ZW;
    for (int j = 0; j < N; j++) begin
      if (SIMD[j] * ABITS > w) w = SIMD[j] * ABITS;
      if (PE[j] * ABITS > w) w = PE[j] * ABITS;
    end
    return w;
  endfunction

  localparam int LW = link_w();

  // x_*: input of engine i; y_*: output of engine i.
  logic          x_valid [N];
  logic          x_ready [N];
  logic [LW-1:0] x_data  [N];
  logic          y_valid [N];
  logic          y_ready [N];
  logic [LW-1:0] y_data  [N];

  assign x_valid[0] = z_valid;
  assign z_ready    = x_ready[0];
  assign x_data[0]  = LW'(z_data);

  for (genvar i = 0; i < N; i++) begin : g_layer
    localparam int IB = (i == 0) ? Z_BITS : ABITS;
    localparam int IW = SIMD[i] * IB;
    localparam int OW = PE[i] * ABITS;
    logic [OW-1:0] out_d;

    if (i > 0) begin : g_dwc
      logic [SIMD[i]*ABITS-1:0] dwc_d;
      stream_dwc #(.IN_N(PE[i-1]), .OUT_N(SIMD[i]), .EBITS(ABITS)) u_dwc (
        .clk, .rst_n,
        .in_valid (y_valid[i-1]),
        .in_ready (y_ready[i-1]),
        .in_data  (y_data[i-1][PE[i-1]*ABITS-1:0]),
        .out_valid(x_valid[i]),
        .out_ready(x_ready[i]),
        .out_data (dwc_d)
      );
      assign x_data[i] = LW'(dwc_d);
    end

    deconv_layer #(
      .CIN(CH[i]), .COUT(CH[i+1]), .IN_DIM(dim_at(i)),
      .K(KS[i]), .STRIDE(STRIDE[i]), .PAD(PAD[i]),
      .SIMD(SIMD[i]), .PE(PE[i]),
      .IN_BITS(IB), .IN_SIGNED(i == 0), .WBITS(WBITS), .ABITS(ABITS)
    ) u_layer (
      .clk, .rst_n,
      .cfg_we   (cfg_we && int'(cfg_layer) == i),
      .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
      .in_valid (x_valid[i]),
      .in_ready (x_ready[i]),
      .in_data  (x_data[i][IW-1:0]),
      .out_valid(y_valid[i]),
      .out_ready(y_ready[i]),
      .out_data (out_d)
    );
    assign y_data[i] = LW'(out_d);
  end

  assign img_valid    = y_valid[N-1];
  assign y_ready[N-1] = img_ready;
  assign img_data     = y_data[N-1][IMGW-1:0];

endmodule
