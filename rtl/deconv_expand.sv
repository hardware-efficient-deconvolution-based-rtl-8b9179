// deconv_expand: expansion and zero padding of a feature-map stream, the
// pre-processing step that lets a transposed convolution run as an ordinary
// stride-1 convolution.
//
// The input map is IN_DIM x IN_DIM pixels of CH channels, streamed in raster
// order with SIMD channels per beat (CH/SIMD beats per pixel). The output is
// the expanded map of OUT_DIM = (IN_DIM-1)*STRIDE + 1 + 2*(K-1-PAD) pixels per
// side, in the same beat format: STRIDE-1 zero rows and columns are inserted
// between neighbouring input pixels and K-1-PAD zero rows and columns surround
// the map. A counter walks the output positions; at a position that holds an
// input pixel the input beat is passed through, elsewhere a zero beat is made
// without consuming input. The unit has no storage beyond its counters.
//
// Interface: valid/ready streams; a beat moves when valid and ready are both
// high at a rising clock edge. The output is combinational from the input on
// pass-through beats (no added latency) and emits one beat per cycle.
//
// The zero insertion between pixels follows the paper's expansion figure
// (3x3 -> 5x5 for stride 2); the border padding of K-1-PAD and the raster,
// channel-minor beat order are this design's choices.
module deconv_expand #(
  parameter int CH        = 128,
  parameter int SIMD      = 16,
  parameter int EBITS     = 4,
  parameter int IN_DIM    = 4,
  parameter int K         = 4,
  parameter int STRIDE    = 2,
  parameter int PAD       = 1,
  localparam int CF       = CH / SIMD,
  localparam int BORDER   = K - 1 - PAD,
  localparam int OUT_DIM  = (IN_DIM - 1) * STRIDE + 1 + 2 * BORDER,
  localparam int DW       = SIMD * EBITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);

  localparam int YW = $clog2(OUT_DIM + 1);
  localparam int CW = (CF > 1) ? $clog2(CF) : 1;

  logic [YW-1:0] oy, ox;
  logic [CW-1:0] cf;
  logic real_y, real_x, is_real;

  // A row (or column) of the expanded map holds input data when it lies
  // inside the border and on the stride grid.
  function automatic logic on_grid(input logic [YW-1:0] p);
    int e;
    e = int'(p) - BORDER;
    return (e >= 0) && (e <= (IN_DIM - 1) * STRIDE) && ((e % STRIDE) == 0);
  endfunction

  always_comb begin
    real_y    = on_grid(oy);
    real_x    = on_grid(ox);
    is_real   = real_y && real_x;
    out_valid = is_real ? in_valid : 1'b1;
    out_data  = is_real ? in_data  : '0;
    in_ready  = is_real && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oy <= '0;
      ox <= '0;
      cf <= '0;
    end else if (out_valid && out_ready) begin
      if (int'(cf) == CF - 1) begin
        cf <= '0;
        if (int'(ox) == OUT_DIM - 1) begin
          ox <= '0;
          oy <= (int'(oy) == OUT_DIM - 1) ? '0 : oy + 1'b1;
        end else begin
          ox <= ox + 1'b1;
        end
      end else begin
        cf <= cf + 1'b1;
      end
    end
  end

endmodule
