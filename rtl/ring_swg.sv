// ring_swg: sliding window generator built on a circular ring buffer of
// feature-map rows.
//
// Input: a DIM x DIM map of CH channels in raster order, SIMD channels per
// beat (CF = CH/SIMD beats per pixel), as produced by deconv_expand. Output:
// for every output pixel (oy, ox) of the K x K, stride-1 convolution
// (ODIM = DIM-K+1 per side), the K*K*CF beats of its window in the order
// ky, kx, channel fold (channel fastest). This is the order in which the
// matrix-vector unit expects its input vector.
//
// Only ROWS (default K+1) map rows are held on chip, in a circular buffer of
// ROWS*DIM*CF words indexed by a rotating row slot. The writer fills the slot
// after the newest complete row while a slot is free; the reader walks the
// window of output row oy once the K rows oy..oy+K-1 are present, and frees the
// oldest row after each output row (all K rows after the last output row of a
// frame). The writer can therefore stream the next row, or the first rows of
// the next frame, while windows of the current row are read out.
//
// Timing: the buffer has a synchronous read port; a window beat appears in the
// output register one cycle after it is read, and the unit sustains one output
// beat per cycle while rows are available. Valid/ready on both sides.
//
// The ring buffer and the role of the sliding window generator follow the
// paper; the row granularity, buffer depth and beat order are this design's.
module ring_swg #(
  parameter int CH    = 128,
  parameter int SIMD  = 16,
  parameter int EBITS = 4,
  parameter int DIM   = 11,
  parameter int K     = 4,
  parameter int ROWS  = K + 1,
  localparam int CF   = CH / SIMD,
  localparam int ODIM = DIM - K + 1,
  localparam int DW   = SIMD * EBITS
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

  localparam int DEPTH = ROWS * DIM * CF;
  localparam int AW    = $clog2(DEPTH);
  localparam int SW    = $clog2(ROWS + 1);
  localparam int XW    = $clog2(DIM + 1);
  localparam int KW    = $clog2(K + 1);
  localparam int CW    = (CF > 1) ? $clog2(CF) : 1;

  logic [DW-1:0] mem [DEPTH];

  // ---- writer -------------------------------------------------------------
  logic [SW-1:0] wslot;
  logic [XW-1:0] wx;
  logic [CW-1:0] wc;
  logic [SW-1:0] nrows;     // complete rows held, counted from the reader base
  logic          w_fire, w_row_done;

  assign in_ready   = (int'(nrows) < ROWS);
  assign w_fire     = in_valid && in_ready;
  assign w_row_done = w_fire && (int'(wc) == CF - 1) && (int'(wx) == DIM - 1);

  always_ff @(posedge clk) begin
    if (w_fire) mem[AW'(int'(wslot) * DIM * CF + int'(wx) * CF + int'(wc))] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wslot <= '0;
      wx    <= '0;
      wc    <= '0;
    end else if (w_fire) begin
      if (int'(wc) == CF - 1) begin
        wc <= '0;
        if (int'(wx) == DIM - 1) begin
          wx    <= '0;
          wslot <= (int'(wslot) == ROWS - 1) ? '0 : wslot + 1'b1;
        end else begin
          wx <= wx + 1'b1;
        end
      end else begin
        wc <= wc + 1'b1;
      end
    end
  end

  // ---- reader -------------------------------------------------------------
  logic [SW-1:0] rbase;     // slot of the oldest row still needed
  logic [XW-1:0] oy, ox;
  logic [KW-1:0] ky, kx;
  logic [CW-1:0] rc;
  logic          r_fire, r_last_in_row, r_last_frame_row;
  logic [SW-1:0] freed;
  int            rslot;

  assign r_fire = (int'(nrows) >= K) && (!out_valid || out_ready);
  assign r_last_in_row = (int'(rc) == CF - 1) && (int'(kx) == K - 1) &&
                         (int'(ky) == K - 1) && (int'(ox) == ODIM - 1);
  assign r_last_frame_row = (int'(oy) == ODIM - 1);

  always_comb begin
    rslot = int'(rbase) + int'(ky);
    if (rslot >= ROWS) rslot -= ROWS;
    freed = '0;
    if (r_fire && r_last_in_row) freed = r_last_frame_row ? SW'(K) : SW'(1);
  end

  always_ff @(posedge clk) begin
    if (r_fire) out_data <= mem[AW'(rslot * DIM * CF + (int'(ox) + int'(kx)) * CF + int'(rc))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      nrows     <= '0;
      rbase     <= '0;
      oy        <= '0;
      ox        <= '0;
      ky        <= '0;
      kx        <= '0;
      rc        <= '0;
    end else begin
      if (r_fire) out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;

      nrows <= nrows + SW'(w_row_done) - freed;
      if (freed != '0)
        rbase <= SW'((int'(rbase) + int'(freed)) % ROWS);

      if (r_fire) begin
        if (int'(rc) == CF - 1) begin
          rc <= '0;
          if (int'(kx) == K - 1) begin
            kx <= '0;
            if (int'(ky) == K - 1) begin
              ky <= '0;
              if (int'(ox) == ODIM - 1) begin
                ox <= '0;
                oy <= r_last_frame_row ? '0 : oy + 1'b1;
              end else begin
                ox <= ox + 1'b1;
              end
            end else begin
              ky <= ky + 1'b1;
            end
          end else begin
            kx <= kx + 1'b1;
          end
        end else begin
          rc <= rc + 1'b1;
        end
      end
    end
  end

  // Stream rule: a held beat stays unchanged until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
