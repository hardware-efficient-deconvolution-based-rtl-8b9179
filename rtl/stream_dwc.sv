// stream_dwc: data width converter between two layer engines.
//
// A layer emits PE channels per beat while the next layer takes SIMD channels
// per beat. This unit re-packs a stream of IN_N elements per beat into OUT_N
// elements per beat (EBITS bits each), where one count divides the other.
// Element order is kept: the element with the lowest index sits in the lowest
// bits and the earlier beat supplies the lower elements.
//
//  * OUT_N > IN_N: R = OUT_N/IN_N input beats are gathered in a register; the
//    full word is offered while a new word may start in the same cycle it is
//    taken, so the input side runs at one beat per cycle.
//  * OUT_N < IN_N: an input word is held and its R = IN_N/OUT_N parts leave
//    one per cycle; the next word is accepted with the last part.
//  * OUT_N = IN_N: the stream passes unchanged.
//
// Valid/ready on both sides. The need for such a converter follows from the
// paper's per-layer PE and SIMD values; its design is this design's own.
module stream_dwc #(
  parameter int IN_N  = 4,
  parameter int OUT_N = 16,
  parameter int EBITS = 4,
  localparam int IW   = IN_N * EBITS,
  localparam int OW   = OUT_N * EBITS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [IW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [OW-1:0] out_data
);

  if (OUT_N > IN_N) begin : g_up
    localparam int R  = OUT_N / IN_N;
    localparam int CW = $clog2(R + 1);
    logic [OW-1:0] word;
    logic [CW-1:0] cnt;

    assign out_valid = (int'(cnt) == R);
    assign out_data  = word;
    assign in_ready  = !out_valid || out_ready;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt  <= '0;
        word <= '0;
      end else begin
        if (in_valid && in_ready) begin
          word[(out_valid ? 0 : int'(cnt)) * IW +: IW] <= in_data;
          cnt <= out_valid ? CW'(1) : cnt + 1'b1;
        end else if (out_valid && out_ready) begin
          cnt <= '0;
        end
      end
    end
  end else if (OUT_N < IN_N) begin : g_down
    localparam int R  = IN_N / OUT_N;
    localparam int CW = (R > 1) ? $clog2(R) : 1;
    logic [IW-1:0] word;
    logic [CW-1:0] idx;
    logic          have;

    assign out_valid = have;
    assign out_data  = word[int'(idx) * OW +: OW];
    assign in_ready  = !have || (out_ready && int'(idx) == R - 1);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        have <= 1'b0;
        idx  <= '0;
        word <= '0;
      end else begin
        if (in_valid && in_ready) begin
          word <= in_data;
          have <= 1'b1;
          idx  <= '0;
        end else if (have && out_ready) begin
          if (int'(idx) == R - 1) have <= 1'b0;
          else idx <= idx + 1'b1;
        end
      end
    end
  end else begin : g_same
    assign out_valid = in_valid;
    assign out_data  = in_data;
    assign in_ready  = out_ready;
  end

endmodule
