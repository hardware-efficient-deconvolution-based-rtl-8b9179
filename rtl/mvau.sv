// mvau: matrix-vector-activation unit, the compute engine of one layer.
//
// Computes y = act(W x) for an MH x MW weight matrix W and a stream of input
// vectors x of MW elements (one vector per output pixel: the K*K*Cin window
// from the sliding window generator). PE output rows are computed in parallel,
// each over SIMD input elements per cycle, so one vector takes
// NF*SF = (MH/PE)*(MW/SIMD) cycles: the folding factor of the layer.
//
// Schedule: for nf = 0..NF-1, for sf = 0..SF-1, PE p multiplies input fold sf
// with its weights for output channel nf*PE + p and accumulates. During nf = 0
// the input beats are taken from the stream and copied into an SF-word input
// buffer; for nf > 0 they are re-read from that buffer, so every window is
// fetched from the sliding window generator only once. After the last fold of
// an nf the PE accumulators go through the threshold units and PE activations
// leave as one output beat (output channel nf*PE + p in bits
// [p*ABITS +: ABITS]).
//
// Pipeline: stage 0 issues (nf, sf) and performs the synchronous reads of
// weights, thresholds and the input buffer; stage 1 multiplies, adds,
// accumulates and thresholds into the output register. The whole pipeline
// holds while the output register is full and not taken, so a full output
// channel blocks nothing but this unit. Latency from the last input beat of
// a vector to its first output beat is 2 cycles.
//
// Configuration port: with cfg_kind = weight, cfg_data[SIMD*WBITS-1:0] is
// written to address cfg_addr = nf*SF + sf of PE cfg_pe; with cfg_kind =
// threshold, the low ACC_BITS bits of cfg_data are threshold cfg_addr[TW-1:0]
// of slot nf = cfg_addr >> TW of PE cfg_pe.
//
// The PE x SIMD organisation, folding and on-chip per-PE weights follow the
// paper; the input buffer, pipeline depth and configuration encoding are this
// design's choices.
module mvau
  import qdcgan_pkg::*;
#(
  parameter int MW        = 2048,
  parameter int MH        = 64,
  parameter int SIMD      = 16,
  parameter int PE        = 8,
  parameter int IN_BITS   = 4,
  parameter bit IN_SIGNED = 1'b0,
  parameter int WBITS     = 4,
  parameter int ABITS     = 4,
  parameter int ACC_BITS  = acc_bits(MW, IN_BITS, WBITS),
  localparam int SF       = MW / SIMD,
  localparam int NF       = MH / PE,
  localparam int IW       = SIMD * IN_BITS,
  localparam int OW       = PE * ABITS,
  localparam int NT       = (1 << ABITS) - 1,
  localparam int TW       = (NT > 1) ? $clog2(NT) : 1,
  localparam int FW       = (NF > 1) ? $clog2(NF) : 1,
  localparam int SFW      = (SF > 1) ? $clog2(SF) : 1,
  localparam int WAW      = (NF * SF > 1) ? $clog2(NF * SF) : 1,
  localparam int CAW      = CFG_ADDR_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration (run-time weights and thresholds)
  input  logic                  cfg_we,
  input  cfg_kind_e             cfg_kind,
  input  logic [CFG_PE_W-1:0]   cfg_pe,
  input  logic [CAW-1:0]        cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  // input vectors
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [IW-1:0]         in_data,
  // output activations
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [OW-1:0]         out_data
);

  // ---- stage 0: fold counters and synchronous reads ------------------------
  logic [FW-1:0]  nf;
  logic [SFW-1:0] sf;
  logic           adv, issue, first_pass;

  assign adv        = !out_valid || out_ready;
  assign first_pass = (nf == '0);
  assign issue      = adv && (!first_pass || in_valid);
  assign in_ready   = adv && first_pass;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nf <= '0;
      sf <= '0;
    end else if (issue) begin
      if (int'(sf) == SF - 1) begin
        sf <= '0;
        nf <= (int'(nf) == NF - 1) ? '0 : nf + 1'b1;
      end else begin
        sf <= sf + 1'b1;
      end
    end
  end

  // input vector buffer, reused for output folds nf > 0
  logic [IW-1:0] ibuf [SF];
  logic [IW-1:0] s1_buf, s1_stream;
  logic          s1_from_stream, s1_valid, s1_first, s1_last;

  always_ff @(posedge clk) begin
    if (issue && first_pass) ibuf[sf] <= in_data;
    if (adv) begin
      s1_buf         <= ibuf[sf];
      s1_stream      <= in_data;
      s1_from_stream <= first_pass;
      s1_first       <= (sf == '0);
      s1_last        <= (int'(sf) == SF - 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else if (adv) s1_valid <= issue;
  end

  // ---- per-PE weights, thresholds and accumulators -------------------------
  logic [SIMD*WBITS-1:0]      w_rd   [PE];
  logic signed [ACC_BITS-1:0] acc    [PE];
  logic signed [ACC_BITS-1:0] acc_nx [PE];
  logic [ABITS-1:0]           act    [PE];
  logic [IW-1:0]              s1_in;

  assign s1_in = s1_from_stream ? s1_stream : s1_buf;

  for (genvar p = 0; p < PE; p++) begin : g_pe
    logic sel;
    assign sel = cfg_we && (int'(cfg_pe) == p);

    weight_mem #(.SIMD(SIMD), .WBITS(WBITS), .DEPTH(NF * SF)) u_wmem (
      .clk   (clk),
      .we    (sel && cfg_kind == CFG_WEIGHT),
      .waddr (WAW'(cfg_addr)),
      .wdata (cfg_data[SIMD*WBITS-1:0]),
      .re    (adv),
      .raddr (WAW'(int'(nf) * SF + int'(sf))),
      .rdata (w_rd[p])
    );

    threshold_unit #(.NF(NF), .ABITS(ABITS), .ACC_BITS(ACC_BITS)) u_thr (
      .clk   (clk),
      .we    (sel && cfg_kind == CFG_THRESHOLD),
      .wnf   (FW'(cfg_addr >> TW)),
      .wt    (cfg_addr[TW-1:0]),
      .wdata (cfg_data[ACC_BITS-1:0]),
      .re    (issue && int'(sf) == SF - 1),
      .rnf   (nf),
      .acc   (acc_nx[p]),
      .act   (act[p])
    );

    // SIMD-wide dot product and accumulation
    always_comb begin
      int dot;
      dot = 0;
      for (int s = 0; s < SIMD; s++)
        dot += weight_value(8'(w_rd[p][s*WBITS +: WBITS]), WBITS) *
               act_value(16'(s1_in[s*IN_BITS +: IN_BITS]), IN_BITS, IN_SIGNED);
      acc_nx[p] = (s1_first ? ACC_BITS'(0) : acc[p]) + ACC_BITS'(dot);
    end

    always_ff @(posedge clk) begin
      if (adv && s1_valid) acc[p] <= acc_nx[p];
    end
  end

  // ---- stage 1 output register ---------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (adv && s1_valid && s1_last) begin
      out_valid <= 1'b1;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (adv && s1_valid && s1_last)
      for (int p = 0; p < PE; p++) out_data[p*ABITS +: ABITS] <= act[p];
  end

  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
