// tb_qdcgan_celeba: end-to-end test of the accelerator built for the celebA
// generator (W4A4): 1x1x64 noise -> 4x4x256 -> 8x8x128 -> 16x16x64 ->
// 32x32x32 -> 64x64x3 image, five engines with PE [4,8,8,8,3] and SIMD
// [4,16,16,16,8]. The published PE list for this network has only four entries
// ([4,8,8,3]); the fourth engine here uses PE 8, which gives every engine
// after the first the same 262144 cycles per frame.
//
// Method as in tb_qdcgan_top: random weights and noise, a layer-by-layer
// scatter-form reference with thresholds taken from quantiles of the
// accumulators, run-time loading through the configuration port, every output
// value compared. Frame 0 is read with random back-pressure. The frame
// interval must stay within 125e6/301 = 415282 cycles (at least 301 frames/s
// at 125 MHz), and each mechanism must occur at least once.
module tb_qdcgan_celeba
  import qdcgan_pkg::*;
;
  localparam int N = 5, WB = 4, AB = 4, ZB = 8, NT = 15, TW = 4;
  localparam int CHS [N+1] = '{64, 256, 128, 64, 32, 3};
  localparam int PEA [N] = '{4, 8, 8, 8, 3};
  localparam int SMA [N] = '{4, 16, 16, 16, 8};
  localparam int KA [N] = '{4, 4, 4, 4, 4};
  localparam int SA [N] = '{1, 2, 2, 2, 2};
  localparam int PA [N] = '{0, 1, 1, 1, 1};
  localparam int DIMS [N+1] = '{1, 4, 8, 16, 32, 64};
  localparam int NFR = 2;
  localparam int FRAME_BUDGET = 415282;  // 125e6 / 301

  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we;
  logic [CFG_LAYER_W-1:0] cfg_layer;
  cfg_kind_e cfg_kind;
  logic [CFG_PE_W-1:0] cfg_pe;
  logic [CFG_ADDR_W-1:0] cfg_addr;
  logic [CFG_DATA_W-1:0] cfg_data;
  logic z_valid, z_ready, img_valid, img_ready;
  logic [SMA[0]*ZB-1:0] z_data;
  logic [PEA[N-1]*AB-1:0] img_data;

  qdcgan_top #(.N(N), .WBITS(WB), .ABITS(AB), .Z_BITS(ZB), .IN_DIM(1), .CH(CHS), .PE(PEA),
               .SIMD(SMA), .KS(KA), .STRIDE(SA), .PAD(PA)) dut (.*);

  // reference model state
  int wt  [N][];        // [layer][((co*K + ky)*K + kx)*CIN + ci]
  int thr [N][];        // [layer][co*NT + t]
  int fm  [NFR][N+1][]; // feature maps, [(y*D + x)*C + c]

  // mechanism counters
  longint n_backpressure = 0, n_in_stall = 0, n_zero_beats = 0, n_ring_wrap = 0;
  longint n_reuse = 0, n_dwc = 0;

  always @(posedge clk) if (rst_n) begin
    if (img_valid && !img_ready) n_backpressure++;
    if (z_valid && !z_ready) n_in_stall++;
    if (dut.g_layer[1].u_layer.u_expand.out_valid && dut.g_layer[1].u_layer.u_expand.out_ready &&
        !dut.g_layer[1].u_layer.u_expand.is_real) n_zero_beats++;
    if (dut.g_layer[4].u_layer.u_swg.freed != '0 &&
        int'(dut.g_layer[4].u_layer.u_swg.rbase) + int'(dut.g_layer[4].u_layer.u_swg.freed) >=
        dut.g_layer[4].u_layer.u_swg.ROWS) n_ring_wrap++;
    if (dut.g_layer[2].u_layer.u_mvau.issue && !dut.g_layer[2].u_layer.u_mvau.first_pass) n_reuse++;
    if (dut.g_layer[1].g_dwc.u_dwc.out_valid && dut.g_layer[1].g_dwc.u_dwc.out_ready) n_dwc++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- reference
  // Loop bounds below are run-time variables so that the simulator compiles
  // these loops as loops instead of unrolling them.
  int n_layers = N, n_frames = NFR, n_thr = NT;

  task automatic build_reference();
    for (int f = 0; f < n_frames; f++) begin
      fm[f][0] = new[CHS[0]];
      foreach (fm[f][0][i]) fm[f][0][i] = int'($signed(ZB'($urandom)));
    end
    for (int l = 0; l < n_layers; l++) begin
      int ci_n, co_n, id, od, k, s, b;
      int acc [NFR][];
      int pool [];
      ci_n = CHS[l]; co_n = CHS[l+1]; id = DIMS[l]; od = DIMS[l+1];
      k = KA[l]; s = SA[l]; b = k - 1 - PA[l];
      wt[l] = new[co_n * k * k * ci_n];
      foreach (wt[l][i]) wt[l][i] = weight_value(8'($urandom), WB);
      for (int f = 0; f < n_frames; f++) begin
        acc[f] = new[od * od * co_n];
        foreach (acc[f][i]) acc[f][i] = 0;
        for (int iy = 0; iy < id; iy++)
          for (int ix = 0; ix < id; ix++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int oy, ox;
                oy = iy * s + b - ky;
                ox = ix * s + b - kx;
                if (oy >= 0 && oy < od && ox >= 0 && ox < od)
                  for (int co = 0; co < co_n; co++) begin
                    int a;
                    a = 0;
                    for (int ci = 0; ci < ci_n; ci++)
                      a += wt[l][((co * k + ky) * k + kx) * ci_n + ci] *
                           fm[f][l][(iy * id + ix) * ci_n + ci];
                    acc[f][(oy * od + ox) * co_n + co] += a;
                  end
              end
      end
      // thresholds: quantiles of frame 0's accumulators, per-channel jitter
      pool = new[acc[0].size()](acc[0]);
      pool.sort();
      thr[l] = new[co_n * NT];
      for (int co = 0; co < co_n; co++)
        for (int t = 0; t < n_thr; t++)
          thr[l][co * NT + t] = pool[(t + 1) * pool.size() / (NT + 1)] + int'($urandom % 3) - 1 + t;
      for (int f = 0; f < n_frames; f++) begin
        fm[f][l+1] = new[od * od * co_n];
        foreach (acc[f][i]) begin
          int n, co;
          co = i % co_n;
          n = 0;
          for (int t = 0; t < n_thr; t++) if (acc[f][i] >= thr[l][co * NT + t]) n++;
          fm[f][l+1][i] = n;
        end
      end
    end
  endtask

  // ------------------------------------------------------------ configuration
  // Stored form of a weight: two's complement, or 0/1 for bipolar -1/+1.
  function automatic logic [WB-1:0] enc_weight(input int v);
    if (WB == 1) return (v > 0) ? 1'b1 : 1'b0;
    return WB'(v);
  endfunction

  task automatic load_config();
    for (int l = 0; l < n_layers; l++) begin
      int k, ci_n, co_n, sf, acc_w;
      k = KA[l]; ci_n = CHS[l]; co_n = CHS[l+1];
      sf = k * k * ci_n / SMA[l];
      acc_w = acc_bits(k * k * ci_n, (l == 0) ? ZB : AB, WB);
      for (int co = 0; co < co_n; co++)
        for (int s = 0; s < sf; s++) begin
          cfg_we = 1; cfg_layer = CFG_LAYER_W'(l); cfg_kind = CFG_WEIGHT;
          cfg_pe = CFG_PE_W'(co % PEA[l]);
          cfg_addr = CFG_ADDR_W'((co / PEA[l]) * sf + s);
          cfg_data = '0;
          for (int j = 0; j < SMA[l]; j++)
            cfg_data[j*WB +: WB] = enc_weight(wt[l][co * k * k * ci_n + s * SMA[l] + j]);
          @(negedge clk);
        end
      for (int co = 0; co < co_n; co++)
        for (int t = 0; t < n_thr; t++) begin
          logic [63:0] v;
          v = 64'($signed(thr[l][co * NT + t]));
          cfg_we = 1; cfg_layer = CFG_LAYER_W'(l); cfg_kind = CFG_THRESHOLD;
          cfg_pe = CFG_PE_W'(co % PEA[l]);
          cfg_addr = CFG_ADDR_W'(((co / PEA[l]) << TW) | t);
          cfg_data = v & ((64'd1 << acc_w) - 1);
          @(negedge clk);
        end
    end
    cfg_we = 0;
  endtask

  // -------------------------------------------------------------- main flow
  initial begin
    int zbeats, ni, no, cyc, last_end, npix;
    int nseen;
    bit seen [16];
    foreach (seen[i]) seen[i] = 0;
    cfg_we = 0; cfg_layer = 0; cfg_kind = CFG_WEIGHT; cfg_pe = 0; cfg_addr = 0; cfg_data = 0;
    z_valid = 0; z_data = 0; img_ready = 0;
    build_reference();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_config();

    zbeats = CHS[0] / SMA[0];
    npix = DIMS[N] * DIMS[N] * CHS[N] / PEA[N-1];
    ni = 0; no = 0; cyc = 0; last_end = 0;
    while (no < NFR * npix) begin
      int f, fo;
      f = ni / zbeats;
      fo = no / npix;
      z_valid = (ni < NFR * zbeats);
      for (int j = 0; j < SMA[0]; j++)
        z_data[j*ZB +: ZB] = ZB'(fm[f % NFR][0][(ni % zbeats) * SMA[0] + j]);
      img_ready = (fo > 0) || ($urandom % 4 != 0);
      #1;
      if (img_valid && img_ready) begin
        for (int p = 0; p < PEA[N-1]; p++) begin
          int e;
          e = fm[fo][N][(no % npix) * PEA[N-1] + p];
          seen[e] = 1;
          checks++;
          if (int'(img_data[p*AB +: AB]) != e) begin
            failures++;
            if (failures < 10) $display("frame %0d pixel %0d got %0d exp %0d", fo, no % npix, img_data[p*AB +: AB], e);
          end
        end
        no++;
        if (no % npix == 0) begin
          $display("frame %0d complete at cycle %0d (interval %0d)", fo, cyc, cyc - last_end);
          if (fo >= 1) begin
            checks++;
            if (cyc - last_end > FRAME_BUDGET) begin
              failures++;
              $display("frame interval %0d exceeds %0d cycles", cyc - last_end, FRAME_BUDGET);
            end
          end
          last_end = cyc;
        end
      end
      if (z_valid && z_ready) ni++;
      @(negedge clk);
      cyc++;
    end

    nseen = 0;
    foreach (seen[i]) nseen += int'(seen[i]);
    $display("activation levels seen %0d; backpressure %0d, input stalls %0d, zero beats %0d, ring wraps %0d, vector reuse %0d, dwc words %0d",
             nseen, n_backpressure, n_in_stall, n_zero_beats, n_ring_wrap, n_reuse, n_dwc);
    checks++; if (nseen < 4) begin failures++; $display("output levels too few"); end
    checks++; if (n_backpressure == 0) begin failures++; $display("no back-pressure"); end
    checks++; if (n_in_stall == 0) begin failures++; $display("no input stall"); end
    checks++; if (n_zero_beats == 0) begin failures++; $display("no zero beats"); end
    checks++; if (n_ring_wrap == 0) begin failures++; $display("no ring wrap"); end
    checks++; if (n_reuse == 0) begin failures++; $display("no vector reuse"); end
    checks++; if (n_dwc == 0) begin failures++; $display("no width conversion"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
