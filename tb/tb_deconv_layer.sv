// tb_deconv_layer: end-to-end test of one deconvolution engine.
//
// A 3x3x8 input, kernel 4, stride 2, pad 1, 4 output channels (6x6x4
// output), SIMD 4, PE 2, W4A4. The expected output is computed in scatter
// form: every input pixel (iy, ix) is multiplied into the output pixels it
// reaches, with kernel tap ky = iy*STRIDE + K-1-PAD - oy, which is the
// definition of a transposed convolution and independent of the engine's
// expand-then-convolve method. Two frames run, the first with random
// valid/ready gaps; for the second the output time must stay within the
// folding budget of (COUT/PE) * (K*K*CIN/SIMD) cycles per output pixel.
module tb_deconv_layer
  import qdcgan_pkg::*;
;
  localparam int CIN = 8, COUT = 4, ID = 3, K = 4, S = 2, P = 1, SIMD = 4, PE = 2;
  localparam int IB = 4, WB = 4, AB = 4, NT = 15, TW = 4;
  localparam int OD = (ID - 1) * S - 2 * P + K;
  localparam int MW = K * K * CIN, SF = MW / SIMD, NF = COUT / PE;
  localparam int ACC = acc_bits(MW, IB, WB);
  localparam int NFR = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we;
  cfg_kind_e cfg_kind;
  logic [CFG_PE_W-1:0] cfg_pe;
  logic [CFG_ADDR_W-1:0] cfg_addr;
  logic [CFG_DATA_W-1:0] cfg_data;
  logic iv, ir, ov, ordy;
  logic [SIMD*IB-1:0] id;
  logic [PE*AB-1:0] od;

  deconv_layer #(.CIN(CIN), .COUT(COUT), .IN_DIM(ID), .K(K), .STRIDE(S), .PAD(P),
                 .SIMD(SIMD), .PE(PE), .IN_BITS(IB), .IN_SIGNED(0), .WBITS(WB), .ABITS(AB)) dut (
    .clk, .rst_n, .cfg_we, .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
    .in_valid(iv), .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [WB-1:0] w [COUT][K][K][CIN];
  logic [IB-1:0] x [NFR][ID][ID][CIN];
  int thr [COUT][NT];
  int expv [NFR][OD][OD][COUT];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ni, no, cyc, c0, nseen;
    bit seen [16];
    foreach (seen[i]) seen[i] = 0;
    foreach (w[a, b, c, d]) w[a][b][c][d] = WB'($urandom);
    foreach (x[a, b, c, d]) x[a][b][c][d] = IB'($urandom);
    foreach (thr[co]) begin
      int t;
      t = -70 + int'($urandom % 10);
      for (int k = 0; k < NT; k++) begin thr[co][k] = t; t += 1 + int'($urandom % 16); end
    end
    // scatter-form reference
    for (int f = 0; f < NFR; f++) begin
      int acc [OD][OD][COUT];
      foreach (acc[a, b, c]) acc[a][b][c] = 0;
      for (int iy = 0; iy < ID; iy++)
        for (int ix = 0; ix < ID; ix++)
          for (int oy = 0; oy < OD; oy++)
            for (int ox = 0; ox < OD; ox++) begin
              int ky, kx;
              ky = iy * S + K - 1 - P - oy;
              kx = ix * S + K - 1 - P - ox;
              if (ky >= 0 && ky < K && kx >= 0 && kx < K)
                for (int co = 0; co < COUT; co++)
                  for (int ci = 0; ci < CIN; ci++)
                    acc[oy][ox][co] += weight_value(8'(w[co][ky][kx][ci]), WB) * int'(x[f][iy][ix][ci]);
            end
      foreach (acc[a, b, c]) begin
        int n;
        n = 0;
        for (int k = 0; k < NT; k++) if (acc[a][b][c] >= thr[c][k]) n++;
        expv[f][a][b][c] = n;
      end
    end

    cfg_we = 0; cfg_kind = CFG_WEIGHT; cfg_pe = 0; cfg_addr = 0; cfg_data = 0;
    iv = 0; ordy = 0; id = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int co = 0; co < COUT; co++)
      for (int s = 0; s < SF; s++) begin
        cfg_we = 1; cfg_kind = CFG_WEIGHT; cfg_pe = CFG_PE_W'(co % PE);
        cfg_addr = CFG_ADDR_W'((co / PE) * SF + s);
        cfg_data = '0;
        for (int j = 0; j < SIMD; j++) begin
          int i, ky, kx, ci;
          i = s * SIMD + j; ci = i % CIN; kx = (i / CIN) % K; ky = i / (CIN * K);
          cfg_data[j*WB +: WB] = w[co][ky][kx][ci];
        end
        @(negedge clk);
      end
    for (int co = 0; co < COUT; co++)
      for (int k = 0; k < NT; k++) begin
        cfg_we = 1; cfg_kind = CFG_THRESHOLD; cfg_pe = CFG_PE_W'(co % PE);
        cfg_addr = CFG_ADDR_W'(((co / PE) << TW) | k);
        cfg_data = CFG_DATA_W'(ACC'(thr[co][k]));
        @(negedge clk);
      end
    cfg_we = 0;

    ni = 0; no = 0; cyc = 0; c0 = 0;
    while (no < NFR * OD * OD * NF) begin
      int f, pix, cf;
      bit gaps;
      gaps = (no < OD * OD * NF);
      f = ni / (ID * ID * CIN / SIMD);
      pix = (ni / (CIN / SIMD)) % (ID * ID);
      cf = ni % (CIN / SIMD);
      iv = (ni < NFR * ID * ID * CIN / SIMD) && (!gaps || $urandom % 3 != 0);
      for (int j = 0; j < SIMD; j++) id[j*IB +: IB] = x[f % NFR][pix / ID][pix % ID][cf * SIMD + j];
      ordy = !gaps || ($urandom % 2 != 0);
      #1;
      if (ov && ordy) begin
        int fo, op, nf;
        fo = no / (OD * OD * NF);
        op = (no / NF) % (OD * OD);
        nf = no % NF;
        for (int p = 0; p < PE; p++) begin
          int e;
          e = expv[fo][op / OD][op % OD][nf * PE + p];
          seen[e] = 1;
          checks++;
          if (int'(od[p*AB +: AB]) != e) begin
            failures++;
            if (failures < 10) $display("frame %0d pixel %0d ch %0d got %0d exp %0d", fo, op, nf * PE + p, od[p*AB +: AB], e);
          end
        end
        no++;
        if (no == OD * OD * NF) c0 = cyc;
      end
      if (iv && ir) ni++;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc - c0 > OD * OD * NF * SF + 64) begin
      failures++;
      $display("rate: %0d cycles for a frame, budget %0d", cyc - c0, OD * OD * NF * SF);
    end
    nseen = 0;
    foreach (seen[i]) nseen += int'(seen[i]);
    checks++;
    if (nseen < 3) begin failures++; $display("only %0d distinct activations", nseen); end
    $display("frame cycles %0d (folding budget %0d), %0d activation levels seen", cyc - c0, OD * OD * NF * SF, nseen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
