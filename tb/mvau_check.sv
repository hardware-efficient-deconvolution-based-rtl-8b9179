// mvau_check: test harness for one mvau configuration, used by tb_mvau.
//
// Loads random weights and ascending random thresholds through the
// configuration port, streams NV random input vectors (random valid/ready
// gaps in the first half, none in the second), and compares every output
// activation with a dot-product-and-threshold reference. For the gap-free
// half it checks the folding rate: NF*SF cycles per vector.
module mvau_check
  import qdcgan_pkg::*;
#(
  parameter int MW = 32,
  parameter int MH = 8,
  parameter int SIMD = 4,
  parameter int PE = 2,
  parameter int IN_BITS = 4,
  parameter bit IN_SIGNED = 1'b0,
  parameter int WBITS = 4,
  parameter int ABITS = 4,
  parameter int NV = 12
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int SF = MW / SIMD, NF = MH / PE, NT = (1 << ABITS) - 1;
  localparam int TW = (NT > 1) ? $clog2(NT) : 1;
  localparam int ACC = acc_bits(MW, IN_BITS, WBITS);

  logic cfg_we;
  cfg_kind_e cfg_kind;
  logic [CFG_PE_W-1:0] cfg_pe;
  logic [CFG_ADDR_W-1:0] cfg_addr;
  logic [CFG_DATA_W-1:0] cfg_data;
  logic iv, ir, ov, ordy;
  logic [SIMD*IN_BITS-1:0] id;
  logic [PE*ABITS-1:0] od;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_BITS(IN_BITS), .IN_SIGNED(IN_SIGNED),
         .WBITS(WBITS), .ABITS(ABITS)) dut (
    .clk, .rst_n, .cfg_we, .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
    .in_valid(iv), .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [WBITS-1:0]   w [MH][MW];
  logic [IN_BITS-1:0] x [NV][MW];
  int thr [MH][NT];

  function automatic int ref_out(input int v, input int co);
    int a, n;
    a = 0;
    for (int i = 0; i < MW; i++)
      a += weight_value(8'(w[co][i]), WBITS) * act_value(16'(x[v][i]), IN_BITS, IN_SIGNED);
    n = 0;
    for (int t = 0; t < NT; t++) if (a >= thr[co][t]) n++;
    return n;
  endfunction

  initial begin
    int ni, no, cyc, c0, spread, nseen;
    bit seen [1 << ABITS];
    checks = 0; failures = 0; done = 0;
    foreach (seen[i]) seen[i] = 0;
    cfg_we = 0; cfg_kind = CFG_WEIGHT; cfg_pe = 0; cfg_addr = 0; cfg_data = 0;
    iv = 0; ordy = 0; id = 0;
    for (int co = 0; co < MH; co++) for (int i = 0; i < MW; i++) w[co][i] = WBITS'($urandom);
    for (int v = 0; v < NV; v++) for (int i = 0; i < MW; i++) x[v][i] = IN_BITS'($urandom);
    spread = 2 + MW * (1 << IN_BITS) * (1 << WBITS) / (16 * NT);
    for (int co = 0; co < MH; co++) begin
      int t;
      t = -(NT / 2) * spread + int'($urandom % spread);
      for (int k = 0; k < NT; k++) begin
        thr[co][k] = t;
        t += 1 + int'($urandom % (2 * spread));
      end
    end
    wait (start);
    @(negedge clk);
    // weights
    for (int co = 0; co < MH; co++)
      for (int s = 0; s < SF; s++) begin
        cfg_we = 1; cfg_kind = CFG_WEIGHT; cfg_pe = CFG_PE_W'(co % PE);
        cfg_addr = CFG_ADDR_W'((co / PE) * SF + s);
        cfg_data = '0;
        for (int j = 0; j < SIMD; j++) cfg_data[j*WBITS +: WBITS] = w[co][s*SIMD + j];
        @(negedge clk);
      end
    // thresholds
    for (int co = 0; co < MH; co++)
      for (int k = 0; k < NT; k++) begin
        cfg_we = 1; cfg_kind = CFG_THRESHOLD; cfg_pe = CFG_PE_W'(co % PE);
        cfg_addr = CFG_ADDR_W'(((co / PE) << TW) | k);
        cfg_data = CFG_DATA_W'(ACC'(thr[co][k]));
        @(negedge clk);
      end
    cfg_we = 0;
    ni = 0; no = 0; cyc = 0; c0 = 0;
    while (no < NV * NF) begin
      bit gaps;
      gaps = (no < (NV / 2) * NF);
      iv = (ni < NV * SF) && (!gaps || $urandom % 3 != 0);
      for (int j = 0; j < SIMD; j++) id[j*IN_BITS +: IN_BITS] = x[(ni / SF) % NV][(ni % SF) * SIMD + j];
      ordy = !gaps || ($urandom % 2 != 0);
      #1;
      if (ov && ordy) begin
        for (int p = 0; p < PE; p++) begin
          int e;
          e = ref_out(no / NF, (no % NF) * PE + p);
          seen[e] = 1;
          checks++;
          if (int'(od[p*ABITS +: ABITS]) != e) begin
            failures++;
            if (failures < 10) $display("mvau vec %0d ch %0d got %0d exp %0d", no / NF, (no % NF) * PE + p, od[p*ABITS +: ABITS], e);
          end
        end
        no++;
        if (no == (NV / 2) * NF) c0 = cyc;
      end
      if (iv && ir) ni++;
      @(negedge clk);
      cyc++;
    end
    // gap-free half: last output NV/2 vectors after the previous half ended
    checks++;
    if (cyc - c0 > (NV - NV / 2) * NF * SF + 3) begin
      failures++;
      $display("mvau rate: %0d cycles for %0d vectors, expected %0d", cyc - c0, NV - NV / 2, (NV - NV / 2) * NF * SF);
    end
    // the stimulus must exercise more than the two saturated outputs
    nseen = 0;
    foreach (seen[i]) nseen += int'(seen[i]);
    checks++;
    if (nseen < 3) begin failures++; $display("only %0d distinct activations", nseen); end
    done = 1;
  end
endmodule
