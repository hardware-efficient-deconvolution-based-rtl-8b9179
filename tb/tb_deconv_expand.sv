// tb_deconv_expand: self-checking test of the expansion / zero-padding unit.
//
// Test 1 reproduces the 3x3 -> 5x5 stride-2 example (values 1..9, zeros
// inserted between pixels, no border) and compares with the expected 5x5 map
// written out by hand. Test 2 runs a 4x4x4-channel map, SIMD 2, kernel 4,
// stride 2, pad 1 (11x11 expanded) through the unit twice with random valid
// and ready gaps and compares every beat with a reference built from the
// zero-insertion rule; with no gaps it also checks one beat per cycle.
module tb_deconv_expand;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- test 1: 3x3 -> 5x5 ----------------
  logic a_iv, a_ir, a_ov, a_or;
  logic [3:0] a_id, a_od;
  deconv_expand #(.CH(1), .SIMD(1), .EBITS(4), .IN_DIM(3), .K(3), .STRIDE(2), .PAD(2)) u_a (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));

  // ---------------- test 2: 4x4x4, SIMD 2 -------------
  localparam int CH = 4, SIMD = 2, EB = 4, ID = 4, K = 4, S = 2, P = 1;
  localparam int ED = (ID - 1) * S + 1 + 2 * (K - 1 - P);
  localparam int CF = CH / SIMD;
  logic b_iv, b_ir, b_ov, b_or;
  logic [SIMD*EB-1:0] b_id, b_od;
  deconv_expand #(.CH(CH), .SIMD(SIMD), .EBITS(EB), .IN_DIM(ID), .K(K), .STRIDE(S), .PAD(P)) u_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  logic [SIMD*EB-1:0] img [ID*ID*CF];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fig_in [9];
    int fig_out [25];
    int n_in, n_out, cyc, t0;
    fig_in  = '{1, 4, 7, 2, 5, 8, 3, 6, 9};
    fig_out = '{1, 0, 4, 0, 7,
                0, 0, 0, 0, 0,
                2, 0, 5, 0, 8,
                0, 0, 0, 0, 0,
                3, 0, 6, 0, 9};
    a_iv = 0; a_or = 0; a_id = 0; b_iv = 0; b_or = 0; b_id = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // test 1
    n_in = 0; n_out = 0;
    a_or = 1;
    while (n_out < 25) begin
      a_iv = (n_in < 9);
      a_id = 4'(n_in < 9 ? fig_in[n_in] : 0);
      #1;
      if (a_ov && a_or) begin
        checks++;
        if (int'(a_od) != fig_out[n_out]) begin
          failures++;
          $display("fig: pos %0d got %0d exp %0d", n_out, a_od, fig_out[n_out]);
        end
        n_out++;
      end
      if (a_iv && a_ir) n_in++;
      @(negedge clk);
    end
    a_iv = 0; a_or = 0;
    checks++;
    if (n_in != 9) begin failures++; $display("fig: consumed %0d inputs", n_in); end

    // test 2: two frames, first with gaps, second without
    for (int i = 0; i < ID * ID * CF; i++) img[i] = (SIMD*EB)'($urandom);
    for (int fr = 0; fr < 2; fr++) begin
      n_in = 0; n_out = 0; cyc = 0;
      @(negedge clk);
      while (n_out < ED * ED * CF) begin
        int oy, ox, c, ey, ex;
        logic [SIMD*EB-1:0] exp_d;
        b_iv = (n_in < ID * ID * CF) && (fr == 1 || ($urandom % 4 != 0));
        b_id = img[n_in % (ID * ID * CF)];
        b_or = (fr == 1) || ($urandom % 3 != 0);
        #1;
        if (b_ov && b_or) begin
          oy = n_out / (ED * CF); ox = (n_out / CF) % ED; c = n_out % CF;
          ey = oy - (K - 1 - P); ex = ox - (K - 1 - P);
          if (ey >= 0 && ex >= 0 && ey % S == 0 && ex % S == 0 && ey / S < ID && ex / S < ID)
            exp_d = img[((ey / S) * ID + ex / S) * CF + c];
          else
            exp_d = '0;
          checks++;
          if (b_od !== exp_d) begin
            failures++;
            $display("f%0d beat %0d got %h exp %h", fr, n_out, b_od, exp_d);
          end
          n_out++;
        end
        if (b_iv && b_ir) n_in++;
        @(negedge clk);
        cyc++;
      end
      b_iv = 0; b_or = 0;
      checks++;
      if (n_in != ID * ID * CF) begin failures++; $display("consumed %0d", n_in); end
      if (fr == 1) begin
        checks++;
        if (cyc != ED * ED * CF) begin
          failures++;
          $display("rate: %0d cycles for %0d beats", cyc, ED * ED * CF);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
