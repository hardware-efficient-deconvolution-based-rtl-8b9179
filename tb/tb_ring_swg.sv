// tb_ring_swg: self-checking test of the ring-buffer sliding window generator.
//
// A 7x7 map of 4 channels (SIMD 2) is streamed in for three frames back to
// back (frames 0 and 1 with random valid/ready gaps, frame 2 without) into a
// K = 3 window generator. Every output beat is compared with the window beat
// computed directly from the map (order ky, kx, channel fold). Frame 2 also
// checks the rate: once its first window beat is out, one beat per cycle
// until the frame ends.
module tb_ring_swg;
  localparam int CH = 4, SIMD = 2, EB = 4, DIM = 7, K = 3;
  localparam int CF = CH / SIMD, ODIM = DIM - K + 1;
  localparam int NIN = DIM * DIM * CF, NOUT = ODIM * ODIM * K * K * CF;
  localparam int NFR = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy;
  logic [SIMD*EB-1:0] id, od;
  ring_swg #(.CH(CH), .SIMD(SIMD), .EBITS(EB), .DIM(DIM), .K(K)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [SIMD*EB-1:0] img [NFR][NIN];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_in, n_out, cyc, first_cyc, last_cyc;
    for (int f = 0; f < NFR; f++)
      for (int i = 0; i < NIN; i++) img[f][i] = (SIMD*EB)'($urandom);
    iv = 0; ordy = 0; id = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    n_in = 0; n_out = 0; cyc = 0; first_cyc = -1; last_cyc = 0;
    while (n_out < NFR * NOUT) begin
      int fin, fout, r, oy, ox, ky, kx, c;
      logic [SIMD*EB-1:0] exp_d;
      fin  = n_in / NIN;
      fout = n_out / NOUT;
      iv   = (n_in < NFR * NIN) && (fin == 2 || ($urandom % 3 != 0));
      id   = img[fin < NFR ? fin : 0][n_in % NIN];
      ordy = (fout == 2) || ($urandom % 4 != 0);
      #1;
      if (ov && ordy) begin
        r  = n_out % NOUT;
        c  = r % CF;
        kx = (r / CF) % K;
        ky = (r / (CF * K)) % K;
        ox = (r / (CF * K * K)) % ODIM;
        oy = r / (CF * K * K * ODIM);
        exp_d = img[fout][((oy + ky) * DIM + ox + kx) * CF + c];
        checks++;
        if (od !== exp_d) begin
          failures++;
          if (failures < 10) $display("beat %0d got %h exp %h", n_out, od, exp_d);
        end
        if (fout == 2) begin
          if (first_cyc < 0) first_cyc = cyc;
          last_cyc = cyc;
        end
        n_out++;
      end
      if (iv && ir) n_in++;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (last_cyc - first_cyc != NOUT - 1) begin
      failures++;
      $display("rate: frame 2 took %0d cycles for %0d beats", last_cyc - first_cyc + 1, NOUT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
