// tb_mvau: self-checking test of the matrix-vector-activation unit.
//
// Two configurations run one after the other: W4A4 with unsigned 4-bit
// inputs (MW 32, MH 8, SIMD 4, PE 2) and 1-bit bipolar weights with signed
// 8-bit inputs and 2-bit outputs (MW 48, MH 6, SIMD 8, PE 3). Each checks
// every output activation against a reference and the NF*SF cycles per
// vector of the folding schedule.
module tb_mvau;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s0 = 0, s1 = 0, d0, d1;
  int c0, f0, c1, f1;

  mvau_check #(.MW(32), .MH(8), .SIMD(4), .PE(2), .IN_BITS(4), .IN_SIGNED(0),
               .WBITS(4), .ABITS(4)) u_a (.clk, .rst_n, .start(s0), .done(d0), .checks(c0), .failures(f0));
  mvau_check #(.MW(48), .MH(6), .SIMD(8), .PE(3), .IN_BITS(8), .IN_SIGNED(1),
               .WBITS(1), .ABITS(2)) u_b (.clk, .rst_n, .start(s1), .done(d1), .checks(c1), .failures(f1));

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    s0 = 1;
    wait (d0);
    s1 = 1;
    wait (d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
