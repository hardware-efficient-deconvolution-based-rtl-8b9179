// tb_weight_mem: self-checking test of the per-PE weight memory.
//
// Fills all 64 words with random data, reads them back in a shuffled order
// (data due one cycle after the read), checks that a disabled read keeps the
// previous data, and that a write lands only at its own address.
module tb_weight_mem;
  localparam int SIMD = 4, WBITS = 4, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [5:0] waddr, raddr;
  logic [SIMD*WBITS-1:0] wdata, rdata;
  weight_mem #(.SIMD(SIMD), .WBITS(WBITS), .DEPTH(DEPTH)) dut (.*);

  logic [SIMD*WBITS-1:0] ref_m [DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(input int a);
    re = 1; raddr = 6'(a);
    @(negedge clk);
    re = 0;
    checks++;
    if (rdata !== ref_m[a]) begin
      failures++;
      $display("addr %0d got %h exp %h", a, rdata, ref_m[a]);
    end
  endtask

  initial begin
    logic [SIMD*WBITS-1:0] held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      ref_m[a] = (SIMD*WBITS)'($urandom);
      we = 1; waddr = 6'(a); wdata = ref_m[a];
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < DEPTH; i++) check_read((i * 37) % DEPTH);
    // read disabled: output holds
    held = rdata;
    raddr = 6'(5);
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== held) begin failures++; $display("read enable ignored"); end
    // single write
    ref_m[9] = ~ref_m[9];
    we = 1; waddr = 6'(9); wdata = ref_m[9];
    @(negedge clk);
    we = 0;
    check_read(9);
    check_read(8);
    check_read(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
