// tb_threshold_unit: self-checking test of the multi-threshold activation.
//
// Loads 15 ascending random thresholds for each of 4 channel slots (4-bit
// output, 12-bit accumulator), then for random and boundary accumulator values
// compares the activation with the count of thresholds the value reaches.
module tb_threshold_unit;
  localparam int NF = 4, ABITS = 4, ACC = 12, NT = 15;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [1:0] wnf, rnf;
  logic [3:0] wt;
  logic signed [ACC-1:0] wdata, acc;
  logic [ABITS-1:0] act;
  threshold_unit #(.NF(NF), .ABITS(ABITS), .ACC_BITS(ACC)) dut (.*);

  int thr [NF][NT];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_act(input int f, input int a);
    int n;
    n = 0;
    for (int i = 0; i < NT; i++) if (a >= thr[f][i]) n++;
    return n;
  endfunction

  initial begin
    we = 0; re = 0; wnf = 0; rnf = 0; wt = 0; wdata = 0; acc = 0;
    @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      int t;
      t = -300 + int'($urandom % 50);
      for (int i = 0; i < NT; i++) begin
        thr[f][i] = t;
        t += 1 + int'($urandom % 40);
        we = 1; wnf = 2'(f); wt = 4'(i); wdata = ACC'(thr[f][i]);
        @(negedge clk);
      end
    end
    we = 0;
    for (int f = 0; f < NF; f++) begin
      re = 1; rnf = 2'(f);
      @(negedge clk);
      re = 0;
      for (int n = 0; n < 200; n++) begin
        int a;
        case (n % 4)
          0: a = thr[f][$urandom % NT];
          1: a = thr[f][$urandom % NT] - 1;
          default: a = int'($urandom % 1000) - 500;
        endcase
        acc = ACC'(a);
        #1;
        checks++;
        if (int'(act) != ref_act(f, a)) begin
          failures++;
          $display("slot %0d acc %0d got %0d exp %0d", f, a, act, ref_act(f, a));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
