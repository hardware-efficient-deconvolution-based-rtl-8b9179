// tb_stream_dwc: self-checking test of the stream width converter.
//
// Three instances (4 -> 16, 8 -> 2 and 8 -> 8 elements of 4 bits) get the
// same random element sequence with random valid/ready gaps; each output
// element stream must equal the input element sequence. A gap-free phase of
// the 4 -> 16 instance checks one input beat per cycle.
module tb_stream_dwc;
  localparam int EB = 4, NEL = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [EB-1:0] elems [NEL];

  logic u_iv, u_ir, u_ov, u_or;  logic [4*EB-1:0] u_id;  logic [16*EB-1:0] u_od;
  logic d_iv, d_ir, d_ov, d_or;  logic [8*EB-1:0] d_id;  logic [2*EB-1:0]  d_od;
  logic s_iv, s_ir, s_ov, s_or;  logic [8*EB-1:0] s_id;  logic [8*EB-1:0]  s_od;

  stream_dwc #(.IN_N(4), .OUT_N(16), .EBITS(EB)) u_up (.clk, .rst_n,
    .in_valid(u_iv), .in_ready(u_ir), .in_data(u_id), .out_valid(u_ov), .out_ready(u_or), .out_data(u_od));
  stream_dwc #(.IN_N(8), .OUT_N(2), .EBITS(EB)) u_dn (.clk, .rst_n,
    .in_valid(d_iv), .in_ready(d_ir), .in_data(d_id), .out_valid(d_ov), .out_ready(d_or), .out_data(d_od));
  stream_dwc #(.IN_N(8), .OUT_N(8), .EBITS(EB)) u_eq (.clk, .rst_n,
    .in_valid(s_iv), .in_ready(s_ir), .in_data(s_id), .out_valid(s_ov), .out_ready(s_or), .out_data(s_od));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs one converter through all NEL elements.
  task automatic run(input int which, input int in_n, input int out_n, input bit gaps,
                     output int cycles);
    int ni, no;
    ni = 0; no = 0; cycles = 0;
    while (no < NEL) begin
      logic iv, ov, ir;
      logic [8*16-1:0] word, od;
      iv = (ni < NEL) && (!gaps || $urandom % 3 != 0);
      word = '0;
      for (int e = 0; e < in_n; e++) word[e*EB +: EB] = elems[(ni + e) % NEL];
      case (which)
        0: begin u_iv = iv; u_id = word[4*EB-1:0]; u_or = !gaps || $urandom % 3 != 0; end
        1: begin d_iv = iv; d_id = word[8*EB-1:0]; d_or = !gaps || $urandom % 3 != 0; end
        default: begin s_iv = iv; s_id = word[8*EB-1:0]; s_or = !gaps || $urandom % 3 != 0; end
      endcase
      #1;
      case (which)
        0: begin ov = u_ov && u_or; od = 128'(u_od); ir = u_ir; end
        1: begin ov = d_ov && d_or; od = 128'(d_od); ir = d_ir; end
        default: begin ov = s_ov && s_or; od = 128'(s_od); ir = s_ir; end
      endcase
      if (ov) begin
        for (int e = 0; e < out_n; e++) begin
          checks++;
          if (od[e*EB +: EB] !== elems[no + e]) begin
            failures++;
            if (failures < 10) $display("dwc%0d element %0d got %h exp %h", which, no + e, od[e*EB +: EB], elems[no + e]);
          end
        end
        no += out_n;
      end
      if (iv && ir) ni += in_n;
      @(negedge clk);
      cycles++;
    end
    u_iv = 0; d_iv = 0; s_iv = 0; u_or = 0; d_or = 0; s_or = 0;
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < NEL; i++) elems[i] = EB'($urandom);
    u_iv = 0; d_iv = 0; s_iv = 0; u_or = 0; d_or = 0; s_or = 0;
    u_id = 0; d_id = 0; s_id = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0, 4, 16, 1, cyc);
    run(1, 8, 2, 1, cyc);
    run(2, 8, 8, 1, cyc);
    run(0, 4, 16, 0, cyc);
    checks++;
    if (cyc > NEL / 4 + 1) begin failures++; $display("up rate: %0d cycles", cyc); end
    run(1, 8, 2, 0, cyc);
    checks++;
    if (cyc > NEL / 2 + 1) begin failures++; $display("down rate: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
