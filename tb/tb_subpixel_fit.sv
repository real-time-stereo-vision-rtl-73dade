// Self-checking test of subpixel_fit against the parabola vertex computed in
// real arithmetic: |got - 16*(cl-cr)/(2*(cl+cr-2*c0))| must be <= 1/2 LSB
// (exact rounding ties may go either way), and 0 at the range ends.
module tb_subpixel_fit;
  logic [11:0] cl, c0, cr;
  logic edge_flag;
  logic signed [5:0] offset;
  int checks = 0, failures = 0;

  subpixel_fit #(.SW(12), .FRAC(4)) dut (.cl, .c0, .cr, .edge_flag, .offset);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int a, input int m, input int b, input bit e);
    real exp_r;
    cl = 12'(a); c0 = 12'(m); cr = 12'(b); edge_flag = e;
    #1;
    checks++;
    if (e || (a + b - 2 * m) <= 0) begin
      if (offset != 0) failures++;
    end else begin
      exp_r = 16.0 * real'(a - b) / (2.0 * real'(a + b - 2 * m));
      if ((real'(offset) - exp_r > 0.5001) || (exp_r - real'(offset) > 0.5001)) begin
        failures++;
        if (failures < 5) $display("cl=%0d c0=%0d cr=%0d got %0d exp %f", a, m, b, offset, exp_r);
      end
    end
  endtask

  initial begin
    check(20, 10, 20, 0);   // symmetric: 0
    check(30, 10, 10, 0);   // flat right side: +1/2 pixel = 8
    check(10, 10, 30, 0);   // -8
    check(14, 10, 22, 0);
    check(14, 10, 22, 1);   // range end
    check(10, 10, 10, 0);   // flat
    if (1) begin
      cl = 12'd30; c0 = 12'd10; cr = 12'd10; edge_flag = 0; #1;
      checks++; if (offset != 6'sd8) failures++;
    end
    for (int t = 0; t < 2000; t++) begin
      int m = $urandom_range(0, 1000);
      check(m + $urandom_range(0, 800), m, m + $urandom_range(0, 800), 1'($urandom_range(0, 9) == 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
