// Self-checking test of uniq_check: c* * q < c2 with q in 1/16 steps,
// checked against real arithmetic, including ties and q = 1.
module tb_uniq_check;
  logic [11:0] c_best, c_second;
  logic [7:0] q;
  logic unique_ok;
  int checks = 0, failures = 0;

  uniq_check #(.SW(12), .QW(8), .QF(4)) dut (.c_best, .c_second, .q, .unique_ok);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int b, input int s, input int qq);
    bit exp_ok;
    c_best = 12'(b); c_second = 12'(s); q = 8'(qq);
    #1;
    exp_ok = (real'(b) * real'(qq) / 16.0) < real'(s);
    checks++;
    if (unique_ok !== exp_ok) begin
      failures++;
      if (failures < 5) $display("b=%0d s=%0d q=%0d got %0b", b, s, qq, unique_ok);
    end
  endtask

  initial begin
    check(100, 100, 16);   // tie: not unique
    check(100, 101, 16);   // unique at q = 1
    check(100, 110, 16 * 11 / 10 + 1); // q = 1.125 > 1.1: not unique
    check(100, 115, 18);   // 112.5 < 115: unique
    check(0, 0, 16);
    check(4095, 4095, 255);
    for (int t = 0; t < 3000; t++)
      check($urandom_range(0, 4095), $urandom_range(0, 4095), $urandom_range(16, 255));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
