// Self-checking test of census_xform: random 5x5 windows with random border
// masks; the expected code is rebuilt bit by bit from the definition
// (neighbour darker than centre, raster order, centre skipped).
module tb_census_xform;
  localparam int K = 5;
  logic [K-1:0][K-1:0][7:0] win;
  logic [K-1:0][K-1:0]      in_img;
  logic [K*K-2:0]           census;
  int checks = 0, failures = 0;

  census_xform #(.K(K), .DW(8)) dut (.win, .in_img, .census);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      logic [K*K-2:0] exp_c;
      int b;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          win[r][c]    = 8'($urandom_range(0, 255));
          in_img[r][c] = (t < 100) ? 1'b1 : 1'($urandom_range(0, 3) != 0);
        end
      if (t == 0) for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) win[r][c] = 8'(r * K + c);
      #1;
      b = 0;
      for (int i = 0; i < K * K; i++) begin
        if (i == (K * K) / 2) continue;
        exp_c[b] = in_img[i / K][i % K] && (win[i / K][i % K] < win[K/2][K/2]);
        b++;
      end
      checks++;
      if (census !== exp_c) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d got %h exp %h", t, census, exp_c);
      end
    end
    // ramp window: the 12 cells before the centre are darker
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
