// Self-checking test of texture_filter: random windows and masks; the score
// is recomputed as the sum of |p(r,c+1) - p(r,c)| over pairs inside the
// image and the flag as score >= threshold.
module tb_texture_filter;
  localparam int K = 5;
  logic [K-1:0][K-1:0][7:0] win;
  logic [K-1:0][K-1:0]      in_img;
  logic [15:0] thresh, score;
  logic textured;
  int checks = 0, failures = 0;

  texture_filter #(.K(K), .DW(8), .SW(16)) dut (.win, .in_img, .thresh, .score, .textured);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_tex = 0, n_flat = 0;
    for (int t = 0; t < 600; t++) begin
      int s, a, b;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          win[r][c]    = (t % 3 == 0) ? 8'(100 + $urandom_range(0, 2)) : 8'($urandom_range(0, 255));
          in_img[r][c] = 1'($urandom_range(0, 4) != 0);
        end
      thresh = 16'($urandom_range(0, 3000));
      #1;
      s = 0;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K - 1; c++)
          if (in_img[r][c] && in_img[r][c+1]) begin
            a = win[r][c]; b = win[r][c+1];
            s += (a > b) ? a - b : b - a;
          end
      checks += 2;
      if (score !== 16'(s)) failures++;
      if (textured !== (s >= int'(thresh))) failures++;
      if (textured) n_tex++; else n_flat++;
    end
    checks++;
    if (n_tex == 0 || n_flat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
