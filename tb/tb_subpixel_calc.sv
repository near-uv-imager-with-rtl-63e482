// tb_subpixel_calc: checks numerators, sign flags and window sum on a
// window built to match the packet example of the design (Xc numerator 12
// with flag 1, Yc numerator 6 with flag 0, centre 37, window sum 289) and on
// 2000 random windows, against values computed here.
module tb_subpixel_calc;
  import centroid_pkg::*;

  window_t win;
  pix_t xc_nr, yc_nr;
  logic xc_flag, yc_flag;
  logic [SUM_W-1:0] sum;
  int checks = 0, failures = 0;

  subpixel_calc dut (.*);

  task automatic check(input int exr, input int exf, input int eyr, input int eyf, input int esum);
    #1;
    checks += 5;
    if (xc_nr != pix_t'(exr)) begin failures++; $display("FAIL xc_nr %0d exp %0d", xc_nr, exr); end
    if (xc_flag != exf[0])    begin failures++; $display("FAIL xc_flag"); end
    if (yc_nr != pix_t'(eyr)) begin failures++; $display("FAIL yc_nr %0d exp %0d", yc_nr, eyr); end
    if (yc_flag != eyf[0])    begin failures++; $display("FAIL yc_flag"); end
    if (sum != SUM_W'(esum))  begin failures++; $display("FAIL sum %0d exp %0d", sum, esum); end
  endtask

  initial begin
    // example event: centre 37, left 30, right 18, top 20, bottom 26,
    // remaining 20 pixels add up to 289 - 131 = 158
    win = '0;
    win[2][2] = 37; win[2][1] = 30; win[2][3] = 18; win[1][2] = 20; win[3][2] = 26;
    begin
      int left = 158, n = 0;
      for (int i = 0; i < 5; i++)
        for (int j = 0; j < 5; j++)
          if (!((i == 2 && j >= 1 && j <= 3) || (j == 2 && (i == 1 || i == 3)))) begin
            n++;
            win[i][j] = pix_t'((n < 20) ? 8 : left - 8 * 19);
          end
    end
    check(12, 1, 6, 0, 289);

    for (int t = 0; t < 2000; t++) begin
      int s, l, r, tp, b;
      s = 0;
      for (int i = 0; i < 5; i++)
        for (int j = 0; j < 5; j++) begin
          win[i][j] = pix_t'($urandom_range(0, (t % 2) ? 1023 : 40));
          s += int'(win[i][j]);
        end
      l = win[2][1]; r = win[2][3]; tp = win[1][2]; b = win[3][2];
      check((r >= l) ? r - l : l - r, (l > r) ? 1 : 0,
            (b >= tp) ? b - tp : tp - b, (tp > b) ? 1 : 0, s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
