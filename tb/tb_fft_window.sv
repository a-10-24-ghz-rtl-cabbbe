// tb_fft_window: checks ADC level mapping and the three window functions.
//
// Four 1024-sample segments of random codes are streamed: rectangle, Hamming,
// Hanning, then Hamming requested halfway through a rectangle segment (it must
// take effect only at the next segment boundary, so the whole segment stays
// rectangular).  Every output is compared with (2c-7) * round(256 * w(n))
// computed here from the window formulas, and the one-cycle latency is
// checked.
module tb_fft_window;
  import drs4_pkg::*;
  localparam int N = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  win_t win_sel = WIN_RECT;
  logic in_valid = 0;
  logic [2:0] in_code = '0;
  logic out_valid;
  logic signed [SMP_W-1:0] out_sample;

  fft_window dut (.clk, .rst_n, .win_sel, .in_valid, .in_code, .out_valid, .out_sample);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_coef(win_t w, int n);
    real a0;
    if (w == WIN_RECT) return 256;
    a0 = (w == WIN_HAMMING) ? 0.54 : 0.5;
    return $rtoi(256.0 * (a0 - (1.0 - a0) * $cos(2.0 * 3.14159265358979323846 * n / N)) + 0.5);
  endfunction

  win_t seg_win [4] = '{WIN_RECT, WIN_HAMMING, WIN_HANNING, WIN_RECT};

  initial begin
    int c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      for (int n = 0; n < N; n++) begin
        c = $urandom_range(7);
        in_valid <= 1;
        in_code  <= 3'(c);
        if (n == 0) win_sel <= seg_win[s];
        if (s == 3 && n == N / 2) win_sel <= WIN_HAMMING;
        @(posedge clk);
        #1;
        checks++;
        if (!out_valid || int'(out_sample) != (2 * c - 7) * expect_coef(seg_win[s], n)) begin
          failures++;
          if (failures < 10) $display("seg %0d n %0d code %0d got %0d", s, n, c, out_sample);
        end
      end
    end
    in_valid <= 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
