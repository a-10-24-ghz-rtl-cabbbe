// tb_fft_r2sdf: checks the 1024-point streaming FFT against a direct DFT.
//
// Three frames of random ADC levels (rectangle weight 256) are streamed with
// no gaps, followed by one flush frame.  Every output bin of the three frames
// is compared with a DFT computed here in floating point (tolerance 2 LSB),
// the bin numbering (bit-reversed order) and out_first are checked, and the
// latency from the first input to the first output is checked against
// N - 1 valid samples + log2(N) + 1 register clocks (+1 for how the test counts).
module tb_fft_r2sdf;
  import drs4_pkg::*;

  localparam int N  = 1024;
  localparam int NF = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic signed [SMP_W-1:0] in_sample = '0;
  logic out_valid, out_first;
  logic [9:0] out_bin;
  fft_cplx_t out;

  fft_r2sdf dut (.clk, .rst_n, .in_valid, .in_sample, .out_valid, .out_bin, .out_first, .out);

  int checks = 0, failures = 0;
  int lev [NF][N];
  real cs [N], sn [N];
  int in_cycle0 = -1, out_cycle0 = -1, cyc = 0;
  int nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_bin(int f, int idx, int bin, fft_cplx_t o, logic first);
    real xr, xi;
    int er, ei;
    xr = 0.0; xi = 0.0;
    for (int n = 0; n < N; n++) begin
      xr += lev[f][n] * cs[(bin * n) % N];
      xi -= lev[f][n] * sn[(bin * n) % N];
    end
    er = int'(o.re) - $rtoi(xr + (xr >= 0 ? 0.5 : -0.5));
    ei = int'(o.im) - $rtoi(xi + (xi >= 0 ? 0.5 : -0.5));
    checks++;
    if (er > 2 || er < -2 || ei > 2 || ei < -2) begin
      failures++;
      if (failures < 10) $display("frame %0d bin %0d: got %0d,%0d want %f,%f", f, bin, o.re, o.im, xr, xi);
    end
    checks++;
    if (bin != int'(bitrev10(10'(idx)))) failures++;
    checks++;
    if (first != (idx == 0)) failures++;
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && nout < NF * N) begin
      if (out_cycle0 < 0) out_cycle0 = cyc;
      check_bin(nout / N, nout % N, int'(out_bin), out, out_first);
      nout++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979323846 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979323846 * i / N);
    end
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) lev[f][n] = 2 * int'($urandom_range(7)) - 7;
    // frame 1: a pure tone in bin 37 plus small noise, exercises large outputs
    for (int n = 0; n < N; n++)
      lev[1][n] = (cs[(37 * n) % N] >= 0.0) ? 7 : -7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f <= NF; f++) begin
      for (int n = 0; n < N; n++) begin
        in_valid  <= 1;
        in_sample <= (f < NF) ? SMP_W'(lev[f][n] * 256) : '0;
        if (f == 0 && n == 0) in_cycle0 = cyc;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout != NF * N) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (out_cycle0 - in_cycle0 != N + 10 + 1) begin  // counted from the cycle the first sample is driven
      failures++;
      $display("latency %0d", out_cycle0 - in_cycle0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
