// fft_window: ADC code to signed level, then window weighting of each
// 1024-sample FFT segment.
//
// The spectrometer offers three window functions: none (rectangle), Hamming
// and Hanning, selected by the user.  This block turns each 3-bit ADC code c
// (offset binary, 0..7) into the odd signed level 2c-7 (-7..+7), and multiplies
// it by the window coefficient for its position n in the segment:
//   rectangle  w = 256
//   Hamming    w = round(256 * (0.54 - 0.46 cos(2 pi n / N)))
//   Hanning    w = round(256 * (0.5  - 0.5  cos(2 pi n / N)))
// so a coefficient of 256 stands for 1.0 and the 12-bit product carries 8
// fraction bits, which the FFT removes again at its output.  The coefficient
// tables are computed when the design is elaborated.
//
// Interface: one sample per clock when in_valid is high; the segment position
// counts valid samples from reset.  win_sel is sampled at the first sample of
// every segment so a segment is never weighted by two windows.
// Timing: one register stage, out_valid follows in_valid by one cycle.
//
// From the specification: 3-bit samples, 1024-point segments, the three
// window types.  Own choices: the ADC level mapping (mid-rise, odd levels),
// the 8-bit coefficient precision, and the segment alignment from reset.
module fft_window
  import drs4_pkg::*;
#(
  parameter int N = FFT_N
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  win_t                     win_sel,
  input  logic                     in_valid,
  input  logic [ADC_W-1:0]         in_code,
  output logic                     out_valid,
  output logic signed [SMP_W-1:0]  out_sample
);

  localparam int AW = $clog2(N);
  typedef logic [WIN_W-1:0] coef_t;

  function automatic coef_t wcoef(int n, real a0);
    real v;
    v = 256.0 * (a0 - (1.0 - a0) * $cos(2.0 * 3.14159265358979323846 * n / N));
    return coef_t'($rtoi(v + 0.5));
  endfunction

  function automatic coef_t [N-1:0] mk_table(real a0);
    coef_t [N-1:0] t;
    for (int i = 0; i < N; i++) t[i] = wcoef(i, a0);
    return t;
  endfunction

  localparam coef_t [N-1:0] HAMMING = mk_table(0.54);
  localparam coef_t [N-1:0] HANNING = mk_table(0.5);

  logic [AW-1:0] pos;
  win_t          win_seg;     // window in force for the current segment
  win_t          win_now;
  coef_t         coef;
  logic signed [4:0] level;

  assign win_now = (pos == '0) ? win_sel : win_seg;

  always_comb begin
    case (win_now)
      WIN_HAMMING: coef = HAMMING[pos];
      WIN_HANNING: coef = HANNING[pos];
      default:     coef = coef_t'(256);
    endcase
    level = 5'(signed'({2'b00, in_code}) * 2) - 5'sd7;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos        <= '0;
      win_seg    <= WIN_RECT;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        pos        <= pos + 1'b1;
        win_seg    <= win_now;
        out_sample <= SMP_W'(level * signed'({1'b0, coef}));
      end
    end
  end

endmodule
