// fft_r2sdf: streaming 1024-point FFT of a real sample stream, built as a
// chain of radix-2 single-path delay-feedback stages (fft_sdf_stage).
//
// The FFT takes one windowed sample per valid clock and gives one complex
// bin per valid clock, frame after frame with no gaps.  Because the stages
// decimate in frequency, the bins of a frame leave in bit-reversed order:
// the i-th output of a frame is bin bitrev(i).  out_bin carries that bin
// number, so downstream blocks never need a reorder buffer.  The lower 512
// bins are the spectrometer channels (20 MHz each at 20.48 GS/s); the upper
// half mirrors them for a real input and is dropped later.
//
// Arithmetic: the 12-bit input (window weight 1.0 = 256) grows by one bit per
// stage inside DW bits, with no scaling.  At the output the 8 window fraction
// bits are removed with rounding and the result is saturated to 14 bits per
// component, the 28-bit complex word of the signal flow.  With the rectangle
// window the output equals the exact DFT of the ADC levels up to twiddle
// rounding (|X| <= 7 * 1024 < 2^13, so nothing saturates).
//
// Interface: in_valid/in_sample; out_valid/out_bin/out_first (first output of
// a frame)/out.  The first frame starts with the first valid sample after
// reset.  Timing: a sample stream that never pauses gives an output stream
// that never pauses; the output of a frame starts N-1 valid samples plus
// log2(N) clocks after its input starts, so each frame is flushed by the
// samples of the next one.
//
// From the specification: 1024 points, 512 channels, 28-bit output.  Own
// choices: the SDF architecture, one sample per clock, internal and twiddle
// widths, output rounding and saturation.
module fft_r2sdf
  import drs4_pkg::*;
#(
  parameter int N      = FFT_N,
  parameter int IW     = SMP_W,
  parameter int DW     = 24,
  parameter int TW     = 18,
  parameter int OSHIFT = WIN_FRAC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IW-1:0]     in_sample,
  output logic                     out_valid,
  output logic [$clog2(N)-1:0]     out_bin,
  output logic                     out_first,
  output fft_cplx_t                out
);

  localparam int S  = $clog2(N);
  localparam int OW = FFT_CW;

  logic                 v  [S+1];
  logic signed [DW-1:0] re [S+1];
  logic signed [DW-1:0] im [S+1];

  assign v[0]  = in_valid;
  assign re[0] = DW'(in_sample);
  assign im[0] = '0;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.N(N), .L(N >> (s + 1)), .DW(DW), .TW(TW)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v[s]),
      .in_re    (re[s]),
      .in_im    (im[s]),
      .out_valid(v[s+1]),
      .out_re   (re[s+1]),
      .out_im   (im[s+1])
    );
  end

  function automatic logic signed [OW-1:0] scale_sat(logic signed [DW-1:0] x);
    logic signed [DW-1:0] r;
    r = (x + DW'(1 <<< (OSHIFT - 1))) >>> OSHIFT;
    if (r > DW'((1 <<< (OW - 1)) - 1))  return OW'((1 <<< (OW - 1)) - 1);
    if (r < -DW'(1 <<< (OW - 1)))       return OW'(-(1 <<< (OW - 1)));
    return OW'(r);
  endfunction

  logic [S-1:0] ocnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_bin   <= '0;
      out_first <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= v[S];
      if (v[S]) begin
        ocnt      <= ocnt + 1'b1;
        out_first <= (ocnt == '0);
        for (int i = 0; i < S; i++) out_bin[i] <= ocnt[S-1-i];
        out.re    <= scale_sat(re[S]);
        out.im    <= scale_sat(im[S]);
      end
    end
  end

endmodule
