// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipeline FFT.
//
// The stage holds L complex words in a circular delay line (L = half the
// butterfly span).  Samples are counted modulo 2L.  In the first half of each
// 2L block the input is parked in the delay line and the delay line's oldest
// word (the difference left by the previous block) leaves the stage after a
// multiplication by the twiddle factor W_N^(k*N/(2L)), k = position in the half
// block.  In the second half the butterfly runs: the sum of the parked word and
// the input leaves the stage, and their difference goes into the delay line.
// The twiddle table (cos and -sin, TW bits, 1.0 = 2^(TW-2)) is computed at
// elaboration; products are rounded to nearest.
//
// Interface: in_valid/in_re/in_im; everything advances only on valid
// samples.  out_valid is high for every valid input once the first L samples
// have filled the delay line.  Timing: the output word stream is the input
// stream delayed by L valid samples plus one clock (output register).  No
// scaling is applied; DW must hold the growth of all stages.
module fft_sdf_stage #(
  parameter int N  = 1024,     // FFT length
  parameter int L  = 512,      // delay length of this stage
  parameter int DW = 24,       // data width per component
  parameter int TW = 18        // twiddle width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);

  localparam int LW = (L > 1) ? $clog2(L) : 1;
  localparam int TF = TW - 2;                    // twiddle fraction bits
  typedef logic signed [TW-1:0] tw_t;

  function automatic tw_t twq(int m, bit is_sin);
    real ang, val;
    ang = 2.0 * 3.14159265358979323846 * m / N;
    val = (is_sin ? -$sin(ang) : $cos(ang)) * real'(1 << TF);
    return tw_t'($rtoi(val + ((val >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic tw_t [L-1:0] mk_tw(bit is_sin);
    tw_t [L-1:0] t;
    for (int k = 0; k < L; k++) t[k] = twq(k * (N / (2 * L)), is_sin);
    return t;
  endfunction

  localparam tw_t [L-1:0] TW_COS = mk_tw(1'b0);
  localparam tw_t [L-1:0] TW_SIN = mk_tw(1'b1);  // holds -sin

  logic [DW-1:0]  dl_re [L];
  logic [DW-1:0]  dl_im [L];
  logic [LW-1:0]  ptr;
  logic [LW-1:0]  k;
  logic           phase;
  logic           primed;

  logic signed [DW-1:0] f_re, f_im;              // delay-line output
  logic signed [DW-1:0] d_re, d_im;              // delay-line input
  logic signed [DW-1:0] o_re, o_im;
  logic signed [DW+TW-1:0] p_re, p_im;
  tw_t wc, ws;

  assign f_re = signed'(dl_re[(L > 1) ? ptr : '0]);
  assign f_im = signed'(dl_im[(L > 1) ? ptr : '0]);
  assign wc   = TW_COS[(L > 1) ? k : '0];
  assign ws   = TW_SIN[(L > 1) ? k : '0];

  always_comb begin
    // (f_re + j f_im) * (wc + j ws)
    p_re = f_re * wc - f_im * ws + (DW+TW)'(1 <<< (TF - 1));
    p_im = f_re * ws + f_im * wc + (DW+TW)'(1 <<< (TF - 1));
    if (phase) begin
      o_re = f_re + in_re;
      o_im = f_im + in_im;
      d_re = f_re - in_re;
      d_im = f_im - in_im;
    end else begin
      o_re = DW'(p_re >>> TF);
      o_im = DW'(p_im >>> TF);
      d_re = in_re;
      d_im = in_im;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      dl_re[(L > 1) ? ptr : '0] <= d_re;
      dl_im[(L > 1) ? ptr : '0] <= d_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      k         <= '0;
      phase     <= 1'b0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid & primed;
      if (in_valid) begin
        out_re <= o_re;
        out_im <= o_im;
        if (L > 1) begin
          ptr <= (ptr == LW'(L - 1)) ? '0 : ptr + 1'b1;
          k   <= (k   == LW'(L - 1)) ? '0 : k + 1'b1;
        end
        if (L == 1 || k == LW'(L - 1)) begin
          phase  <= ~phase;
          primed <= 1'b1;
        end
      end
    end
  end

endmodule
