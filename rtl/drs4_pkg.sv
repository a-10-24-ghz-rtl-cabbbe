// drs4_pkg: constants, types and arithmetic helpers shared by the DRS4
// spectrometer datapath.
//
// The numbers that come from the spectrometer specification are the FFT
// length (1024 points, 512 channels of 20 MHz), the 3-bit ADC samples, the
// per-block output widths of the signal flow (FFT 28 bit complex, sideband
// separation 34 bit complex, power and cross power 53 bit, integrated output
// 32-bit floating point), the three window functions, the two DSP modes and
// the four dumping times.  Everything else here (the split of a complex word
// into equal real/imaginary halves, the 16-bit complex-gain format, the tag
// carried along the pipeline, the float rounding mode) is a choice of this
// implementation.
//
// Float helpers: int_to_fp32() converts a signed 53-bit integer to IEEE-754
// single precision with round-to-nearest-even; fp32_add() adds two normal
// single-precision numbers with round-to-nearest-even (zero is handled,
// denormals are flushed to zero, overflow saturates to infinity; NaN is never
// produced by the datapath and is not handled).
package drs4_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int FFT_N      = 1024;              // FFT points
  localparam int NCHAN      = FFT_N / 2;         // frequency channels
  localparam int CHAN_W     = $clog2(NCHAN);     // 9
  localparam int ADC_W      = 3;                 // ADC bits (8 levels)
  localparam int FFT_CW     = 14;                // FFT output, per component (28 bit complex)
  localparam int DSBS_CW    = 17;                // DSBS output, per component (34 bit complex)
  localparam int PWR_W      = 53;                // ()^2 and cross-correlation output
  localparam int FLT_W      = 32;                // integrated output (float32)
  localparam int CG_W       = 16;                // complex gain component width
  localparam int CG_FRAC    = 14;                // complex gain fraction bits (1.0 = 2^14)
  localparam int WIN_W      = 9;                 // window coefficient width (1.0 = 256)
  localparam int WIN_FRAC   = 8;
  localparam int SMP_W      = 12;                // windowed sample width
  localparam int FRAMES_PER_MS = 20000;          // 20.48 GS/s / 1024 points = 20 000 frames per ms

  // --------------------------------------------------------------- enums
  typedef enum logic [1:0] {WIN_RECT = 2'd0, WIN_HAMMING = 2'd1, WIN_HANNING = 2'd2} win_t;
  typedef enum logic       {MODE_OBS = 1'b0, MODE_CAL = 1'b1} mode_t;
  typedef enum logic [1:0] {DUMP_100MS = 2'd0, DUMP_200MS = 2'd1,
                            DUMP_500MS = 2'd2, DUMP_1000MS = 2'd3} dump_t;

  function automatic int unsigned dump_ms(dump_t d);
    case (d)
      DUMP_100MS:  return 100;
      DUMP_200MS:  return 200;
      DUMP_500MS:  return 500;
      default:     return 1000;
    endcase
  endfunction

  // --------------------------------------------------------------- types
  typedef struct packed {
    logic signed [FFT_CW-1:0] re;
    logic signed [FFT_CW-1:0] im;
  } fft_cplx_t;                                   // 28 bit

  typedef struct packed {
    logic signed [DSBS_CW-1:0] re;
    logic signed [DSBS_CW-1:0] im;
  } dsbs_cplx_t;                                  // 34 bit

  typedef struct packed {
    logic signed [CG_W-1:0] re;
    logic signed [CG_W-1:0] im;
  } cgain_t;                                      // one complex gain

  localparam cgain_t CGAIN_ONE = '{re: 16'sd16384, im: 16'sd0};  // 1 + 0j

  // Sideband information that travels with every channel sample.
  typedef struct packed {
    logic [CHAN_W-1:0] chan;    // frequency channel 0..511
    logic              first;   // sample belongs to the first frame of an integration
    logic              eoi;     // last sample of the last frame of an integration
    mode_t             mode;    // DSP mode of this integration
  } tag_t;

  // ------------------------------------------------------- bit reversal
  function automatic logic [9:0] bitrev10(logic [9:0] v);
    logic [9:0] r;
    for (int i = 0; i < 10; i++) r[i] = v[9-i];
    return r;
  endfunction

  // -------------------------------------------------- integer -> float32
  function automatic logic [31:0] int_to_fp32(logic signed [PWR_W-1:0] v);
    logic              s;
    logic [PWR_W-1:0]  mag;
    logic [63:0]       norm;
    logic [23:0]       m;
    logic [24:0]       mr;
    logic              g, st;
    int                p;
    logic [7:0]        e;
    s   = v[PWR_W-1];
    mag = s ? PWR_W'(-v) : PWR_W'(v);
    if (mag == '0) return 32'h0;
    p = 0;
    for (int i = 0; i < PWR_W; i++) if (mag[i]) p = i;
    norm = 64'(mag) << (63 - p);
    m  = norm[63:40];
    g  = norm[39];
    st = |norm[38:0];
    mr = {1'b0, m} + 25'((g && (st || m[0])) ? 1 : 0);
    e  = 8'(127 + p);
    if (mr[24]) begin
      e  = e + 8'd1;
      mr = mr >> 1;
    end
    return {s, e, mr[22:0]};
  endfunction

  // ----------------------------------------------------- float32 adder
  function automatic logic [31:0] fp32_add(logic [31:0] a_in, logic [31:0] b_in);
    logic [31:0] a, b;
    logic [7:0]  ea, eb;
    logic [26:0] ma, mb, mbs;       // 1.23 mantissa + guard, round, sticky
    logic [27:0] sum;
    logic [23:0] m;
    logic [24:0] mr;
    logic        g, r, st, sgn;
    int          d, e, lz;
    if (b_in[30:0] > a_in[30:0]) begin a = b_in; b = a_in; end
    else begin a = a_in; b = b_in; end
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'd0) return 32'h0;          // both operands zero (or denormal)
    if (eb == 8'd0) return a;
    ma = {1'b1, a[22:0], 3'b000};
    mb = {1'b1, b[22:0], 3'b000};
    d  = int'(ea) - int'(eb);
    if (d >= 27) mbs = 27'd1;
    else begin
      mbs = mb >> d;
      if ((mb & ((27'd1 << d) - 27'd1)) != 27'd0) mbs[0] = 1'b1;
    end
    e   = int'(ea);
    sgn = a[31];
    if (a[31] == b[31]) begin
      sum = {1'b0, ma} + {1'b0, mbs};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = {1'b0, ma} - {1'b0, mbs};
      if (sum == 28'd0) return 32'h0;
      lz = 0;
      for (int i = 26; i >= 0; i--) if (sum[i] && lz == 0) lz = 27 - i;
      lz  = lz - 1;
      sum = sum << lz;
      e   = e - lz;
    end
    m  = sum[26:3];
    g  = sum[2];
    r  = sum[1];
    st = sum[0];
    mr = {1'b0, m} + 25'((g && (r || st || m[0])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {sgn, 8'hff, 23'd0};
    if (e <= 0)   return 32'h0;
    return {sgn, 8'(e), mr[22:0]};
  endfunction

endpackage
