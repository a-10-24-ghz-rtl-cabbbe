// dsbs: digital sideband separation with per-channel complex gains C1, C2.
//
// A sideband-separating receiver delivers USB and LSB IF signals that each
// still hold some leakage from the other sideband.  After the FFT, every
// channel k of the two spectra X_U[k], X_L[k] is combined with two complex
// gains that undo the amplitude and phase imbalance:
//   observation mode   Y_U = X_U + C2[k] * X_L      Y_L = X_L + C1[k] * X_U
//   calibration mode   Y_U = C1[k] * X_U             Y_L = C2[k] * X_L
// In observation mode the image sideband cancels when C1 = -X_L/X_U measured
// with a reference tone in the USB and C2 = -X_U/X_L with the tone in the
// LSB.  In calibration mode the sidebands are not added, so their auto and
// cross spectra can be measured to compute those ratios.
//
// The gains live in two 512-entry tables (16+16 bit, 1.0 = 2^14), written by
// the host through cg_we/cg_sel/cg_addr/cg_val.  After reset both tables are
// filled with 1 + 0j, one entry per clock, while init_busy is high.
// C * X is rounded to nearest after the 14-bit shift; the sums are 17 bit per
// component (34-bit complex), which holds |C| < 2 without overflow.
//
// Interface: in_valid/in_tag/x_usb/x_lsb (28-bit complex each); the mode comes
// with the tag so it changes only between integrations.  Timing: two register
// stages (table read, then multiply-add); out_* follow in_* by two clocks.
// From the specification: the two equations of the observation signal flow,
// the gain-only calibration flow, the initial value 1 + 0j and the 28/34-bit
// widths.  Own choices: the gain format, the rounding and the write port.
module dsbs
  import drs4_pkg::*;
#(
  parameter int NC = NCHAN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // gain table write port
  input  logic                    cg_we,
  input  logic                    cg_sel,      // 0: C1, 1: C2
  input  logic [$clog2(NC)-1:0]   cg_addr,
  input  cgain_t                  cg_val,
  output logic                    init_busy,
  // data
  input  logic                    in_valid,
  input  tag_t                    in_tag,
  input  fft_cplx_t               x_usb,
  input  fft_cplx_t               x_lsb,
  output logic                    out_valid,
  output tag_t                    out_tag,
  output dsbs_cplx_t              y_usb,
  output dsbs_cplx_t              y_lsb
);

  localparam int AW = $clog2(NC);
  localparam int PW = FFT_CW + CG_W + 1;

  cgain_t c1_mem [NC];
  cgain_t c2_mem [NC];

  logic [AW-1:0] init_addr;

  // stage 1 registers
  logic       v1;
  tag_t       t1;
  fft_cplx_t  xu1, xl1;
  cgain_t     c1, c2;

  always_ff @(posedge clk) begin
    if (init_busy) begin
      c1_mem[init_addr] <= CGAIN_ONE;
      c2_mem[init_addr] <= CGAIN_ONE;
    end else if (cg_we) begin
      if (!cg_sel) c1_mem[cg_addr] <= cg_val;
      else         c2_mem[cg_addr] <= cg_val;
    end
    c1  <= c1_mem[in_tag.chan[AW-1:0]];
    c2  <= c2_mem[in_tag.chan[AW-1:0]];
    t1  <= in_tag;
    xu1 <= x_usb;
    xl1 <= x_lsb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_addr <= '0;
      v1        <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (init_busy) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == AW'(NC - 1)) init_busy <= 1'b0;
      end
    end
  end

  // complex product C * X, rounded, 16 bit per component
  function automatic logic signed [DSBS_CW-1:0] cmul_re(cgain_t c, fft_cplx_t x);
    logic signed [PW-1:0] p;
    p = c.re * x.re - c.im * x.im + PW'(1 <<< (CG_FRAC - 1));
    return DSBS_CW'(p >>> CG_FRAC);
  endfunction
  function automatic logic signed [DSBS_CW-1:0] cmul_im(cgain_t c, fft_cplx_t x);
    logic signed [PW-1:0] p;
    p = c.re * x.im + c.im * x.re + PW'(1 <<< (CG_FRAC - 1));
    return DSBS_CW'(p >>> CG_FRAC);
  endfunction

  dsbs_cplx_t yu_n, yl_n;

  always_comb begin
    if (t1.mode == MODE_CAL) begin
      yu_n.re = cmul_re(c1, xu1);
      yu_n.im = cmul_im(c1, xu1);
      yl_n.re = cmul_re(c2, xl1);
      yl_n.im = cmul_im(c2, xl1);
    end else begin
      yu_n.re = DSBS_CW'(xu1.re) + cmul_re(c2, xl1);
      yu_n.im = DSBS_CW'(xu1.im) + cmul_im(c2, xl1);
      yl_n.re = DSBS_CW'(xl1.re) + cmul_re(c1, xu1);
      yl_n.im = DSBS_CW'(xl1.im) + cmul_im(c1, xu1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      y_usb     <= '0;
      y_lsb     <= '0;
    end else begin
      out_valid <= v1;
      out_tag   <= t1;
      y_usb     <= yu_n;
      y_lsb     <= yl_n;
    end
  end

endmodule
