// cross_corr: cross-correlation of the USB and LSB complex spectra.
//
// Used in calibration mode, where the two sidebands are measured without
// being added.  For each channel the block forms
//   R = Y_U * conj(Y_L) = (ur*lr + ui*li) + j (ui*lr - ur*li)
// which, together with the two auto spectra, gives the complex gain ratios
// C1 = -conj(R)/|Y_U|^2 (tone in the USB) and C2 = -R/|Y_L|^2 (tone in the
// LSB).  Each part is a signed 53-bit number (the output width of the signal
// flow); the products of 17-bit components need only 35 bits, so the rest is
// sign extension.
//
// Interface: in_valid/in_tag/in_usb/in_lsb and out_valid/out_tag/out_re/
// out_im.  Timing: one register stage.
// From the specification: the cross-correlation block in the calibration
// flow and its 53-bit output.  Own choice: the conjugate on the LSB side
// (the other order only flips the sign of the imaginary part).
module cross_corr
  import drs4_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  tag_t                     in_tag,
  input  dsbs_cplx_t               in_usb,
  input  dsbs_cplx_t               in_lsb,
  output logic                     out_valid,
  output tag_t                     out_tag,
  output logic signed [PWR_W-1:0]  out_re,
  output logic signed [PWR_W-1:0]  out_im
);

  logic signed [2*DSBS_CW:0] r_re, r_im;

  assign r_re = (2*DSBS_CW+1)'(in_usb.re * in_lsb.re) + (2*DSBS_CW+1)'(in_usb.im * in_lsb.im);
  assign r_im = (2*DSBS_CW+1)'(in_usb.im * in_lsb.re) - (2*DSBS_CW+1)'(in_usb.re * in_lsb.im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      out_re    <= PWR_W'(r_re);
      out_im    <= PWR_W'(r_im);
    end
  end

endmodule
