// power_detect: auto-correlation (power) of one sideband's complex spectrum.
//
// For each channel sample Y = a + jb after sideband separation the block
// forms |Y|^2 = a^2 + b^2, the zero-lag auto-correlation that the
// integrator later sums into a power spectrum.  The 17-bit components give
// at most 2^33, which the 53-bit output of the signal flow holds with room
// to spare; the result is unsigned and zero-extended.
//
// Interface: in_valid/in_tag/in_y (34-bit complex) and out_valid/out_tag/
// out_pwr.  Timing: one register stage.
// From the specification: the ( )^2 operation and the 34-bit in, 53-bit out
// widths.  The specification does not say what the upper output bits hold;
// here they are zero.
module power_detect
  import drs4_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  tag_t               in_tag,
  input  dsbs_cplx_t         in_y,
  output logic               out_valid,
  output tag_t               out_tag,
  output logic [PWR_W-1:0]   out_pwr
);

  logic signed [2*DSBS_CW-1:0] sq_re, sq_im;

  assign sq_re = in_y.re * in_y.re;
  assign sq_im = in_y.im * in_y.im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_pwr   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      out_pwr   <= PWR_W'(unsigned'(sq_re)) + PWR_W'(unsigned'(sq_im));
    end
  end

endmodule
