// drs4_pair: the complete signal processing of one LSB/USB input pair.
//
// Two ADC sample streams (USB and LSB IF of one polarisation) run through
//   window -> 1024-point FFT -> sideband separation (C1, C2) ->
//   auto-correlation ( )^2 and, in calibration mode, cross-correlation ->
//   float conversion and integration over the dumping time -> VDIF frames.
// In observation mode the pair delivers two spectra per dump, the USB and
// LSB power after sideband separation.  In calibration mode the gains are
// applied without adding the sidebands and the pair delivers four: the two
// auto spectra and the real and imaginary parts of the USB x LSB cross
// spectrum, from which the host computes new gains.
//
// Bit widths along the path follow the signal flow of the specification:
// 3-bit samples, 28-bit complex FFT output, 34-bit complex after sideband
// separation, 53-bit products, 32-bit float spectra.  The two FFTs run in
// lock-step from the same sample strobe, so one dump_ctrl tags both streams.
//
// Interface: adc_valid with adc_usb/adc_lsb codes (one sample each per clock);
// configuration inputs win_sel, dump_sel, mode_sel (taken at frame and
// integration boundaries) and the gain-table write port; time stamp inputs;
// VDIF word stream out; dump pulse for the time stamp unit; overrun flags of
// the four integrators.  Timing: a spectrum leaves a few thousand clocks
// after the last sample of its integration (FFT latency of about one frame,
// then 2 clocks per word of readout, 520 words per frame).
// The assertions are disabled during reset with a synchronous sample of
// rst_n; lint reports rst_n as used both synchronously and asynchronously
// for that reason only, the logic itself resets asynchronously.
module drs4_pair
  import drs4_pkg::*;
#(
  parameter int FRAMES_PER_100MS = 100 * FRAMES_PER_MS,
  parameter int THREAD_BASE      = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  win_t                 win_sel,
  input  dump_t                dump_sel,
  input  mode_t                mode_sel,
  input  logic                 adc_valid,
  input  logic [ADC_W-1:0]     adc_usb,
  input  logic [ADC_W-1:0]     adc_lsb,
  input  logic                 cg_we,
  input  logic                 cg_sel,
  input  logic [CHAN_W-1:0]    cg_addr,
  input  cgain_t               cg_val,
  output logic                 init_busy,
  input  logic [29:0]          ts_sec,
  input  logic [23:0]          ts_num,
  input  logic [5:0]           ref_epoch,
  input  logic [15:0]          station_id,
  output logic                 dump,
  output logic                 vd_valid,
  input  logic                 vd_ready,
  output logic [31:0]          vd_data,
  output logic                 vd_sop,
  output logic                 vd_eop,
  output logic [3:0]           overrun
);

  // ------------------------------------------------ window and FFT
  logic                     wu_v, wl_v;
  logic signed [SMP_W-1:0]  wu_s, wl_s;
  logic                     fu_v, fl_v, fu_first, fl_first;
  logic [9:0]               fu_bin, fl_bin;
  fft_cplx_t                fu, fl;

  fft_window u_win_usb (.clk, .rst_n, .win_sel, .in_valid(adc_valid), .in_code(adc_usb),
                        .out_valid(wu_v), .out_sample(wu_s));
  fft_window u_win_lsb (.clk, .rst_n, .win_sel, .in_valid(adc_valid), .in_code(adc_lsb),
                        .out_valid(wl_v), .out_sample(wl_s));

  fft_r2sdf u_fft_usb (.clk, .rst_n, .in_valid(wu_v), .in_sample(wu_s),
                       .out_valid(fu_v), .out_bin(fu_bin), .out_first(fu_first), .out(fu));
  fft_r2sdf u_fft_lsb (.clk, .rst_n, .in_valid(wl_v), .in_sample(wl_s),
                       .out_valid(fl_v), .out_bin(fl_bin), .out_first(fl_first), .out(fl));

  // ------------------------------------------------ dump control
  logic keep;
  tag_t tag;

  dump_ctrl #(.FRAMES_PER_100MS(FRAMES_PER_100MS)) u_dump (
    .clk, .rst_n, .dump_sel, .mode_sel,
    .in_valid(fu_v), .in_bin(fu_bin), .in_first(fu_first),
    .out_keep(keep), .out_tag(tag), .dump);

  // ------------------------------------------------ sideband separation
  logic       d_v;
  tag_t       d_tag;
  dsbs_cplx_t yu, yl;

  dsbs u_dsbs (.clk, .rst_n, .cg_we, .cg_sel, .cg_addr, .cg_val, .init_busy,
               .in_valid(keep), .in_tag(tag), .x_usb(fu), .x_lsb(fl),
               .out_valid(d_v), .out_tag(d_tag), .y_usb(yu), .y_lsb(yl));

  // ------------------------------------------------ correlation
  logic                    pu_v, pl_v, x_v;
  tag_t                    pu_tag, pl_tag, x_tag;
  logic [PWR_W-1:0]        pu, pl;
  logic signed [PWR_W-1:0] xre, xim;

  power_detect u_pwr_usb (.clk, .rst_n, .in_valid(d_v), .in_tag(d_tag), .in_y(yu),
                          .out_valid(pu_v), .out_tag(pu_tag), .out_pwr(pu));
  power_detect u_pwr_lsb (.clk, .rst_n, .in_valid(d_v), .in_tag(d_tag), .in_y(yl),
                          .out_valid(pl_v), .out_tag(pl_tag), .out_pwr(pl));
  cross_corr   u_xcorr   (.clk, .rst_n, .in_valid(d_v && d_tag.mode == MODE_CAL), .in_tag(d_tag),
                          .in_usb(yu), .in_lsb(yl),
                          .out_valid(x_v), .out_tag(x_tag), .out_re(xre), .out_im(xim));

  // ------------------------------------------------ integration
  logic [3:0]       s_valid, s_ready, s_last;
  logic [FLT_W-1:0] s_data [4];
  logic [CHAN_W-1:0] s_chan [4];

  spec_integrator u_int_usb (.clk, .rst_n, .in_valid(pu_v), .in_tag(pu_tag), .in_data(signed'(pu)),
                             .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_chan(s_chan[0]),
                             .out_data(s_data[0]), .out_last(s_last[0]), .overrun(overrun[0]));
  spec_integrator u_int_lsb (.clk, .rst_n, .in_valid(pl_v), .in_tag(pl_tag), .in_data(signed'(pl)),
                             .out_valid(s_valid[1]), .out_ready(s_ready[1]), .out_chan(s_chan[1]),
                             .out_data(s_data[1]), .out_last(s_last[1]), .overrun(overrun[1]));
  spec_integrator u_int_xre (.clk, .rst_n, .in_valid(x_v), .in_tag(x_tag), .in_data(xre),
                             .out_valid(s_valid[2]), .out_ready(s_ready[2]), .out_chan(s_chan[2]),
                             .out_data(s_data[2]), .out_last(s_last[2]), .overrun(overrun[2]));
  spec_integrator u_int_xim (.clk, .rst_n, .in_valid(x_v), .in_tag(x_tag), .in_data(xim),
                             .out_valid(s_valid[3]), .out_ready(s_ready[3]), .out_chan(s_chan[3]),
                             .out_data(s_data[3]), .out_last(s_last[3]), .overrun(overrun[3]));

  // ------------------------------------------------ VDIF framing
  vdif_framer #(.NS(4), .THREAD_BASE(THREAD_BASE)) u_vdif (
    .clk, .rst_n, .ts_sec, .ts_num, .ref_epoch, .station_id,
    .s_valid, .s_ready, .s_data, .s_last,
    .vd_valid, .vd_ready, .vd_data, .vd_sop, .vd_eop);

  // The two FFTs are fed by the same strobe and must stay in step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    fu_v == fl_v && (!fu_v || (fu_bin == fl_bin && fu_first == fl_first)));
  // Readout order must be channel order.
  a_chan_order: assert property (@(posedge clk) disable iff (!rst_n)
    s_valid[0] && s_ready[0] |-> s_last[0] == (s_chan[0] == CHAN_W'(NCHAN - 1)));

endmodule
