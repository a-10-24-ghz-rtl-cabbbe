// drs4_top: digital signal processing of a DRS4-type 10.24-GHz-wide
// spectrometer with four analog inputs.
//
// The four inputs form two LSB/USB pairs: inputs 1 (LSB) and 2 (USB) carry
// the DC-10.24 GHz band, inputs 3 (LSB) and 4 (USB) the 10.24-20.48 GHz band.
// Each pair is processed by its own drs4_pair (window, 1024-point FFT,
// sideband separation, correlation, integration, VDIF framing); both share
// the window, dumping time and mode settings and one time stamp unit, which
// is advanced by the external 1 PPS pulse and set from network time.  The
// pairs run from one sample strobe, so their integrations end in the same
// clock and pair 0's dump pulse stamps both.
//
// Ports: adc_code[i] is the 3-bit code of analog input i+1; the gain tables
// are written through cg_we/cg_pair/cg_sel/cg_addr/cg_val; each pair has its
// own VDIF word stream (VDIF thread ids 0-3 for pair 0, 4-7 for pair 1),
// which the network interface multicasts.  The samplers, the sampling clock,
// the network interface and the front panel are outside this RTL.
// Timing: one sample per input per clock while adc_valid is high.  The
// hardware reaches 20.48 GS/s by running many such sample lanes in parallel;
// this RTL describes one lane per input.
// The assertions are disabled during reset with a synchronous sample of
// rst_n; lint reports rst_n as used both synchronously and asynchronously
// for that reason only, the logic itself resets asynchronously.
module drs4_top
  import drs4_pkg::*;
#(
  parameter int NPAIR            = 2,
  parameter int FRAMES_PER_100MS = 100 * FRAMES_PER_MS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  win_t                 win_sel,
  input  dump_t                dump_sel,
  input  mode_t                mode_sel,
  input  logic                 cg_we,
  input  logic [$clog2(NPAIR > 1 ? NPAIR : 2)-1:0] cg_pair,
  input  logic                 cg_sel,
  input  logic [CHAN_W-1:0]    cg_addr,
  input  cgain_t               cg_val,
  output logic [NPAIR-1:0]     init_busy,
  // samplers
  input  logic                 adc_valid,
  input  logic [ADC_W-1:0]     adc_code [2*NPAIR],
  // time
  input  logic                 pps,
  input  logic                 set_sec,
  input  logic [29:0]          set_sec_val,
  input  logic [5:0]           ref_epoch,
  input  logic [15:0]          station_id,
  // VDIF output, one stream per pair
  output logic [NPAIR-1:0]     vd_valid,
  input  logic [NPAIR-1:0]     vd_ready,
  output logic [31:0]          vd_data [NPAIR],
  output logic [NPAIR-1:0]     vd_sop,
  output logic [NPAIR-1:0]     vd_eop,
  output logic [4*NPAIR-1:0]   overrun
);

  logic [29:0]      ts_sec;
  logic [23:0]      ts_num;
  logic [NPAIR-1:0] dump;

  timestamp_1pps u_ts (.clk, .rst_n, .pps, .set_sec, .set_sec_val, .dump(dump[0]),
                       .ts_sec, .ts_num);

  for (genvar p = 0; p < NPAIR; p++) begin : g_pair
    drs4_pair #(.FRAMES_PER_100MS(FRAMES_PER_100MS), .THREAD_BASE(4 * p)) u_pair (
      .clk, .rst_n, .win_sel, .dump_sel, .mode_sel,
      .adc_valid,
      .adc_usb   (adc_code[2*p+1]),
      .adc_lsb   (adc_code[2*p]),
      .cg_we     (cg_we && int'(cg_pair) == p),
      .cg_sel, .cg_addr, .cg_val,
      .init_busy (init_busy[p]),
      .ts_sec, .ts_num, .ref_epoch, .station_id,
      .dump      (dump[p]),
      .vd_valid  (vd_valid[p]),
      .vd_ready  (vd_ready[p]),
      .vd_data   (vd_data[p]),
      .vd_sop    (vd_sop[p]),
      .vd_eop    (vd_eop[p]),
      .overrun   (overrun[4*p +: 4]));
  end

  // All pairs run from one sample strobe, so they must end their
  // integrations in the same clock; pair 0's dump then stamps them all.
  a_dump_together: assert property (@(posedge clk) disable iff (!rst_n)
    dump == '0 || dump == '1);

endmodule
