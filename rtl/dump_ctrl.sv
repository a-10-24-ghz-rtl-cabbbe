// dump_ctrl: channel selection and integration (dump) timing.
//
// A 1024-point FFT of real samples gives 1024 bins whose upper half mirrors
// the lower one; the spectrometer keeps the 512 lower bins as its channels.
// This block watches the FFT output of the pair (both FFTs of a pair run in
// lock-step, so one bin stream stands for both), passes on only bins 0..511
// and attaches a tag to each: the channel number, whether the sample belongs
// to the first frame of an integration, whether it is the very last sample
// of the integration (eoi), and the DSP mode of the integration.
//
// An integration lasts 1, 2, 5 or 10 times FRAMES_PER_100MS FFT frames, i.e.
// the selected dumping time of 100, 200, 500 or 1000 ms at 20 000 frames per
// ms (20.48 GS/s / 1024 points), so FRAMES_PER_100MS defaults to 2 000 000.
// dump_sel and mode are sampled at the start of each integration, so a
// change never splits an integration.  eoi is also given
// out as a one-clock pulse, dump, in step with the tagged sample.
//
// Interface: in_valid/in_bin/in_first from the FFT; out_keep marks samples of
// a kept channel, out_tag is their tag.  Timing: combinational from in_* to
// out_*, so the tag lines up with the FFT data registered in the same clock.
// Own choices: the frame counting starting with the first FFT frame after
// reset and the sampling of the mode with the dumping time.
module dump_ctrl
  import drs4_pkg::*;
#(
  parameter int N             = FFT_N,
  parameter int FRAMES_PER_100MS = 100 * FRAMES_PER_MS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  dump_t                   dump_sel,
  input  mode_t                   mode_sel,
  input  logic                    in_valid,
  input  logic [$clog2(N)-1:0]    in_bin,
  input  logic                    in_first,
  output logic                    out_keep,
  output tag_t                    out_tag,
  output logic                    dump
);

  localparam int NC = N / 2;
  localparam int FW = 32;

  logic [FW-1:0]        frame;       // frame index within the integration
  logic [FW-1:0]        nframes;     // length of the running integration
  logic [$clog2(NC):0]  kept;        // channels seen in the current frame
  mode_t                mode_run;
  logic                 started;

  logic [FW-1:0] nframes_sel;
  logic [FW-1:0] frame_now;
  logic [FW-1:0] nframes_now;
  mode_t         mode_now;
  logic          new_int;            // this frame starts an integration

  assign nframes_sel = FW'(dump_ms(dump_sel) / 100) * FW'(FRAMES_PER_100MS);
  assign new_int     = in_first && (!started || frame == nframes - 1);
  assign frame_now   = new_int ? '0 : (in_first ? frame + 1 : frame);
  assign nframes_now = new_int ? nframes_sel : nframes;
  assign mode_now    = new_int ? mode_sel : mode_run;

  always_comb begin
    out_keep      = in_valid && (in_bin < ($clog2(N))'(NC));
    out_tag.chan  = in_bin[$clog2(NC)-1:0];
    out_tag.first = (frame_now == '0);
    out_tag.eoi   = out_keep && (frame_now == nframes_now - 1) &&
                    (in_first ? 1'b0 : (kept == ($clog2(NC)+1)'(NC - 1)));
    out_tag.mode  = mode_now;
    dump          = out_tag.eoi;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame    <= '0;
      nframes  <= FW'(1);
      kept     <= '0;
      mode_run <= MODE_OBS;
      started  <= 1'b0;
    end else if (in_valid) begin
      frame    <= frame_now;
      nframes  <= nframes_now;
      mode_run <= mode_now;
      if (in_first) started <= 1'b1;
      if (in_first) kept <= out_keep ? 1 : 0;
      else if (out_keep) kept <= kept + 1'b1;
    end
  end

endmodule
