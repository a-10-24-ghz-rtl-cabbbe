// vdif_framer: packs integrated spectra into VDIF data frames.
//
// Each spectrum of NC 32-bit floats leaves the spectrometer as one VDIF data
// frame: a 32-byte header (eight 32-bit words) followed by the NC words of
// the spectrum, channel 0 first.  The framer serves up to NS spectrum streams
// (USB power, LSB power, cross-power real and imaginary parts) in fixed
// priority order, one whole frame at a time, and gives out one 32-bit word
// per accepted clock with start/end-of-frame marks.
//
// Header layout (VDIF version 1, no extended user data):
//   word 0  [31] invalid = 0, [30] legacy = 0, [29:0] seconds from epoch
//   word 1  [29:24] reference epoch, [23:0] frame number within the second
//   word 2  [31:29] version = 0, [28:24] log2(channels) = log2(NC),
//           [23:0] frame length in 8-byte units = (32 + 4 NC) / 8
//   word 3  [31] complex = 0, [30:26] bits per sample - 1 = 31,
//           [25:16] thread id = THREAD_BASE + stream, [15:0] station id
//   words 4..7  zero
// The seconds and frame number come from timestamp_1pps.  Each stream
// latches them when its spectrum becomes ready (the time stamp unit has
// captured the dump a few clocks earlier), so a frame carries the time of
// its own integration even when it waits behind other streams past the next
// dump.
//
// Interface: per stream s_valid/s_ready/s_data/s_last; output vd_valid/
// vd_ready/vd_data/vd_sop/vd_eop.  Timing: the header takes 8 accepted
// clocks, the data words pass straight through (s_ready = vd_ready while a
// stream is being framed).
// From the specification: VDIF output of 512 32-bit floats per input, time
// stamps from NTP and 1 PPS.  The header fields follow the VDIF standard; how
// they are filled (thread numbering, channel count field, stream order) is
// this design's choice.
module vdif_framer
  import drs4_pkg::*;
#(
  parameter int NC          = NCHAN,
  parameter int NS          = 4,
  parameter int THREAD_BASE = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [29:0]           ts_sec,
  input  logic [23:0]           ts_num,
  input  logic [5:0]            ref_epoch,
  input  logic [15:0]           station_id,
  input  logic [NS-1:0]         s_valid,
  output logic [NS-1:0]         s_ready,
  input  logic [FLT_W-1:0]      s_data [NS],
  input  logic [NS-1:0]         s_last,
  output logic                  vd_valid,
  input  logic                  vd_ready,
  output logic [31:0]           vd_data,
  output logic                  vd_sop,
  output logic                  vd_eop
);

  localparam int SW = (NS > 1) ? $clog2(NS) : 1;
  localparam logic [23:0] FLEN  = 24'((32 + 4 * NC) / 8);
  localparam logic [4:0]  LOGNC = 5'($clog2(NC));

  typedef enum logic [1:0] {F_IDLE, F_HDR, F_DATA} fstate_t;
  fstate_t       state;
  logic [SW-1:0] sel;
  logic [2:0]    hcnt;
  logic [NS-1:0] pend;                      // stream's time stamp latched
  logic [29:0]   sec_s [NS];
  logic [23:0]   num_s [NS];

  logic          any_valid;
  logic [SW-1:0] first_valid;

  always_comb begin
    any_valid   = |s_valid;
    first_valid = '0;
    for (int i = NS - 1; i >= 0; i--) if (s_valid[i]) first_valid = SW'(i);
  end

  logic [31:0] hdr;
  always_comb begin
    case (hcnt)
      3'd0:    hdr = {2'b00, sec_s[sel]};
      3'd1:    hdr = {2'b00, ref_epoch, num_s[sel]};
      3'd2:    hdr = {3'd0, LOGNC, FLEN};
      3'd3:    hdr = {1'b0, 5'd31, 10'(THREAD_BASE + int'(sel)), station_id};
      default: hdr = 32'd0;
    endcase
  end

  always_comb begin
    s_ready = '0;
    vd_valid = 1'b0;
    vd_data  = hdr;
    vd_sop   = 1'b0;
    vd_eop   = 1'b0;
    case (state)
      F_HDR: begin
        vd_valid = 1'b1;
        vd_sop   = (hcnt == 3'd0);
      end
      F_DATA: begin
        vd_valid     = s_valid[sel];
        vd_data      = s_data[sel];
        vd_eop       = s_last[sel];
        s_ready[sel] = vd_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE;
      sel   <= '0;
      hcnt  <= '0;
      pend  <= '0;
      for (int i = 0; i < NS; i++) begin
        sec_s[i] <= '0;
        num_s[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NS; i++)
        if (s_valid[i] && !pend[i]) begin
          pend[i]  <= 1'b1;
          sec_s[i] <= ts_sec;
          num_s[i] <= ts_num;
        end
      case (state)
        F_IDLE: if (any_valid) begin
          state <= F_HDR;
          sel   <= first_valid;
          hcnt  <= '0;
        end
        F_HDR: if (vd_ready) begin
          hcnt <= hcnt + 1'b1;
          if (hcnt == 3'd7) state <= F_DATA;
        end
        F_DATA: if (vd_ready && s_valid[sel] && s_last[sel]) begin
          state     <= F_IDLE;
          pend[sel] <= 1'b0;
        end
        default: state <= F_IDLE;
      endcase
    end
  end

endmodule
