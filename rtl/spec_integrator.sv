// spec_integrator: float conversion and time integration of one spectrum.
//
// Every channel sample (a 53-bit power or cross-power value) is converted to
// IEEE-754 single precision (round to nearest even) and added, in single
// precision, to the running sum of its channel.  After the last sample of an
// integration (tag.eoi) the 512 sums form one spectrum of 32-bit floats,
// which is read out while the next integration builds up.
//
// The sums are kept in two banks of NC words.  One bank integrates: each
// sample reads its channel's sum, adds, and writes it back one clock later
// (the same channel returns only after a whole frame, so there is no
// read-after-write hazard).  Samples of the first frame of an integration
// overwrite instead of adding, so no clearing pass is needed.  At eoi the
// banks swap and the readout engine streams the finished bank, channel 0 to
// NC-1, on a valid/ready port with out_last on the last channel.  If an
// integration ends before the previous spectrum has been read out, overrun
// is set and stays set until reset (that spectrum is then corrupted).
//
// Interface: in_valid/in_tag/in_data (signed 53 bit; power values are never
// negative); out_valid/out_ready/out_chan/out_data/out_last; overrun.
// Timing: accepts one sample per clock; a sum is written two clocks after its
// sample enters; the readout starts two clocks after the eoi sample and
// gives at most one word every two clocks.
// From the specification: cast to 32-bit float before integrating, 512
// floats per spectrum, integration over the dumping time.  Own choices: the
// rounding mode, the double buffer and the readout port.
module spec_integrator
  import drs4_pkg::*;
#(
  parameter int NC = NCHAN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  tag_t                     in_tag,
  input  logic signed [PWR_W-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [$clog2(NC)-1:0]    out_chan,
  output logic [FLT_W-1:0]         out_data,
  output logic                     out_last,
  output logic                     overrun
);

  localparam int AW = $clog2(NC);

  logic [FLT_W-1:0] acc [2*NC];
  logic             wbank;

  // stage A
  logic             va;
  tag_t             ta;
  logic [FLT_W-1:0] fa;
  logic [FLT_W-1:0] rda;
  logic [FLT_W-1:0] sum;

  // readout
  typedef enum logic [1:0] {RO_IDLE, RO_READ, RO_HOLD} ro_t;
  ro_t              ro_state;
  logic [AW-1:0]    rcnt;

  assign sum = ta.first ? fa : fp32_add(rda, fa);

  always_ff @(posedge clk) begin
    fa  <= int_to_fp32(in_data);
    ta  <= in_tag;
    rda <= acc[{wbank, in_tag.chan[AW-1:0]}];
    if (va) acc[{wbank, ta.chan[AW-1:0]}] <= sum;
    if (ro_state == RO_READ) out_data <= acc[{~wbank, rcnt}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va       <= 1'b0;
      wbank    <= 1'b0;
      ro_state <= RO_IDLE;
      rcnt     <= '0;
      overrun  <= 1'b0;
    end else begin
      va <= in_valid;
      if (va && ta.eoi) begin
        wbank <= ~wbank;
        if (ro_state != RO_IDLE) overrun <= 1'b1;
        ro_state <= RO_READ;
        rcnt     <= '0;
      end else begin
        case (ro_state)
          RO_READ: ro_state <= RO_HOLD;
          RO_HOLD: if (out_ready) begin
                     if (rcnt == AW'(NC - 1)) ro_state <= RO_IDLE;
                     else begin
                       rcnt     <= rcnt + 1'b1;
                       ro_state <= RO_READ;
                     end
                   end
          default: ;
        endcase
      end
    end
  end

  assign out_valid = (ro_state == RO_HOLD);
  assign out_chan  = rcnt;
  assign out_last  = (rcnt == AW'(NC - 1));

endmodule
