// timestamp_1pps: time stamps for the integrated spectra.
//
// Absolute time comes from the network (NTP) and the second boundaries from
// an external 1 PPS pulse.  The host loads the current second, counted from
// the VDIF reference epoch, with set_sec/set_sec_val; every rising edge of
// pps then advances the second and restarts the count of spectra within the
// second.  Each dump pulse captures the running second and the number of the
// spectrum within that second (0, 1, 2, ... — for 100 ms dumps 0 to 9), the
// two fields of a VDIF frame header.
//
// pps is asynchronous: it passes a two-flop synchroniser and an edge
// detector, so a second boundary is seen three clocks after the pulse rises.
// Interface: outputs ts_sec/ts_num are held from one dump to the next.
// Timing: captured one clock after dump.  A dump in the same clock as a PPS
// edge belongs to the new second.
// From the specification: NTP time plus 1 PPS for the spectrum time stamps,
// VDIF output.  Own choices: the set port, the synchroniser and numbering the
// spectra within a second.
module timestamp_1pps (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  input  logic        set_sec,
  input  logic [29:0] set_sec_val,
  input  logic        dump,
  output logic [29:0] ts_sec,
  output logic [23:0] ts_num
);

  logic [2:0]  pps_sync;
  logic        pps_edge;
  logic [29:0] sec;
  logic [23:0] num;

  assign pps_edge = pps_sync[1] & ~pps_sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pps_sync <= '0;
      sec      <= '0;
      num      <= '0;
      ts_sec   <= '0;
      ts_num   <= '0;
    end else begin
      pps_sync <= {pps_sync[1:0], pps};
      if (set_sec) sec <= set_sec_val;
      else if (pps_edge) sec <= sec + 1'b1;
      if (pps_edge) num <= dump ? 24'd1 : 24'd0;
      else if (dump) num <= num + 1'b1;
      if (dump) begin
        ts_sec <= set_sec ? set_sec_val : (pps_edge ? sec + 1'b1 : sec);
        ts_num <= pps_edge ? 24'd0 : num;
      end
    end
  end

endmodule
