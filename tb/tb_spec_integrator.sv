// tb_spec_integrator: checks float conversion, float integration, the bank
// swap and the readout port.
//
// Three integrations (3, 3 and 4 frames of 512 channels) are streamed back to
// back, one sample per clock, in the FFT's bit-reversed channel order.  Data
// are random signed 53-bit values of mixed magnitudes (as cross-power can
// be).  The expected sums are built here in double precision, rounded by hand
// to single precision after every addition, in arrival order.  The readout is taken with random back-pressure and every
// word, its channel and out_last are compared.  A fourth integration ends
// while the readout is stalled, which must raise overrun.
module tb_spec_integrator;
  import drs4_pkg::*;
  localparam int NC = 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  tag_t in_tag = '0;
  logic signed [PWR_W-1:0] in_data = '0;
  logic out_valid, out_ready = 0, out_last, overrun;
  logic [8:0] out_chan;
  logic [31:0] out_data;

  spec_integrator dut (.clk, .rst_n, .in_valid, .in_tag, .in_data, .out_valid, .out_ready,
                       .out_chan, .out_data, .out_last, .overrun);

  int checks = 0, failures = 0;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_acc [NC];
  logic [31:0] exp_spec [3][NC];
  int nframes [3] = '{3, 3, 4};

  // IEEE single-precision reference, built on the simulator's double type:
  // a double is rounded to single precision (nearest, ties to even) by hand.
  function automatic logic [31:0] dbl_to_f(real x);
    logic [63:0] d;
    logic [52:0] m;      // 1.52
    logic [24:0] mr;
    int e;
    logic g, st;
    if (x == 0.0) return 32'h0;
    d  = $realtobits(x);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + 25'((g && (st || m[29])) ? 1 : 0);
    if (mr[24]) begin mr = mr >> 1; e++; end
    return {d[63], 8'(e), mr[22:0]};
  endfunction
  function automatic real f_to_dbl(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction
  // exact for |v| < 2^53
  function automatic logic [31:0] to_f(longint v);
    return dbl_to_f(real'(v));
  endfunction
  // the double sum of two singles is exact or off by far less than half a
  // single-precision unit, so rounding it once gives the correctly rounded sum
  function automatic logic [31:0] add_f(logic [31:0] a, logic [31:0] b);
    return dbl_to_f(f_to_dbl(a) + f_to_dbl(b));
  endfunction

  function automatic longint rnd_val();
    longint m;
    int sh;
    sh = $urandom_range(50);
    m  = longint'({$urandom, $urandom}) >>> (63 - sh);
    return m;
  endfunction

  // readout checker
  int spec_idx = 0, word_idx = 0;
  logic ready_en = 1;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (spec_idx >= 3 || out_data != exp_spec[spec_idx][word_idx] ||
          int'(out_chan) != word_idx || out_last != (word_idx == NC - 1)) begin
        failures++;
        if (failures < 8) $display("spec %0d ch %0d got %h want %h", spec_idx, word_idx, out_data,
                                   exp_spec[spec_idx][word_idx]);
      end
      if (word_idx == NC - 1) begin word_idx = 0; spec_idx++; end
      else word_idx++;
    end
    out_ready <= ready_en && ($urandom_range(3) != 0);
  end

  task automatic run_integration(int s, int nf);
    longint v;
    int ch;
    for (int f = 0; f < nf; f++)
      for (int i = 0; i < NC; i++) begin
        ch = int'(bitrev10(10'(2 * i)));
        v  = rnd_val();
        if (f == 0) ref_acc[ch] = to_f(v);
        else        ref_acc[ch] = add_f(ref_acc[ch], to_f(v));
        in_valid <= 1;
        in_data  <= PWR_W'(v);
        in_tag   <= '{chan: 9'(ch), first: (f == 0), eoi: (f == nf - 1 && i == NC - 1),
                      mode: MODE_CAL};
        @(posedge clk);
      end
    if (s < 3) exp_spec[s] = ref_acc;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int s = 0; s < 3; s++) run_integration(s, nframes[s]);
    in_valid <= 0;
    // wait for all readouts
    while (spec_idx < 3) @(posedge clk);
    checks++;
    if (overrun) begin failures++; $display("unexpected overrun"); end
    // overrun: stall the readout and finish two integrations in a row
    ready_en = 0;
    run_integration(3, 1);
    run_integration(4, 1);
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
