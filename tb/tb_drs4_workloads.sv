// tb_drs4_workloads: the laboratory measurements of the instrument, run on
// the complete four-input spectrometer (drs4_top).
//
// Three measurements are reproduced with synthetic 3-bit ADC samples, each
// integration being one measurement point (FRAMES_PER_100MS = 3 keeps the
// run short; all other parameters are at their defaults, observation mode,
// gains 1 + 0j, rectangle window):
//   A. Frequency response: a CW tone on input 2 (pair 0 USB) is swept from
//      4.80 to 5.20 GHz in 2 MHz steps around the 5.00 GHz channel (250).
//      Every point is compared with the response of a 1024-point rectangle
//      window, |sin(pi N d) / (N sin(pi d))|^2 with d = offset / 20.48 GHz;
//      the half-power width must be 17.72 MHz (0.886 channels) and the
//      response one channel away must be below -10 dB.
//   B. Spectral line linearity with higher-order sampling: noise plus an
//      18.48 GHz CW on input 4 (pair 1 USB).  Sampled at 20.48 GS/s the tone
//      must appear in channel 100 (20.48 - 18.48 = 2.00 GHz).  The tone is
//      switched on and off in alternate 1000 ms integrations (30 frames) at
//      four amplitudes over 18 dB; on-minus-off power must scale with the
//      tone power.
//   C. Total power: band-limited noise (0.5-2.5 GHz, a sum of 64 random
//      tones) on input 3 (pair 1 LSB) stepped over 12 dB in 1 dB steps.  The
//      sum over channels 1..511 must equal the power computed here from the
//      samples by Parseval's theorem, (N sum x^2 - X0^2 - X512^2) / 2 per
//      frame; the in-band (channels 25-125) power must rise at every step.
//      The range over which in-band output follows input within +-0.2 dB is
//      printed.
//   D. Gain calibration and sideband separation on pair 0: a 3.00 GHz USB
//      tone (channel 150) leaks into the LSB IF with a = 0.35 at 50 deg, and
//      a 7.00 GHz LSB tone (channel 350) into the USB IF with b = 0.25 at
//      -30 deg.  A calibration-mode integration with the reset gains 1 + 0j
//      gives the auto and cross spectra, from which the gains are computed
//      as C1 = -conj(R) / |Y_USB|^2 at channel 150 and C2 = -R / |Y_LSB|^2
//      at channel 350.  They must come out near -a and -b.  They are written
//      to every channel once all four calibration spectra have been read
//      out (four short integrations later).  An observation-mode integration
//      must then show both images at least 20 dB weaker than before.
// The other inputs carry a constant code, which only affects channel 0.
module tb_drs4_workloads;
  import drs4_pkg::*;
  localparam int N = 1024, NC = 512, F100 = 3, NP = 2;
  localparam real PI = 3.14159265358979323846;
  localparam real FS = 20480.0;                     // MHz
  localparam int NA = 201, NB = 8, NCI = 13, ND = 6; // integrations per phase
  localparam int NI = NA + NB + NCI + ND;
  localparam int JD = NA + NB + NCI;               // calibration integration

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  win_t  win_sel  = WIN_RECT;
  dump_t dump_sel = DUMP_100MS;
  mode_t mode_sel = MODE_OBS;
  logic  cg_we = 0, cg_sel = 0;
  logic [0:0] cg_pair = '0;
  logic [8:0] cg_addr = '0;
  cgain_t cg_val = '0;
  logic [NP-1:0] init_busy;
  logic adc_valid = 0;
  logic [2:0] adc_code [2*NP];
  logic pps = 0, set_sec = 0;
  logic [29:0] set_sec_val = '0;
  logic [NP-1:0] vd_valid, vd_ready, vd_sop, vd_eop;
  logic [31:0] vd_data [NP];
  logic [4*NP-1:0] overrun;

  drs4_top #(.FRAMES_PER_100MS(F100)) dut (
    .clk, .rst_n, .win_sel, .dump_sel, .mode_sel, .cg_we, .cg_pair, .cg_sel, .cg_addr, .cg_val,
    .init_busy, .adc_valid, .adc_code, .pps, .set_sec, .set_sec_val, .ref_epoch(6'd0),
    .station_id(16'h0001), .vd_valid, .vd_ready, .vd_data, .vd_sop, .vd_eop, .overrun);

  int checks = 0, failures = 0;
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f_to_dbl(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction
  function automatic real absr(real x); return x < 0 ? -x : x; endfunction
  function automatic real db(real x); return 10.0 * $log10(x); endfunction

  // ------------------------------------------------------------ VDIF capture
  // Per thread (4 * pair + stream) and integration: channels 100 and 250,
  // the sum over channels 1..511 and 25..125, and the strongest channel.
  real v100 [8][NI], v250 [8][NI], vtot [8][NI], vinb [8][NI], vmax [8][NI];
  real v150 [8][NI], v350 [8][NI];
  int  amax [8][NI];
  int  widx [NP], thread [NP], cnt [8];
  int  hnum [NP], tsn [8][NI];                      // VDIF frame number field

  always @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (rst_n && vd_valid[p] && vd_ready[p]) begin
        int w, t, j, ch;
        real v;
        w = widx[p];
        if (w == 1) hnum[p] = int'(vd_data[p][23:0]);
        if (w == 3) thread[p] = int'(vd_data[p][25:16]);
        t = thread[p];
        if (w >= 8 && cnt[t] < NI) begin
          j  = cnt[t];
          ch = w - 8;
          v  = f_to_dbl(vd_data[p]);
          if (ch == 0) tsn[t][j] = hnum[p];
          if (ch == 100) v100[t][j] = v;
          if (ch == 250) v250[t][j] = v;
          if (ch == 150) v150[t][j] = v;
          if (ch == 350) v350[t][j] = v;
          if (ch >= 1) vtot[t][j] += v;
          if (ch >= 25 && ch <= 125) vinb[t][j] += v;
          if (ch >= 1 && v > vmax[t][j]) begin vmax[t][j] = v; amax[t][j] = ch; end
        end
        if (w == 8 + NC - 1) begin
          cnt[t]++;
          widx[p] = 0;
        end else widx[p] = w + 1;
      end
    vd_ready <= '1;
  end

  // ------------------------------------------------------------ stimulus
  function automatic int quant(real x);
    int c;
    c = $rtoi((x + 7.0) / 2.0 + 0.5 + 100.0) - 100;
    if (c < 0) c = 0;
    if (c > 7) c = 7;
    return c;
  endfunction
  function automatic real gauss();                  // unit variance
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom_range(100000)) / 100000.0 - 0.5;
    return s;
  endfunction

  real amp_b [NB / 2] = '{0.25, 0.5, 1.0, 2.0};
  real fm [64], pm [64];
  real parse [NI];                                  // Parseval power, phase C
  real sig_c [NCI];
  real c1r, c1i, c2r, c2i;                          // computed gains, phase D

  // dumping time and mode of integration j
  function automatic dump_t jdump(int j);
    if (j >= NA && j < NA + NB) return DUMP_1000MS;
    if (j == JD) return DUMP_200MS;
    return DUMP_100MS;
  endfunction
  function automatic int jlen(int j);
    return (jdump(j) == DUMP_1000MS) ? 10 * F100 : (jdump(j) == DUMP_200MS) ? 2 * F100 : F100;
  endfunction

  initial begin
    real ph, ph_b, x, sx2, x0, x512, sg, ph_u, ph_l, pu, pl;
    int  code [4], nlen, jc;
    longint t;
    for (int p = 0; p < NP; p++) widx[p] = 0;
    for (int i = 0; i < 8; i++) cnt[i] = 0;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < NI; j++) begin
        v100[i][j] = 0; v250[i][j] = 0; v150[i][j] = 0; v350[i][j] = 0;
        vtot[i][j] = 0; vinb[i][j] = 0; vmax[i][j] = 0; amax[i][j] = 0;
      end
    for (int m = 0; m < 64; m++) begin
      fm[m] = 500.0 + 2000.0 * real'($urandom_range(100000)) / 100000.0;
      pm[m] = 2.0 * PI * real'($urandom_range(100000)) / 100000.0;
    end
    for (int i = 0; i < 2 * NP; i++) adc_code[i] = 3'd4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (init_busy != '0) @(posedge clk);
    ph = 0.0; ph_b = 0.0; ph_u = 0.0; ph_l = 0.0; t = 0;
    for (int j = 0; j < NI; j++) begin
      nlen = jlen(j);
      parse[j] = 0.0;
      jc = j - NA - NB;
      if (jc >= 0 && jc < NCI) sig_c[jc] = 1.5 * $pow(10.0, real'(jc - 6) / 20.0);
      for (int f = 0; f < nlen; f++) begin
        // the dumping time of the next integration, set while this one runs
        if (f == 2) begin
          dump_sel <= jdump(j + 1);
          mode_sel <= (j + 1 == JD) ? MODE_CAL : MODE_OBS;
        end
        // the calibration spectra have arrived: compute the gains
        if (j == JD + 4 && f == 0) begin
          pu  = v150[0][JD];
          pl  = v350[1][JD];
          c1r = -v150[2][0] / pu;  c1i =  v150[3][0] / pu;   // -conj(R) / |Y_USB|^2
          c2r = -v350[2][0] / pl;  c2i = -v350[3][0] / pl;   // -R / |Y_LSB|^2
          $display("computed gains: C1 = %f + %fj, C2 = %f + %fj", c1r, c1i, c2r, c2i);
        end
        sx2 = 0.0; x0 = 0.0; x512 = 0.0;
        for (int n = 0; n < N; n++) begin
          for (int i = 0; i < 4; i++) code[i] = 4;
          if (j < NA) begin
            // A: tone at 5000 + 2 (j - 100) MHz on pair 0 USB
            ph += 2.0 * PI * (5000.0 + 2.0 * real'(j - NA / 2)) / FS;
            if (ph > 2.0 * PI) ph -= 2.0 * PI;
            code[1] = quant(5.0 * $cos(ph) + 0.7 * gauss());
          end else if (j < NA + NB) begin
            // B: noise plus, in odd integrations, an 18.48 GHz tone on pair 1 USB
            ph_b += 2.0 * PI * 18480.0 / FS;
            if (ph_b > 2.0 * PI) ph_b -= 2.0 * PI;
            x = 2.0 * gauss();
            if ((j - NA) % 2 == 1) x += amp_b[(j - NA) / 2] * $cos(ph_b);
            code[3] = quant(x);
          end else if (j >= JD) begin
            // D: tones with cross leakage on pair 0
            ph_u += 2.0 * PI * 3000.0 / FS;
            ph_l += 2.0 * PI * 7000.0 / FS;
            if (ph_u > 2.0 * PI) ph_u -= 2.0 * PI;
            if (ph_l > 2.0 * PI) ph_l -= 2.0 * PI;
            code[1] = quant(4.0 * $cos(ph_u) + 0.25 * 3.0 * $cos(ph_l - PI / 6.0) + 0.5 * gauss());
            code[0] = quant(3.0 * $cos(ph_l) + 0.35 * 4.0 * $cos(ph_u + 5.0 * PI / 18.0)
                            + 0.5 * gauss());
            // gain table writes, spread over the first frame after the gains are known
            cg_we <= 1'b0;
            if (j == JD + 4 && f == 0) begin
              cg_we   <= 1'b1;
              cg_pair <= 1'b0;
              cg_sel  <= (n >= NC);
              cg_addr <= 9'(n % NC);
              cg_val  <= (n < NC) ? '{re: 16'($rtoi(c1r * 16384.0)), im: 16'($rtoi(c1i * 16384.0))}
                                  : '{re: 16'($rtoi(c2r * 16384.0)), im: 16'($rtoi(c2i * 16384.0))};
            end
          end else begin
            // C: band-limited noise on pair 1 LSB
            x = 0.0;
            for (int m = 0; m < 64; m++) x += $cos(2.0 * PI * fm[m] * real'(t) / FS + pm[m]);
            code[2] = quant(sig_c[jc] * $sqrt(2.0 / 64.0) * x);
            sg = real'(2 * code[2] - 7);
            sx2 += sg * sg;
            x0 += sg;
            x512 += (n % 2 == 0) ? sg : -sg;
          end
          for (int i = 0; i < 4; i++) adc_code[i] <= 3'(code[i]);
          adc_valid <= 1;
          t++;
          @(posedge clk);
        end
        parse[j] += (real'(N) * sx2 - x0 * x0 - x512 * x512) / 2.0;
      end
    end
    cg_we <= 1'b0;
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < 4; i++) adc_code[i] <= 3'd4;
      @(posedge clk);
    end
    adc_valid <= 0;
    repeat (8000) @(posedge clk);
    evaluate();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ evaluation
  task automatic evaluate();
    real peak, r, rth, d, lo, hi, fwhm, e1, d_on, off, k1, q;
    real lin [NCI];
    int  nin, best_lo, best_hi;
    // all spectra arrived, no overrun
    for (int i = 0; i < 8; i++) begin
      checks++;
      if ((i % 4 < 2) ? cnt[i] != NI : cnt[i] != 1) begin
        failures++;
        $display("thread %0d: %0d spectra", i, cnt[i]);
      end
    end
    checks++;
    if (overrun != '0) begin failures++; $display("overrun %b", overrun); end
    // every frame of a dump carries that dump's time stamp, also the cross
    // spectra of the calibration dump, which leave after the next dump
    for (int j = 0; j < NI; j++) begin
      checks++;
      if (tsn[1][j] != tsn[0][j] || tsn[4][j] != tsn[0][j] || tsn[5][j] != tsn[0][j] ||
          tsn[0][j] != j) begin
        failures++;
        $display("integration %0d: frame numbers %0d %0d %0d %0d", j, tsn[0][j], tsn[1][j],
                 tsn[4][j], tsn[5][j]);
      end
    end
    for (int t = 2; t < 8; t += (t == 3) ? 3 : 1) begin
      checks++;
      if (tsn[t][0] != JD) begin
        failures++;
        $display("cross spectrum thread %0d stamped %0d, expected %0d", t, tsn[t][0], JD);
      end
    end

    // A: frequency response of channel 250 (pair 0 USB, thread 0)
    peak = v250[0][NA / 2];
    checks++;
    if (amax[0][NA / 2] != 250) begin
      failures++;
      $display("5.00 GHz tone peaks in channel %0d", amax[0][NA / 2]);
    end
    lo = 0.0; hi = 0.0;
    for (int j = 0; j < NA; j++) begin
      d = 2.0 * real'(j - NA / 2) / FS;
      rth = (j == NA / 2) ? 1.0 : $pow($sin(PI * N * d) / (N * $sin(PI * d)), 2.0);
      r = v250[0][j] / peak;
      checks++;
      if (absr(r - rth) > 0.01 + 0.03 * rth) begin
        failures++;
        $display("response at %0d MHz: %f, expected %f", 2 * (j - NA / 2), r, rth);
      end
      if (j > 0 && j <= NA / 2 && v250[0][j-1] / peak < 0.5 && r >= 0.5)
        lo = 2.0 * (real'(j - NA / 2) - (r - 0.5) / (r - v250[0][j-1] / peak));
      if (j > NA / 2 && v250[0][j-1] / peak >= 0.5 && r < 0.5)
        hi = 2.0 * (real'(j - 1 - NA / 2) + (v250[0][j-1] / peak - 0.5) / (v250[0][j-1] / peak - r));
    end
    fwhm = hi - lo;
    e1 = 0.5 * (v250[0][NA / 2 - 10] + v250[0][NA / 2 + 10]) / peak;
    $display("frequency response: FWHM %f MHz (sinc^2: 17.72), one channel away %f dB",
             fwhm, db(e1 + 1e-12));
    checks++;
    if (absr(fwhm - 17.72) > 0.5) failures++;
    checks++;
    if (e1 > 0.1) failures++;

    // B: 18.48 GHz tone in channel 100 of pair 1 USB (thread 4)
    off = 0.0;
    for (int i = 0; i < NB / 2; i++) off += v100[4][NA + 2 * i] / real'(NB / 2);
    k1 = (v100[4][NA + 2 * 2 + 1] - off) / (amp_b[2] * amp_b[2]);
    for (int i = 0; i < NB / 2; i++) begin
      d_on = v100[4][NA + 2 * i + 1] - off;
      q = d_on / (amp_b[i] * amp_b[i]) / k1;
      $display("18.48 GHz tone, amplitude %f: on-off %f dB rel., normalised gain %f",
               amp_b[i], db(absr(d_on) / k1 + 1e-12), q);
      checks++;
      if (absr(q - 1.0) > 0.3) failures++;
      if (amp_b[i] >= 0.5) begin
        checks++;
        if (amax[4][NA + 2 * i + 1] != 100) begin
          failures++;
          $display("tone found in channel %0d", amax[4][NA + 2 * i + 1]);
        end
      end
    end

    // C: total power of pair 1 LSB (thread 5)
    for (int i = 0; i < NCI; i++) begin
      int j;
      j = NA + NB + i;
      checks++;
      if (absr(vtot[5][j] - parse[j]) > 0.005 * parse[j]) begin
        failures++;
        $display("total power step %0d: %f, Parseval %f", i, vtot[5][j], parse[j]);
      end
      if (i > 0) begin
        checks++;
        if (vinb[5][j] <= vinb[5][j-1]) failures++;
      end
      lin[i] = db(vinb[5][j]) - db(sig_c[i] * sig_c[i]);
    end
    // widest run of steps whose output-minus-input stays within +-0.2 dB
    best_lo = 0; best_hi = 0;
    for (int a = 0; a < NCI; a++)
      for (int b = a; b < NCI; b++) begin
        real mn, mx;
        mn = lin[a]; mx = lin[a];
        for (int c = a; c <= b; c++) begin
          if (lin[c] < mn) mn = lin[c];
          if (lin[c] > mx) mx = lin[c];
        end
        if (mx - mn <= 0.4 && b - a > best_hi - best_lo) begin best_lo = a; best_hi = b; end
      end
    for (int i = 0; i < NCI; i++)
      $display("total power: input %6.2f dB, in-band output %8.3f dB, output - input %7.3f dB",
               db(sig_c[i] * sig_c[i]), db(vinb[5][NA + NB + i]), lin[i]);
    $display("total power range within +-0.2 dB of a unity-slope line: %0d dB", best_hi - best_lo);

    // D: gains and sideband rejection, before (calibration, gains 1) and after
    checks++;
    if (absr(c1r + 0.35 * $cos(5.0 * PI / 18.0)) > 0.1 || absr(c1i + 0.35 * $sin(5.0 * PI / 18.0)) > 0.1)
      failures++;
    checks++;
    if (absr(c2r - (-0.25 * $cos(PI / 6.0))) > 0.1 || absr(c2i - (0.25 * $sin(PI / 6.0))) > 0.1)
      failures++;
    begin
      real u_before, u_after, l_before, l_after;
      u_before = db(v150[1][JD] / v150[0][JD]);          // USB tone seen in the LSB
      u_after  = db(v150[1][JD + 5] / v150[0][JD + 5]);
      l_before = db(v350[0][JD] / v350[1][JD]);          // LSB tone seen in the USB
      l_after  = db(v350[0][JD + 5] / v350[1][JD + 5]);
      $display("USB tone image in LSB: %f dB before, %f dB after sideband separation", u_before, u_after);
      $display("LSB tone image in USB: %f dB before, %f dB after sideband separation", l_before, l_after);
      checks++;
      if (u_before - u_after < 20.0) failures++;
      checks++;
      if (l_before - l_after < 20.0) failures++;
    end
  endtask

endmodule
