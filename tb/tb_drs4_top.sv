// tb_drs4_top: end-to-end test of the four-input spectrometer.
//
// Both input pairs get tone-plus-noise ADC codes (pair 0: USB tone in
// channel 100 leaking into the LSB, LSB tone in channel 300; pair 1: USB
// tone in channel 200, LSB tone in channel 40).  Pair 0 uses non-trivial
// gains C1, C2; pair 1 keeps the reset value 1 + 0j.  FRAMES_PER_100MS = 5
// keeps the run short.  Five integrations cover every setting:
//   0: observation 100 ms, rectangle     1: calibration 200 ms, Hanning
//   2: observation 500 ms, Hamming       3: calibration 1000 ms, rectangle
//   4: observation 100 ms, rectangle
// A floating-point model (windowed DFT, sideband separation, correlation,
// integration) checks every 8th channel of every VDIF frame of both pairs.
// Also checked: thread ids (0-3 pair 0, 4-7 pair 1), the time stamps against
// PPS pulses applied during the run and the loaded second, the number of
// clocks between dumps for each dumping time (frames x 1024), the spectra per
// integration, and no overrun.  The mechanisms exercised are counted and
// each must occur: observation and calibration integrations, each window,
// each dumping time, PPS second changes, output back-pressure.
module tb_drs4_top;
  import drs4_pkg::*;
  localparam int N = 1024, NC = 512, F100 = 5, NINT = 5, NP = 2;

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
    .init_busy, .adc_valid, .adc_code, .pps, .set_sec, .set_sec_val, .ref_epoch(6'd48),
    .station_id(16'h4c4d), .vd_valid, .vd_ready, .vd_data, .vd_sop, .vd_eop, .overrun);

  int checks = 0, failures = 0;
  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ schedule
  mode_t int_mode [NINT] = '{MODE_OBS, MODE_CAL, MODE_OBS, MODE_CAL, MODE_OBS};
  dump_t int_dump [NINT] = '{DUMP_100MS, DUMP_200MS, DUMP_500MS, DUMP_1000MS, DUMP_100MS};
  win_t  int_win  [NINT] = '{WIN_RECT, WIN_HANNING, WIN_HAMMING, WIN_RECT, WIN_RECT};
  int    int_len  [NINT] = '{5, 10, 25, 50, 5};
  real c1r [NP] = '{-0.30, 1.0}, c1i [NP] = '{0.20, 0.0};
  real c2r [NP] = '{0.25, 1.0},  c2i [NP] = '{-0.10, 0.0};

  // ------------------------------------------------------------ model
  localparam int KS = 8;                    // model every KS-th channel
  real cs [N], sn [N];
  real m [NP][NINT][4][NC/KS];
  real tl [NP][NINT][4][NC/KS];
  int  lev [2*NP][N];

  function automatic real wcoef(win_t w, int n);
    real a0;
    if (w == WIN_RECT) return 1.0;
    a0 = (w == WIN_HAMMING) ? 0.54 : 0.5;
    return real'($rtoi(256.0 * (a0 - (1.0 - a0) * cs[n]) + 0.5)) / 256.0;
  endfunction
  function automatic real f_to_dbl(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction
  function automatic real absr(real x); return x < 0 ? -x : x; endfunction

  task automatic model_frame(int j);
    real xur, xui, xlr, xli, yur, yui, ylr, yli, wu, wl, a, b, w;
    int k;
    for (int p = 0; p < NP; p++)
      for (int ki = 0; ki < NC / KS; ki++) begin
        k = ki * KS;
        xur = 0; xui = 0; xlr = 0; xli = 0;
        for (int n = 0; n < N; n++) begin
          w  = wcoef(int_win[j], n);
          wu = lev[2*p+1][n] * w;
          wl = lev[2*p][n] * w;
          xur += wu * cs[(k * n) % N]; xui -= wu * sn[(k * n) % N];
          xlr += wl * cs[(k * n) % N]; xli -= wl * sn[(k * n) % N];
        end
        if (int_mode[j] == MODE_OBS) begin
          yur = xur + c2r[p] * xlr - c2i[p] * xli;  yui = xui + c2r[p] * xli + c2i[p] * xlr;
          ylr = xlr + c1r[p] * xur - c1i[p] * xui;  yli = xli + c1r[p] * xui + c1i[p] * xur;
        end else begin
          yur = c1r[p] * xur - c1i[p] * xui;  yui = c1r[p] * xui + c1i[p] * xur;
          ylr = c2r[p] * xlr - c2i[p] * xli;  yli = c2r[p] * xli + c2i[p] * xlr;
        end
        a = $sqrt(yur * yur + yui * yui);
        b = $sqrt(ylr * ylr + yli * yli);
        m[p][j][0][ki] += yur * yur + yui * yui;
        m[p][j][1][ki] += ylr * ylr + yli * yli;
        m[p][j][2][ki] += yur * ylr + yui * yli;
        m[p][j][3][ki] += yui * ylr - yur * yli;
        tl[p][j][0][ki] += 7.5 * a + 12.5;
        tl[p][j][1][ki] += 7.5 * b + 12.5;
        tl[p][j][2][ki] += 3.75 * (a + b) + 12.5;
        tl[p][j][3][ki] += 3.75 * (a + b) + 12.5;
      end
  endtask

  // ------------------------------------------------------------ time stamps
  int sec0 = 5000, npps = 0, dumps_since_pps = 0, ndump = 0;
  int exp_sec [NINT], exp_num [NINT];
  int cyc = 0, last_dump = -1, n_dump_len [4];
  always @(posedge clk) cyc <= cyc + 1;
  logic [2:0] pps_d;
  always @(posedge clk) begin
    pps_d <= {pps_d[1:0], pps};
    if (rst_n && pps_d[1] && !pps_d[2]) begin npps++; dumps_since_pps = 0; end
    if (rst_n && dut.dump[0]) begin
      if (ndump < NINT) begin
        exp_sec[ndump] = sec0 + npps;
        exp_num[ndump] = dumps_since_pps;
        if (last_dump >= 0) begin
          checks++;
          if (cyc - last_dump != int_len[ndump] * N) begin
            failures++;
            $display("integration %0d lasted %0d clocks", ndump, cyc - last_dump);
          end else n_dump_len[int'(int_dump[ndump])]++;
        end
      end
      last_dump = cyc;
      ndump++;
      dumps_since_pps++;
    end
  end

  // ------------------------------------------------------------ VDIF capture
  int widx [NP], thread [NP], hsec [NP], hnum [NP];
  int cur_int [8];
  int nspec [NINT][8];
  int n_obs = 0, n_cal = 0, n_stall = 0, n_sec_change = 0, last_hsec = -1;

  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (rst_n && vd_valid[p] && !vd_ready[p]) n_stall++;
      if (rst_n && vd_valid[p] && vd_ready[p]) begin
        int w;
        w = widx[p];
        if (w == 0) hsec[p] = int'(vd_data[p][29:0]);
        if (w == 1) hnum[p] = int'(vd_data[p][23:0]);
        if (w == 1) begin checks++; if (vd_data[p][29:24] != 6'd48) failures++; end
        if (w == 3) begin
          thread[p] = int'(vd_data[p][25:16]);
          checks++;
          if (thread[p] / 4 != p || vd_data[p][15:0] != 16'h4c4d) failures++;
          while (thread[p] % 4 >= 2 && cur_int[thread[p]] < NINT &&
                 int_mode[cur_int[thread[p]]] != MODE_CAL)
            cur_int[thread[p]]++;
        end
        if (w >= 8 && (w - 8) % KS == 0) begin
          int j, t, ki;
          real got, want, tol;
          t = thread[p] % 4;
          j = cur_int[thread[p]];
          ki = (w - 8) / KS;
          got = f_to_dbl(vd_data[p]);
          want = (j < NINT) ? m[p][j][t][ki] : 0.0;
          tol  = (j < NINT) ? tl[p][j][t][ki] + 1e-5 * absr(want) + 1.0 : 0.0;
          checks++;
          if (j >= NINT || absr(got - want) > tol) begin
            failures++;
            if (failures < 10) $display("pair %0d int %0d thread %0d ch %0d got %f want %f", p, j,
                                        thread[p], w - 8, got, want);
          end
        end
        if (w == 8 + NC - 1) begin
          int j;
          j = cur_int[thread[p]];
          checks++;
          if (j >= NINT || hsec[p] != exp_sec[j] || hnum[p] != exp_num[j]) begin
            failures++;
            $display("time stamp %0d.%0d, expected %0d.%0d", hsec[p], hnum[p],
                     (j < NINT) ? exp_sec[j] : -1, (j < NINT) ? exp_num[j] : -1);
          end
          if (j < NINT) begin
            nspec[j][thread[p]]++;
            if (thread[p] == 0) begin
              if (int_mode[j] == MODE_OBS) n_obs++; else n_cal++;
              if (last_hsec >= 0 && hsec[p] != last_hsec) n_sec_change++;
              last_hsec = hsec[p];
            end
          end
          cur_int[thread[p]]++;
          widx[p] = 0;
        end else widx[p] = w + 1;
      end
    end
    vd_ready[0] <= 1'b1;
    vd_ready[1] <= ($urandom_range(3) != 0);      // back-pressure on pair 1
  end

  // ------------------------------------------------------------ stimulus
  function automatic int quant(real x);
    int c;
    c = $rtoi((x + 7.0) / 2.0 + 0.5 + 100.0) - 100;
    if (c < 0) c = 0;
    if (c > 7) c = 7;
    return c;
  endfunction
  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 6; i++) s += real'($urandom_range(10000)) / 10000.0 - 0.5;
    return s;
  endfunction

  int n_win [3];

  initial begin
    int frame, gcyc;
    real ph0, ph1;
    int code [4];
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979323846 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979323846 * i / N);
    end
    for (int p = 0; p < NP; p++) widx[p] = 0;
    for (int t = 0; t < 8; t++) cur_int[t] = 0;
    for (int i = 0; i < 2 * NP; i++) adc_code[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    set_sec_val <= 30'(sec0);
    set_sec <= 1;
    @(posedge clk);
    set_sec <= 0;
    while (init_busy != '0) @(posedge clk);
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < NC; k++) begin
        cg_we <= 1; cg_pair <= 1'b0; cg_sel <= 1'(s); cg_addr <= 9'(k);
        cg_val <= (s == 0) ? '{re: 16'($rtoi(c1r[0] * 16384)), im: 16'($rtoi(c1i[0] * 16384))}
                           : '{re: 16'($rtoi(c2r[0] * 16384)), im: 16'($rtoi(c2i[0] * 16384))};
        @(posedge clk);
      end
    cg_we <= 0;
    frame = 0;
    gcyc = 0;
    mode_sel <= int_mode[0];
    dump_sel <= int_dump[0];
    for (int j = 0; j < NINT; j++) begin
      n_win[int'(int_win[j])]++;
      for (int f = 0; f < int_len[j]; f++) begin
        if (f == 0) win_sel <= int_win[j];
        if (f == 2 && j + 1 < NINT) begin
          mode_sel <= int_mode[j+1];
          dump_sel <= int_dump[j+1];
        end
        for (int n = 0; n < N; n++) begin
          // PPS pulses in the middle of some frames, away from dump instants
          pps <= (n >= 500 && n < 520 && (frame == 12 || frame == 47 || frame == 80));
          ph0 = 2.0 * 3.14159265358979323846 * (100.0 * n / N + 0.1 * frame);
          ph1 = 2.0 * 3.14159265358979323846 * (200.0 * n / N + 0.37 * frame);
          code[1] = quant(4.0 * $cos(ph0) + 1.2 * gauss());
          code[0] = quant(4.0 * (0.3 * $cos(ph0) + 0.2 * $sin(ph0)) + 1.5 * cs[(300 * n) % N] + 1.2 * gauss());
          code[3] = quant(3.0 * $cos(ph1) + 1.2 * gauss());
          code[2] = quant(2.0 * cs[(40 * n) % N] + 1.2 * gauss());
          for (int i = 0; i < 4; i++) begin
            lev[i][n] = 2 * code[i] - 7;
            adc_code[i] <= 3'(code[i]);
          end
          adc_valid <= 1;
          @(posedge clk);
        end
        model_frame(j);
        frame++;
      end
    end
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < 4; i++) adc_code[i] <= 3'($urandom_range(7));
      @(posedge clk);
    end
    adc_valid <= 0;
    repeat (12000) @(posedge clk);
    for (int j = 0; j < NINT; j++)
      for (int t = 0; t < 8; t++) begin
        checks++;
        if (nspec[j][t] != ((int_mode[j] == MODE_CAL || t % 4 < 2) ? 1 : 0)) begin
          failures++;
          $display("integration %0d thread %0d spectra %0d", j, t, nspec[j][t]);
        end
      end
    checks++;
    if (overrun != '0) begin failures++; $display("overrun %b", overrun); end
    $display("mechanisms: observation %0d, calibration %0d, rect %0d, hamming %0d, hanning %0d",
             n_obs, n_cal, n_win[0], n_win[1], n_win[2]);
    $display("mechanisms: dumps 100/200/500/1000 ms %0d/%0d/%0d/%0d, second changes %0d, stalls %0d",
             n_dump_len[0], n_dump_len[1], n_dump_len[2], n_dump_len[3], n_sec_change, n_stall);
    for (int i = 0; i < 3; i++) begin checks++; if (n_win[i] == 0) failures++; end
    for (int i = 0; i < 4; i++) begin checks++; if (n_dump_len[i] == 0) failures++; end
    checks++; if (n_obs == 0) failures++;
    checks++; if (n_cal == 0) failures++;
    checks++; if (n_sec_change == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
