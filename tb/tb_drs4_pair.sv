// tb_drs4_pair: end-to-end test of one LSB/USB input pair.
//
// ADC codes for a USB tone (channel 100) with leakage into the LSB, a weaker
// LSB tone (channel 300) and random noise are streamed for 25 frames of 1024
// samples.  FRAMES_PER_100MS = 5 keeps integrations short.  Four
// integrations are run:
//   0: observation, 100 ms (5 frames), rectangle window
//   1: calibration, 100 ms (5 frames), rectangle window
//   2: observation, 200 ms (10 frames), Hanning window
//   3: calibration, 100 ms (5 frames), Hamming window
// with non-trivial gains C1, C2 written to every channel before the first
// frame.  A floating-point model computes the windowed DFT of every frame,
// the sideband separation, the powers and the cross power and their sums.
// Every float word of every VDIF frame is compared with the model (tolerance
// for the fixed-point rounding of FFT and gains), and the header fields,
// frame count per integration (2 in observation, 4 in calibration) and the
// image rejection at the tone channel are checked.
module tb_drs4_pair;
  import drs4_pkg::*;
  localparam int N = 1024, NC = 512, F100 = 5, NINT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  win_t  win_sel  = WIN_RECT;
  dump_t dump_sel = DUMP_100MS;
  mode_t mode_sel = MODE_OBS;
  logic adc_valid = 0;
  logic [2:0] adc_usb = '0, adc_lsb = '0;
  logic cg_we = 0, cg_sel = 0;
  logic [8:0] cg_addr = '0;
  cgain_t cg_val = '0;
  logic init_busy, dump, vd_valid, vd_sop, vd_eop;
  logic vd_ready = 1;
  logic [31:0] vd_data;
  logic [3:0] overrun;

  drs4_pair #(.FRAMES_PER_100MS(F100), .THREAD_BASE(0)) dut (
    .clk, .rst_n, .win_sel, .dump_sel, .mode_sel, .adc_valid, .adc_usb, .adc_lsb,
    .cg_we, .cg_sel, .cg_addr, .cg_val, .init_busy,
    .ts_sec(30'd77), .ts_num(24'd0), .ref_epoch(6'd0), .station_id(16'h0001),
    .dump, .vd_valid, .vd_ready, .vd_data, .vd_sop, .vd_eop, .overrun);

  int checks = 0, failures = 0;
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  mode_t int_mode [NINT] = '{MODE_OBS, MODE_CAL, MODE_OBS, MODE_CAL};
  dump_t int_dump [NINT] = '{DUMP_100MS, DUMP_100MS, DUMP_200MS, DUMP_100MS};
  win_t  int_win  [NINT] = '{WIN_RECT, WIN_RECT, WIN_HANNING, WIN_HAMMING};
  int    int_len  [NINT] = '{5, 5, 10, 5};
  localparam real C1R = -0.30, C1I = 0.20, C2R = 0.25, C2I = -0.10;

  real cs [N], sn [N];
  real m_pu [NINT][NC], m_pl [NINT][NC], m_xr [NINT][NC], m_xi [NINT][NC];
  real t_pu [NINT][NC], t_pl [NINT][NC], t_x [NINT][NC];   // tolerances

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

  int lev_u [N], lev_l [N];

  task automatic model_frame(int j, win_t w);
    real xur, xui, xlr, xli, yur, yui, ylr, yli, wu, wl, a, b;
    real e1, e2;
    for (int k = 0; k < NC; k++) begin
      xur = 0; xui = 0; xlr = 0; xli = 0;
      for (int n = 0; n < N; n++) begin
        wu = lev_u[n] * wcoef(w, n);
        wl = lev_l[n] * wcoef(w, n);
        xur += wu * cs[(k * n) % N]; xui -= wu * sn[(k * n) % N];
        xlr += wl * cs[(k * n) % N]; xli -= wl * sn[(k * n) % N];
      end
      if (int_mode[j] == MODE_OBS) begin
        yur = xur + C2R * xlr - C2I * xli;  yui = xui + C2R * xli + C2I * xlr;
        ylr = xlr + C1R * xur - C1I * xui;  yli = xli + C1R * xui + C1I * xur;
      end else begin
        yur = C1R * xur - C1I * xui;  yui = C1R * xui + C1I * xur;
        ylr = C2R * xlr - C2I * xli;  yli = C2R * xli + C2I * xlr;
      end
      a = $sqrt(yur * yur + yui * yui);
      b = $sqrt(ylr * ylr + yli * yli);
      m_pu[j][k] += yur * yur + yui * yui;
      m_pl[j][k] += ylr * ylr + yli * yli;
      m_xr[j][k] += yur * ylr + yui * yli;
      m_xi[j][k] += yui * ylr - yur * yli;
      e1 = 2.5; e2 = 2.5;     // worst fixed-point error per component
      t_pu[j][k] += 2.0 * 1.5 * e1 * a + 2.0 * e1 * e1;
      t_pl[j][k] += 2.0 * 1.5 * e2 * b + 2.0 * e2 * e2;
      t_x[j][k]  += 1.5 * (e1 * b + e2 * a) + 2.0 * e1 * e2;
    end
  endtask

  // --------------------------------------------------------- VDIF capture
  int widx = 0, thread = 0, sec = 0, hdr_ok = 1;
  int nspec [NINT][4];
  int cur_int [4] = '{0, 0, 0, 0};    // next integration expected per thread
  real rej_obs = 0.0;

  always @(posedge clk) begin
    if (rst_n && vd_valid && vd_ready) begin
      if (widx == 0) sec = int'(vd_data[29:0]);
      if (widx == 2 && vd_data != {3'd0, 5'd9, 24'd260}) hdr_ok = 0;
      if (widx == 3) begin
        thread = int'(vd_data[25:16]);
        // cross-power threads exist only for calibration integrations
        while (thread >= 2 && cur_int[thread] < NINT && int_mode[cur_int[thread]] != MODE_CAL)
          cur_int[thread]++;
      end
      if (widx >= 8) begin
        int j, k;
        real got, want, tol;
        j = cur_int[thread];
        k = widx - 8;
        got = f_to_dbl(vd_data);
        case (thread)
          0: begin want = m_pu[j][k]; tol = t_pu[j][k]; end
          1: begin want = m_pl[j][k]; tol = t_pl[j][k]; end
          2: begin want = m_xr[j][k]; tol = t_x[j][k]; end
          default: begin want = m_xi[j][k]; tol = t_x[j][k]; end
        endcase
        tol += 1e-5 * absr(want) + 1.0;
        checks++;
        if (j >= NINT || absr(got - want) > tol) begin
          failures++;
          if (failures < 10) $display("int %0d thread %0d ch %0d got %f want %f tol %f", j, thread, k, got, want, tol);
        end
        if (j == 0 && thread == 1 && k == 100) rej_obs = got / m_pu[0][100];
      end
      if (widx == 8 + NC - 1) begin
        checks++;
        if (!vd_eop || sec != 77) failures++;
        if (cur_int[thread] < NINT) nspec[cur_int[thread]][thread]++;
        cur_int[thread]++;
        widx = 0;
      end else widx++;
    end
  end

  // ---------------------------------------------------------------- stimulus
  function automatic int quant(real x);
    int c;
    c = $rtoi((x + 7.0) / 2.0 + 0.5 + 100.0) - 100;   // nearest odd level
    if (c < 0) c = 0;
    if (c > 7) c = 7;
    return c;
  endfunction

  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 6; i++) s += real'($urandom_range(10000)) / 10000.0 - 0.5;
    return s;
  endfunction

  initial begin
    int frame, j, fs, cu, cl;
    real ph;
    for (int i = 0; i < N; i++) begin
      cs[i] = $cos(2.0 * 3.14159265358979323846 * i / N);
      sn[i] = $sin(2.0 * 3.14159265358979323846 * i / N);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (init_busy) @(posedge clk);
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < NC; k++) begin
        cg_we <= 1; cg_sel <= 1'(s); cg_addr <= 9'(k);
        cg_val <= (s == 0) ? '{re: 16'($rtoi(C1R * 16384)), im: 16'($rtoi(C1I * 16384))}
                           : '{re: 16'($rtoi(C2R * 16384)), im: 16'($rtoi(C2I * 16384))};
        @(posedge clk);
      end
    cg_we <= 0;
    frame = 0;
    fs = 0;
    mode_sel <= int_mode[0];
    dump_sel <= int_dump[0];
    for (j = 0; j < NINT; j++) begin
      for (int f = 0; f < int_len[j]; f++) begin
        if (f == 0) win_sel <= int_win[j];
        if (f == 2 && j + 1 < NINT) begin
          mode_sel <= int_mode[j+1];
          dump_sel <= int_dump[j+1];
        end
        for (int n = 0; n < N; n++) begin
          ph = 2.0 * 3.14159265358979323846 * (100.0 * n / N + 0.1 * frame);
          // USB: tone in channel 100; LSB: leaked USB tone (0.3 - 0.2j) and own tone in 300
          cu = quant(4.0 * $cos(ph) + 1.2 * gauss());
          cl = quant(4.0 * (0.3 * $cos(ph) + 0.2 * $sin(ph)) +
                     1.5 * cs[(300 * n) % N] + 1.2 * gauss());
          lev_u[n] = 2 * cu - 7;
          lev_l[n] = 2 * cl - 7;
          adc_valid <= 1;
          adc_usb   <= 3'(cu);
          adc_lsb   <= 3'(cl);
          @(posedge clk);
        end
        model_frame(j, int_win[j]);
        frame++;
      end
    end
    // flush frame, then wait for the last spectra
    for (int n = 0; n < N; n++) begin
      adc_usb <= 3'($urandom_range(7));
      adc_lsb <= 3'($urandom_range(7));
      @(posedge clk);
    end
    adc_valid <= 0;
    repeat (6000) @(posedge clk);
    for (int i = 0; i < NINT; i++)
      for (int t = 0; t < 4; t++) begin
        checks++;
        if (nspec[i][t] != ((int_mode[i] == MODE_CAL || t < 2) ? 1 : 0)) begin
          failures++;
          $display("integration %0d thread %0d spectra %0d", i, t, nspec[i][t]);
        end
      end
    checks++;
    if (!hdr_ok) failures++;
    checks++;
    if (overrun != 0) failures++;
    // image rejection: leaked USB tone in the LSB output well below the USB power
    checks++;
    if (rej_obs > 0.01) begin failures++; $display("LSB/USB at tone %f", rej_obs); end
    $display("image rejection at channel 100: %f dB", 10.0 * $log10(rej_obs + 1e-30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
