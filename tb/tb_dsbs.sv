// tb_dsbs: checks digital sideband separation.
//
// 1. After reset the tables fill with 1 + 0j for 512 clocks (init_busy), so
//    observation mode gives Y_U = Y_L = X_U + X_L.
// 2. Random complex gains are written to every channel and random spectra
//    are applied in both modes; outputs are compared with a model of the
//    observation and calibration equations (rounding to nearest of C*X).
// 3. Image rejection: a USB tone that leaks into the LSB as X_L = a*X_U is
//    cancelled in Y_L when C1 = -a, leaving at most rounding residue.
// The two-clock latency and the tag passing are checked on every sample.
module tb_dsbs;
  import drs4_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cg_we = 0, cg_sel = 0;
  logic [8:0] cg_addr = '0;
  cgain_t cg_val = '0;
  logic init_busy;
  logic in_valid = 0;
  tag_t in_tag = '0;
  fft_cplx_t x_usb = '0, x_lsb = '0;
  logic out_valid;
  tag_t out_tag;
  dsbs_cplx_t y_usb, y_lsb;

  dsbs dut (.clk, .rst_n, .cg_we, .cg_sel, .cg_addr, .cg_val, .init_busy, .in_valid, .in_tag,
            .x_usb, .x_lsb, .out_valid, .out_tag, .y_usb, .y_lsb);

  int checks = 0, failures = 0;
  int c1r [512], c1i [512], c2r [512], c2i [512];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(longint p);   // round to nearest of p / 2^14
    return int'((p + 64'sd8192) >>> 14);
  endfunction

  // expected queue
  typedef struct { int ur, ui, lr, li; tag_t t; } exp_t;
  exp_t q [$];

  task automatic send(int ch, mode_t m, int xur, int xui, int xlr, int xli);
    exp_t e;
    int a1r, a1i, a2r, a2i;
    a1r = c1r[ch]; a1i = c1i[ch]; a2r = c2r[ch]; a2i = c2i[ch];
    in_valid <= 1;
    in_tag   <= '{chan: 9'(ch), first: 1'b1, eoi: ch[0], mode: m};
    x_usb    <= '{re: 14'(xur), im: 14'(xui)};
    x_lsb    <= '{re: 14'(xlr), im: 14'(xli)};
    e.t = '{chan: 9'(ch), first: 1'b1, eoi: ch[0], mode: m};
    if (m == MODE_CAL) begin
      e.ur = rnd(longint'(a1r) * xur - longint'(a1i) * xui);
      e.ui = rnd(longint'(a1r) * xui + longint'(a1i) * xur);
      e.lr = rnd(longint'(a2r) * xlr - longint'(a2i) * xli);
      e.li = rnd(longint'(a2r) * xli + longint'(a2i) * xlr);
    end else begin
      e.ur = xur + rnd(longint'(a2r) * xlr - longint'(a2i) * xli);
      e.ui = xui + rnd(longint'(a2r) * xli + longint'(a2i) * xlr);
      e.lr = xlr + rnd(longint'(a1r) * xur - longint'(a1i) * xui);
      e.li = xli + rnd(longint'(a1r) * xui + longint'(a1i) * xur);
    end
    q.push_back(e);
    @(posedge clk);
  endtask

  int lat = 0, lsb_resid_max = 0;
  logic measuring = 0;
  always @(posedge clk) begin
    if (in_valid) lat = 0; else lat++;
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) failures++;
      else begin
        e = q.pop_front();
        if (int'(y_usb.re) != e.ur || int'(y_usb.im) != e.ui || int'(y_lsb.re) != e.lr ||
            int'(y_lsb.im) != e.li || out_tag != e.t) begin
          failures++;
          if (failures < 10) $display("got %0d %0d %0d %0d want %0d %0d %0d %0d", y_usb.re, y_usb.im,
                                      y_lsb.re, y_lsb.im, e.ur, e.ui, e.lr, e.li);
        end
      end
      if (measuring) begin
        if (y_lsb.re > lsb_resid_max) lsb_resid_max = y_lsb.re;
        if (-y_lsb.re > lsb_resid_max) lsb_resid_max = -y_lsb.re;
        if (y_lsb.im > lsb_resid_max) lsb_resid_max = y_lsb.im;
        if (-y_lsb.im > lsb_resid_max) lsb_resid_max = -y_lsb.im;
      end
    end
  end

  initial begin
    int busy_cycles;
    for (int i = 0; i < 512; i++) begin c1r[i] = 16384; c1i[i] = 0; c2r[i] = 16384; c2i[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    busy_cycles = 0;
    while (init_busy) begin @(posedge clk); busy_cycles++; end
    checks++;
    if (busy_cycles != 512) begin failures++; $display("init %0d", busy_cycles); end
    // 1. default gains
    for (int i = 0; i < 64; i++)
      send($urandom_range(511), mode_t'(i % 2), $signed($urandom_range(16383)) - 8192,
           $signed($urandom_range(16383)) - 8192, $signed($urandom_range(16383)) - 8192,
           $signed($urandom_range(16383)) - 8192);
    // 2. random gains |C| < 1.4 per component
    for (int s = 0; s < 2; s++)
      for (int ch = 0; ch < 512; ch++) begin
        int r, im;
        r  = int'($urandom_range(46000)) - 23000;
        im = int'($urandom_range(46000)) - 23000;
        in_valid <= 0;
        cg_we <= 1; cg_sel <= 1'(s); cg_addr <= 9'(ch);
        cg_val <= '{re: 16'(r), im: 16'(im)};
        if (s == 0) begin c1r[ch] = r; c1i[ch] = im; end else begin c2r[ch] = r; c2i[ch] = im; end
        @(posedge clk);
      end
    cg_we <= 0;
    in_valid <= 0;
    for (int i = 0; i < 2000; i++)
      send($urandom_range(511), mode_t'($urandom_range(1)), int'($urandom_range(16383)) - 8192,
           int'($urandom_range(16383)) - 8192, int'($urandom_range(16383)) - 8192,
           int'($urandom_range(16383)) - 8192);
    // 3. image rejection: a = 0.3 - 0.2j leakage, C1 = -a
    for (int ch = 0; ch < 8; ch++) begin
      in_valid <= 0;
      cg_we <= 1; cg_sel <= 0; cg_addr <= 9'(ch);
      cg_val <= '{re: -16'sd4915, im: 16'sd3277};
      c1r[ch] = -4915; c1i[ch] = 3277;
      @(posedge clk);
    end
    cg_we <= 0;
    @(posedge clk);
    measuring = 1;
    for (int ch = 0; ch < 8; ch++) begin
      int ur, ui;
      ur = int'($urandom_range(12000)) - 6000;
      ui = int'($urandom_range(12000)) - 6000;
      send(ch, MODE_OBS, ur, ui, $rtoi(0.3 * ur + 0.2 * ui), $rtoi(0.3 * ui - 0.2 * ur));
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    measuring = 0;
    checks++;
    if (lsb_resid_max > 3) begin failures++; $display("image residue %0d", lsb_resid_max); end
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
