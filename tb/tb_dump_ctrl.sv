// tb_dump_ctrl: checks channel selection and integration timing.
//
// A bin stream shaped like the FFT output (bit-reversed order, 1024 bins per
// frame, in_first on bin 0) is fed with FRAMES_PER_100MS = 2, so the four
// dumping times last 2, 4, 10 and 20 frames.  The test runs integrations of
// each length, changes dump_sel and mode in the middle of integrations, and
// compares keep, channel, first, eoi, mode and the dump pulse with a model
// that counts frames on its own.  It also checks that an integration takes
// exactly the expected number of clocks (frames x 1024).
module tb_dump_ctrl;
  import drs4_pkg::*;
  localparam int N = 1024;
  localparam int F100 = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dump_t dump_sel = DUMP_100MS;
  mode_t mode_sel = MODE_OBS;
  logic in_valid = 0, in_first = 0;
  logic [9:0] in_bin = '0;
  logic out_keep, dump;
  tag_t out_tag;

  dump_ctrl #(.FRAMES_PER_100MS(F100)) dut (.clk, .rst_n, .dump_sel, .mode_sel, .in_valid,
    .in_bin, .in_first, .out_keep, .out_tag, .dump);

  int checks = 0, failures = 0;
  int ndump = 0;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // model state
  int    m_frame = 0, m_len = 0;
  mode_t m_mode;
  int    cyc = 0, last_dump_cyc = -1;

  dump_t sels [8]  = '{DUMP_100MS, DUMP_200MS, DUMP_500MS, DUMP_1000MS,
                       DUMP_100MS, DUMP_500MS, DUMP_200MS, DUMP_100MS};
  mode_t modes [8] = '{MODE_OBS, MODE_CAL, MODE_OBS, MODE_CAL,
                       MODE_CAL, MODE_OBS, MODE_OBS, MODE_CAL};

  initial begin
    int k, b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 8; it++) begin
      m_len  = (sels[it] == DUMP_100MS ? 1 : sels[it] == DUMP_200MS ? 2 :
                sels[it] == DUMP_500MS ? 5 : 10) * F100;
      dump_sel <= sels[it];
      mode_sel <= modes[it];
      m_mode = modes[it];
      for (int f = 0; f < m_len; f++) begin
        for (int i = 0; i < N; i++) begin
          // the next integration's settings show up early: must be ignored
          if (f == 0 && i == 5 && it < 7) begin
            dump_sel <= sels[it+1];
            mode_sel <= modes[it+1];
          end
          b = int'(bitrev10(10'(i)));
          in_valid <= 1;
          in_first <= (i == 0);
          in_bin   <= 10'(b);
          #1;
          chk(out_keep == (b < N / 2), "keep");
          if (b < N / 2) begin
            chk(out_tag.chan == 9'(b), "chan");
            chk(out_tag.first == (f == 0), "first");
            chk(out_tag.mode == m_mode, "mode");
            chk(out_tag.eoi == (f == m_len - 1 && i == N - 2), "eoi");
            chk(dump == out_tag.eoi, "dump");
          end else chk(dump == 0, "dump on dropped bin");
          if (dump) begin
            ndump++;
            if (last_dump_cyc >= 0) chk(cyc - last_dump_cyc == m_len * N, "period");
            last_dump_cyc = cyc;
          end
          @(posedge clk);
          cyc++;
        end
      end
    end
    chk(ndump == 8, "dump count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
