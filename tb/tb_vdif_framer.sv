// tb_vdif_framer: checks VDIF frame layout, stream order and flow control.
//
// Four spectrum sources (512 words each, word = stream<<16 | channel) become
// ready in the order 2, 0, 3, 1 with overlaps, and the output is accepted
// with random back-pressure.  Each frame must be 8 header words plus 512 data
// words with sop on the first and eop on the last word; the header must hold
// the time stamp, epoch, log2(512) = 9, length 260, 32-bit real samples,
// thread id THREAD_BASE + stream and the station id; frames must leave in
// priority order among the streams that are waiting.  The time stamp input
// changes whenever a stream becomes ready, and every frame must carry the
// time stamp of the moment its stream became ready, not of when it was sent.
module tb_vdif_framer;
  import drs4_pkg::*;
  localparam int NC = 512, NS = 4, TB_BASE = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [29:0] ts_sec = 30'd1000;
  logic [23:0] ts_num = 24'd3;
  logic [NS-1:0] s_valid, s_ready, s_last;
  logic [31:0] s_data [NS];
  logic vd_valid, vd_ready = 0, vd_sop, vd_eop;
  logic [31:0] vd_data;

  vdif_framer #(.NS(NS), .THREAD_BASE(TB_BASE)) dut (.clk, .rst_n, .ts_sec, .ts_num,
    .ref_epoch(6'd47), .station_id(16'h4c4d), .s_valid, .s_ready, .s_data, .s_last,
    .vd_valid, .vd_ready, .vd_data, .vd_sop, .vd_eop);

  int checks = 0, failures = 0;
  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources
  logic [NS-1:0] armed = '0;
  int cnt [NS];
  always_comb
    for (int s = 0; s < NS; s++) begin
      s_valid[s] = armed[s];
      s_data[s]  = (s << 16) | cnt[s];
      s_last[s]  = (cnt[s] == NC - 1);
    end
  always @(posedge clk)
    for (int s = 0; s < NS; s++)
      if (rst_n && s_valid[s] && s_ready[s]) begin
        if (cnt[s] == NC - 1) begin armed[s] <= 0; cnt[s] <= 0; end
        else cnt[s] <= cnt[s] + 1;
      end

  // output checker
  int widx = 0, cur = -1, nframes = 0;
  int st_sec [NS], st_num [NS];
  logic [31:0] h0, h1;
  int order [$];
  always @(posedge clk) begin
    if (rst_n && vd_valid && vd_ready) begin
      logic [31:0] want;
      if (widx == 3) begin
        cur = int'(vd_data[25:16]) - TB_BASE;
        checks++;
        if (cur < 0 || cur >= NS || h0 != {2'b00, 30'(st_sec[cur])} ||
            h1 != {2'b00, 6'd47, 24'(st_num[cur])}) begin
          failures++;
          $display("stream %0d time stamp %h %h", cur, h0, h1);
        end
      end
      if (widx == 0) h0 = vd_data;
      if (widx == 1) h1 = vd_data;
      case (widx)
        0: want = {2'b00, vd_data[29:0]};                 // time stamp checked at word 3
        1: want = {2'b00, 6'd47, vd_data[23:0]};
        2: want = {3'd0, 5'd9, 24'd260};
        3: want = {1'b0, 5'd31, 10'(TB_BASE + cur), 16'h4c4d};
        4, 5, 6, 7: want = 32'd0;
        default: want = (cur << 16) | (widx - 8);
      endcase
      checks++;
      if (vd_data != want || vd_sop != (widx == 0) || vd_eop != (widx == 8 + NC - 1)) begin
        failures++;
        if (failures < 8) $display("word %0d got %h want %h sop %b eop %b", widx, vd_data, want, vd_sop, vd_eop);
      end
      if (widx == 8 + NC - 1) begin widx = 0; nframes++; order.push_back(cur); end
      else widx++;
    end
    vd_ready <= ($urandom_range(4) != 0);
  end

  // a stream becomes ready together with a new time stamp
  task automatic arm(int s, int sec, int num);
    armed[s]  <= 1;
    ts_sec    <= 30'(sec);
    ts_num    <= 24'(num);
    st_sec[s] = sec;
    st_num[s] = num;
  endtask

  initial begin
    for (int s = 0; s < NS; s++) cnt[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    arm(2, 1000, 3);
    repeat (20) @(posedge clk);
    arm(0, 1001, 0);
    arm(3, 1001, 0);
    repeat (20) @(posedge clk);
    arm(1, 1001, 1);
    while (nframes < 4) @(posedge clk);
    checks++;
    if (order.size() != 4 || order[0] != 2 || order[1] != 0 || order[2] != 1 || order[3] != 3) begin
      failures++;
      $display("order %p", order);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
