// tb_timestamp_1pps: checks the second counter and the spectrum numbering.
//
// The second is loaded, then PPS pulses (asynchronous, several clocks wide)
// and dump pulses are applied in a pattern that includes a dump in the same
// clock as a detected PPS edge.  Each captured (second, number) pair is
// compared with a model, and the three-clock PPS detection delay is checked.
module tb_timestamp_1pps;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pps = 0, set_sec = 0, dump = 0;
  logic [29:0] set_sec_val = '0;
  logic [29:0] ts_sec;
  logic [23:0] ts_num;

  timestamp_1pps dut (.clk, .rst_n, .pps, .set_sec, .set_sec_val, .dump, .ts_sec, .ts_num);

  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_sec, m_num;

  task automatic do_dump();
    dump <= 1;
    @(posedge clk);
    dump <= 0;
    @(posedge clk);
    #1;
    checks++;
    if (int'(ts_sec) != m_sec || int'(ts_num) != m_num) begin
      failures++;
      $display("got %0d.%0d want %0d.%0d", ts_sec, ts_num, m_sec, m_num);
    end
    m_num++;
  endtask

  task automatic pulse_pps();
    #3 pps = 1;                 // asynchronous to clk
    repeat (3) @(posedge clk);  // edge seen after the third clock
    #1;
    checks++;
    if (int'(dut.sec) != m_sec + 1) begin failures++; $display("pps late/early"); end
    m_sec++;
    m_num = 0;
    repeat (5) @(posedge clk);
    pps = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    set_sec_val <= 30'd123456789;
    set_sec <= 1;
    @(posedge clk);
    set_sec <= 0;
    m_sec = 123456789;
    m_num = 0;
    repeat (3) do_dump();
    for (int s = 0; s < 4; s++) begin
      @(posedge clk);
      pulse_pps();
      repeat (s + 2) begin repeat (7) @(posedge clk); do_dump(); end
    end
    // dump in the same clock as the detected PPS edge: belongs to the new second
    @(negedge clk) pps = 1;
    @(posedge clk); @(posedge clk);    // edge detected during the next cycle
    dump <= 1;
    @(posedge clk);
    dump <= 0;
    m_sec++;
    @(posedge clk); #1;
    checks++;
    if (int'(ts_sec) != m_sec || ts_num != 0) begin failures++; $display("coincident %0d %0d", ts_sec, ts_num); end
    m_num = 1;
    pps = 0;
    repeat (4) @(posedge clk);
    do_dump();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
