// tb_power_detect: checks |Y|^2 on random and extreme 17-bit components,
// the one-clock latency and that the tag travels with the data.
module tb_power_detect;
  import drs4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  tag_t in_tag = '0;
  dsbs_cplx_t in_y = '0;
  logic out_valid;
  tag_t out_tag;
  logic [PWR_W-1:0] out_pwr;

  power_detect dut (.clk, .rst_n, .in_valid, .in_tag, .in_y, .out_valid, .out_tag, .out_pwr);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a, b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      case (i)
        0: begin a = -65536; b = -65536; end
        1: begin a = 65535; b = -65536; end
        2: begin a = 0; b = 0; end
        default: begin
          a = longint'($urandom_range(131071)) - 65536;
          b = longint'($urandom_range(131071)) - 65536;
        end
      endcase
      in_valid <= 1;
      in_tag   <= tag_t'(13'(i * 7));
      in_y     <= '{re: 17'(a), im: 17'(b)};
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || out_pwr != PWR_W'(a * a + b * b) || out_tag != tag_t'(13'(i * 7))) begin
        failures++;
        if (failures < 5) $display("a %0d b %0d got %0d", a, b, out_pwr);
      end
    end
    in_valid <= 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
