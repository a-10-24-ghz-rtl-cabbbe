// tb_cross_corr: checks R = Y_U * conj(Y_L) on random and extreme inputs,
// the sign extension to 53 bits, the one-clock latency and the tag.
module tb_cross_corr;
  import drs4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  tag_t in_tag = '0;
  dsbs_cplx_t in_usb = '0, in_lsb = '0;
  logic out_valid;
  tag_t out_tag;
  logic signed [PWR_W-1:0] out_re, out_im;

  cross_corr dut (.clk, .rst_n, .in_valid, .in_tag, .in_usb, .in_lsb, .out_valid, .out_tag,
                  .out_re, .out_im);

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ur, ui, lr, li, er, ei;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      if (i == 0) begin ur = -65536; ui = -65536; lr = -65536; li = 65535; end
      else if (i == 1) begin ur = 65535; ui = -65536; lr = 65535; li = 65535; end
      else begin
        ur = longint'($urandom_range(131071)) - 65536;
        ui = longint'($urandom_range(131071)) - 65536;
        lr = longint'($urandom_range(131071)) - 65536;
        li = longint'($urandom_range(131071)) - 65536;
      end
      er = ur * lr + ui * li;
      ei = ui * lr - ur * li;
      in_valid <= 1;
      in_tag   <= tag_t'(13'(i * 5));
      in_usb   <= '{re: 17'(ur), im: 17'(ui)};
      in_lsb   <= '{re: 17'(lr), im: 17'(li)};
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || longint'(out_re) != er || longint'(out_im) != ei ||
          out_tag != tag_t'(13'(i * 5))) begin
        failures++;
        if (failures < 5) $display("got %0d %0d want %0d %0d", out_re, out_im, er, ei);
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
