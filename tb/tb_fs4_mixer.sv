// tb_fs4_mixer: drives random 14-bit samples (plus the extreme values) and
// checks Re[S_m] and Im[S_m] one clock edge later against the sample times
// cos(pi n/2) and -sin(pi n/2), computed here as (1,0,-1,0) and (0,-1,0,1)
// from an independent sample counter n that starts at 0 after reset.
module tb_fs4_mixer;
  import fbdsp_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] s;
  logic signed [MIX_W-1:0] re, im;
  int checks = 0, failures = 0;

  fs4_mixer dut (.clk, .rst, .s_adc_i(s), .re_o(re), .im_o(im));

  always #5 clk = ~clk;

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cosq(int n);
    int t[4] = '{1, 0, -1, 0};
    return t[n % 4];
  endfunction
  function automatic int msinq(int n);
    int t[4] = '{0, -1, 0, 1};
    return t[n % 4];
  endfunction

  initial begin
    int sv;
    s = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 400; n++) begin
      if (n == 5)      s = -14'sd8192;
      else if (n == 6) s = -14'sd8192;
      else if (n == 7) s = 14'sd8191;
      else             s = ADC_W'($urandom);
      sv = int'(s);
      @(posedge clk); #1;
      checks++;
      if (int'(re) != sv * cosq(n) || int'(im) != sv * msinq(n)) begin
        failures++;
        $display("n=%0d s=%0d re=%0d im=%0d", n, sv, re, im);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
