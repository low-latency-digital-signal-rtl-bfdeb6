// tb_nco_mixer: checks the oscillator mixer sample by sample against a
// reference model: a 16-bit phase accumulator that starts at zero after
// reset, the phase offset added, a 64-entry cosine table of
// round(2048*cos) and products shifted right by 11. Part 1 uses the
// quarter-rate frequency word and expects exactly the (s,0,-s,0) and
// (0,-s,0,s) sequences of the multiplexer mixer. Part 2 uses random
// frequency words and phase offsets that change during the run. Every
// output is checked one clock edge after its sample (one-cycle latency).
module tb_nco_mixer;
  import fbdsp_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [13:0] s;
  logic [15:0] ftw, ph;
  logic signed [14:0] re, im;
  int checks = 0, failures = 0;

  nco_mixer dut (.clk, .rst, .s_adc_i(s), .ftw_i(ftw), .phase_i(ph), .re_o(re), .im_o(im));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lo(int k);
    return int'($floor(2048.0 * $cos(2.0 * 3.14159265358979 * real'(k & 63) / 64.0) + 0.5));
  endfunction

  // floor division by 2^11, like an arithmetic shift
  function automatic int shr11(longint p);
    return int'(p >>> 11);
  endfunction

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int acc, idx, sv, exp_re, exp_im;
    s = 0; ftw = 16'h4000; ph = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    acc = 0;
    // part 1: quarter-rate word, compare with the multiplexer sequences
    for (int n = 0; n < 400; n++) begin
      sv = int'($signed(14'($urandom)));
      if (n == 0) sv = -8192;
      if (n == 1) sv = 8191;
      s = 14'(sv);
      @(posedge clk); #1;
      case (n % 4)
        0: begin exp_re = sv;  exp_im = 0;   end
        1: begin exp_re = 0;   exp_im = -sv; end
        2: begin exp_re = -sv; exp_im = 0;   end
        default: begin exp_re = 0; exp_im = sv; end
      endcase
      expect_eq("fs/4 re", int'(re), exp_re);
      expect_eq("fs/4 im", int'(im), exp_im);
      acc = (acc + 16'h4000) & 16'hFFFF;
    end
    // part 2: random frequency and phase
    for (int n = 0; n < 3000; n++) begin
      if (n % 300 == 0) begin
        ftw = 16'($urandom);
        ph  = 16'($urandom);
      end
      sv = int'($signed(14'($urandom)));
      s = 14'(sv);
      idx = ((acc + int'(ph)) & 16'hFFFF) >> 10;
      exp_re = shr11(longint'(sv) * longint'(lo(idx)));
      exp_im = shr11(longint'(sv) * longint'(lo(idx + 16)));
      @(posedge clk); #1;
      expect_eq("re", int'(re), exp_re);
      expect_eq("im", int'(im), exp_im);
      acc = (acc + int'(ftw)) & 16'hFFFF;
    end
    // the table itself: a constant input of 2^11 reads the cosine out
    ftw = 16'd1024; ph = 0; s = 14'sd2048;
    for (int n = 0; n < 128; n++) begin
      idx = ((acc + int'(ph)) & 16'hFFFF) >> 10;
      @(posedge clk); #1;
      expect_eq("cos table", int'(re), lo(idx));
      acc = (acc + int'(ftw)) & 16'hFFFF;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
