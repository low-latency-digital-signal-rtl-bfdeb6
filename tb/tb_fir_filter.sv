// tb_fir_filter: checks the 40-tap FIR filter against a direct convolution.
// 1. After reset the coefficients must form a four-sample average: random
//    input, expected floor(sum of the last 4 samples / 4).
// 2. An impulse shows the one-cycle latency: the first output edge after
//    the impulse must already carry c_0 * x.
// 3. Random coefficient sets (small ones and full-range ones that drive the
//    output into saturation) are loaded, the partial sums cleared, and
//    every output is compared with the saturated reference.
// Writes to tap addresses >= 40 must be ignored.
module tb_fir_filter;
  import fbdsp_pkg::*;
  localparam int N = 40;
  logic clk = 0, rst = 1;
  logic clr, cwe;
  logic [5:0] caddr;
  logic signed [15:0] cval;
  logic signed [14:0] x;
  logic signed [15:0] y;
  int checks = 0, failures = 0;
  int coef [N];
  int hist [N];

  fir_filter dut (.clk, .rst, .clr_i(clr), .coef_we_i(cwe), .coef_addr_i(caddr),
    .coef_i(cval), .x_i(x), .y_o(y));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int reference();
    longint acc = 0;
    for (int k = 0; k < N; k++) acc += longint'(coef[k]) * longint'(hist[k]);
    acc = acc >>> 15;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  task automatic push(int v);
    for (int k = N - 1; k > 0; k--) hist[k] = hist[k-1];
    hist[0] = v;
  endtask

  task automatic sample(int v, string what);
    x = 15'(v);
    push(v);
    @(posedge clk); #1;
    expect_eq(what, int'(y), reference());
  endtask

  task automatic clear();
    x = 0; clr = 1; @(posedge clk); #1 clr = 0;
    for (int k = 0; k < N; k++) hist[k] = 0;
  endtask

  task automatic load(int k, int v);
    cwe = 1; caddr = 6'(k); cval = 16'(v);
    @(posedge clk); #1 cwe = 0;
    if (k < N) coef[k] = v;
  endtask

  initial begin
    clr = 0; cwe = 0; caddr = 0; cval = 0; x = 0;
    for (int k = 0; k < N; k++) begin
      coef[k] = (k < 4) ? 8192 : 0;
      hist[k] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // 1. reset coefficients = average of four
    for (int n = 0; n < 300; n++) sample(int'($signed(15'($urandom))), "reset average");
    // 2. impulse, one-cycle latency
    x = 0;
    load(0, 12345);
    clear();
    sample(16000, "impulse latency");
    expect_eq("impulse c0*x", int'(y), int'((longint'(12345) * 16000) >>> 15));
    for (int n = 0; n < 5; n++) sample(0, "impulse tail");
    // 3. random coefficient sets
    for (int set = 0; set < 8; set++) begin
      for (int k = 0; k < N; k++)
        load(k, (set % 2 == 0) ? int'($urandom_range(0, 2000)) - 1000
                               : int'($signed(16'($urandom))));
      load(N + int'($urandom_range(0, 23)), 16'h7FFF);   // ignored
      clear();
      for (int n = 0; n < 200; n++) sample(int'($signed(15'($urandom))), "random set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
