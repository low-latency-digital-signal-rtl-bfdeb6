// tb_moving_average: feeds random samples (and long constant runs) through
// the moving average for window lengths 1, 2, 3, 4, 8, 13 and 16 and checks
// every output against a directly computed sum of the last l inputs,
// shifted right by floor(log2 l). The output must appear one clock edge
// after its newest sample (one cycle of latency), and a fully settled
// constant input with a 2-periodic +/-v sideband (the fs/4 mixer image)
// must give exactly the constant for even l.
module tb_moving_average;
  import fbdsp_pkg::*;
  localparam int L_MAX = 16;
  logic clk = 0, rst = 1, clr = 0;
  logic [$clog2(L_MAX+1)-1:0] len;
  logic signed [MIX_W-1:0] x;
  logic signed [IQ_W-1:0]  y;
  int checks = 0, failures = 0;
  int hist [$];

  moving_average #(.L_MAX(L_MAX)) dut (.clk, .rst, .clr_i(clr), .len_i(len), .x_i(x), .y_o(y));

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int flog2(int v);
    int r = 0;
    while ((1 << (r + 1)) <= v) r++;
    return r;
  endfunction

  task automatic run(int l, int n, bit sideband);
    longint sum;
    int lens;
    len = 5'(l);
    clr = 1;
    @(posedge clk); #1;
    clr = 0;
    hist.delete();
    for (int i = 0; i < n; i++) begin
      if (sideband) x = MIX_W'(((i % 2) == 0) ? 1000 + 3000 : 1000 - 3000);
      else          x = MIX_W'($urandom_range(0, 32767) - 16384);
      hist.push_front(int'(x));
      @(posedge clk); #1;
      sum = 0;
      for (int k = 0; k < l && k < hist.size(); k++) sum += hist[k];
      checks++;
      if (longint'(y) != (sum >>> flog2(l))) begin
        failures++;
        $display("l=%0d i=%0d y=%0d exp=%0d", l, i, y, sum >>> flog2(l));
      end
      if (sideband && (l % 2 == 0) && i >= l) begin
        checks++;
        if (int'(y) * (1 << flog2(l)) != 1000 * l) begin
          failures++;
          $display("sideband not removed l=%0d y=%0d", l, y);
        end
      end
    end
  endtask

  initial begin
    x = 0; len = 4;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    run(1, 50, 0);
    run(2, 50, 0);
    run(3, 50, 0);
    run(4, 200, 0);
    run(8, 100, 0);
    run(13, 100, 0);
    run(16, 100, 0);
    run(4, 40, 1);
    run(8, 40, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
