// tb_delay_line: drives random words into a 6-stage, 8-bit delay line and a
// single-stage one, and checks that each output equals the input the given
// number of clock edges earlier, including the zero state after reset.
module tb_delay_line;
  logic clk = 0, rst = 1;
  logic [7:0] d, q6, q1;
  int checks = 0, failures = 0;
  logic [7:0] hist [$];

  delay_line #(.WIDTH(8), .DEPTH(6)) dut6 (.clk, .rst, .d_i(d), .q_o(q6));
  delay_line #(.WIDTH(8), .DEPTH(1)) dut1 (.clk, .rst, .d_i(d), .q_o(q1));

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 6; n++) hist.push_back(8'h00);
    for (int n = 0; n < 200; n++) begin
      d = 8'($urandom);
      hist.push_back(d);
      @(posedge clk); #1;
      checks++;
      if (q6 !== hist[n+1]) begin
        failures++;
        $display("delay6 mismatch at %0d: got %h exp %h", n, q6, hist[n+1]);
      end
      checks++;
      if (q1 !== d) begin
        failures++;
        $display("delay1 mismatch at %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
