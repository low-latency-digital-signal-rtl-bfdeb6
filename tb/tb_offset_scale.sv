// tb_offset_scale: applies random and corner inputs, offsets and shift
// settings to the combinational offset/scale block and compares with
// m*(x - c), m = 2^shift, saturated to the signed 16-bit range, computed
// here in 64-bit integers.
module tb_offset_scale;
  import fbdsp_pkg::*;
  logic signed [IQ_W-1:0] x, c, y;
  logic [SHIFT_W-1:0] sh;
  int checks = 0, failures = 0;

  offset_scale dut (.x_i(x), .c_i(c), .shift_i(sh), .y_o(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(longint xv, longint cv, int s);
    longint e;
    x = IQ_W'(xv); c = IQ_W'(cv); sh = SHIFT_W'(s);
    #1;
    e = (xv - cv) * (longint'(1) << s);
    if (e > 32767) e = 32767;
    if (e < -32768) e = -32768;
    checks++;
    if (longint'(y) != e) begin
      failures++;
      $display("x=%0d c=%0d s=%0d y=%0d exp=%0d", xv, cv, s, y, e);
    end
  endtask

  initial begin
    check_one(0, 0, 0);
    check_one(32767, -32768, 0);
    check_one(-32768, 32767, 0);
    check_one(100, 99, 7);
    check_one(100, 101, 7);
    check_one(300, 0, 7);
    check_one(-300, 0, 7);
    check_one(-256, 0, 7);
    for (int i = 0; i < 3000; i++)
      check_one(longint'($urandom_range(0, 65535)) - 32768,
                longint'($urandom_range(0, 2047)) - 1024,
                $urandom_range(0, 7));
    for (int i = 0; i < 1000; i++)
      check_one(longint'($urandom_range(0, 511)) - 256,
                longint'($urandom_range(0, 511)) - 256,
                $urandom_range(0, 7));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
