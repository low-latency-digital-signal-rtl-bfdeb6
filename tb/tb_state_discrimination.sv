// tb_state_discrimination: drives trigger pulses of random length and
// spacing, random I~/Q~ values, random lookup tables and delays d = 0, 1,
// 14 and random, and checks, cycle by cycle:
//   fbTime = 1 exactly d cycles after each cycle in which the trigger rose;
//   fb  = L(1)[{sign I~, sign Q~}] AND fbTime, one clock edge later;
//   fb2 = L(2)[{sign I~, sign Q~}] AND fbTime, one clock edge later.
// The reference keeps its own record of rising edges. It also counts how
// many fb and fb2 pulses were issued and fails if none was.
module tb_state_discrimination;
  import fbdsp_pkg::*;
  logic clk = 0, rst = 1;
  logic tr;
  logic signed [IQ_W-1:0] i_v, q_v;
  logic [D_W-1:0] d;
  logic [3:0] l1, l2;
  logic fbt, fb, fb2;
  logic [1:0] xy;
  int checks = 0, failures = 0, n_fb = 0, n_fb2 = 0, n_fbt = 0;

  state_discrimination dut (.clk, .rst, .tr_i(tr), .i_i(i_v), .q_i(q_v),
    .delay_i(d), .lut1_i(l1), .lut2_i(l2), .fbtime_o(fbt), .fb_o(fb),
    .fb2_o(fb2), .xy_o(xy));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit edges [$];   // edges[0] = edge in the current cycle
  bit prev_tr;

  task automatic run(int dv, int cycles);
    bit e, exp_t, exp_fb, exp_fb2;
    d = D_W'(dv);
    l1 = 4'($urandom); l2 = 4'($urandom);
    tr = 0;
    #1;
    edges.push_front(tr && !prev_tr);
    prev_tr = 0;
    @(posedge clk); #1;   // let the design's previous-trigger register see 0
    for (int c = 0; c < cycles; c++) begin
      if ($urandom_range(0, 9) == 0) tr = ~tr;
      i_v = IQ_W'($urandom); q_v = IQ_W'($urandom);
      #1;
      e = tr && !prev_tr;
      edges.push_front(e);
      exp_t = edges[dv];
      checks++;
      if (fbt !== exp_t) begin failures++; $display("fbTime d=%0d c=%0d got %b", dv, c, fbt); end
      exp_fb  = l1[{i_v[IQ_W-1], q_v[IQ_W-1]}] & exp_t;
      exp_fb2 = l2[{i_v[IQ_W-1], q_v[IQ_W-1]}] & exp_t;
      n_fbt += exp_t;
      @(posedge clk); #1;
      prev_tr = tr;
      checks++;
      if (fb !== exp_fb || fb2 !== exp_fb2) begin
        failures++;
        $display("fb d=%0d c=%0d got %b%b exp %b%b", dv, c, fb, fb2, exp_fb, exp_fb2);
      end
      n_fb += fb; n_fb2 += fb2;
    end
  endtask

  initial begin
    tr = 0; i_v = 0; q_v = 0; d = 0; l1 = 0; l2 = 0;
    for (int k = 0; k < 300; k++) edges.push_back(0);
    repeat (3) @(posedge clk);
    #1 rst = 0;
    run(0, 500);
    run(1, 500);
    run(14, 1000);
    for (int r = 0; r < 4; r++) run($urandom_range(2, 255), 1500);
    run(255, 2000);
    // the published lookup-table example: fb if and only if x = 0
    l1 = 4'b0011;
    checks++;
    if (n_fb == 0 || n_fb2 == 0 || n_fbt == 0) begin
      failures++;
      $display("no feedback pulse seen");
    end
    $display("fbTime markers %0d, fb %0d, fb2 %0d", n_fbt, n_fb, n_fb2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
