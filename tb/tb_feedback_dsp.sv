// tb_feedback_dsp: end-to-end test of the feedback signal processor at its
// default parameters (the published sizes), driven like the qubit-reset
// experiment: each repetition has a first readout M1 of a random qubit
// state, a feedback pi pulse applied by a model actuator when fb fires, and
// a second readout M2 36 clock cycles (360 ns) after M1.
//
// Stimulus: a 25 MHz (fs/4) readout tone whose in-phase amplitude is
// offset + A for the excited and offset - A for the ground state, and whose
// quadrature amplitude carries a second random bit (read by fb2), with an
// exponential ring-up (time constant 2.5 samples) and small noise; it passes
// through a 5-cycle ADC model, while the trigger goes to the processor
// directly, as on the real board.
//
// Checks: every cycle, fb and fb2 against the expected decision, which must
// appear exactly 9 + d clock edges after the trigger edge (three processing
// cycles plus the six-cycle ADC alignment delay); the histogram memory
// contents after the 2-d, correlation and time-resolved phases, computed
// from the states the test chose; a histogram bin read through the host
// port; and, with triggers packed too closely in time-resolved mode, that
// increments are dropped and counted. Finally the flexible path (oscillator
// mixer and 40-tap FIR filter) is selected: at the quarter-rate frequency
// word with the reset coefficients (average of four) it must give the same
// decisions; with 8 loaded coefficients of 1/8 it acts as an 8-sample
// average; with a mixer phase offset of pi (and negated offsets) every
// decision must invert. Each mechanism must occur at least once.
module tb_feedback_dsp;
  import fbdsp_pkg::*;
  localparam int AW = 21, DW = 16, RO_LEN = 16, M2_OFS = 36, REP = 100;
  localparam int A = 1500, B = 1000, C_I = 500, C_Q = -300;

  logic clk = 0, rst = 1;
  int   ain;
  logic signed [ADC_W-1:0] adc;
  logic tr = 0, fb, fb2, fbt;
  logic [1:0] xy;
  logic cfg_we = 0;
  logic [3:0] cfg_wa = 0, cfg_ra = 0;
  logic [31:0] cfg_wd = 0, cfg_rd;
  logic h_en = 0, h_we = 0, h_ready, h_rvalid;
  logic [AW-1:0] h_addr = 0;
  logic [DW-1:0] h_wdata = 0, h_rdata;
  logic r_en, r_we;
  logic [AW-1:0] r_addr;
  logic [DW-1:0] r_wdata, r_rdata;

  feedback_dsp dut (
    .clk, .rst, .adc_i(adc), .tr_i(tr), .fb_o(fb), .fb2_o(fb2), .fbtime_o(fbt),
    .xy_o(xy),
    .cfg_wr_en_i(cfg_we), .cfg_wr_addr_i(cfg_wa), .cfg_wr_data_i(cfg_wd),
    .cfg_rd_addr_i(cfg_ra), .cfg_rd_data_o(cfg_rd),
    .hmem_en_i(h_en), .hmem_we_i(h_we), .hmem_addr_i(h_addr), .hmem_wdata_i(h_wdata),
    .hmem_ready_o(h_ready), .hmem_rdata_o(h_rdata), .hmem_rvalid_o(h_rvalid),
    .ram_en_o(r_en), .ram_we_o(r_we), .ram_addr_o(r_addr), .ram_wdata_o(r_wdata),
    .ram_rdata_i(r_rdata));

  adc_model #(.LAT(5)) adc_i0 (.clk, .ain, .aout(adc));
  zbt_ram_model #(.AW(AW), .DW(DW), .RD_LAT(2)) ram (
    .clk, .en(r_en), .we(r_we), .addr(r_addr), .wdata(r_wdata), .rdata(r_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0, d = 10;
  // readout generator state
  int ro_start = -1000;
  bit ro_s1, ro_s2;
  // expected decisions, by cycle
  bit exp_fb [int], exp_fb2 [int];
  // mechanism counters
  int n_fb = 0, n_nofb = 0, n_fb2 = 0, n_flip = 0, n_2d = 0, n_corr = 0, n_time = 0,
      n_drop = 0, n_len = 0, n_flex = 0, n_rot = 0;
  bit act_on = 1, flip_req = 0;
  bit inv = 0;           // expected decisions inverted (mixer phase pi)
  int snap [2**AW];

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int c4(int n); int t[4] = '{1, 0, -1, 0}; return t[n & 3]; endfunction
  function automatic int s4(int n); int t[4] = '{0, 1, 0, -1}; return t[n & 3]; endfunction

  // Analog input at time t, in ADC codes. Sample t is mixed with counter
  // phase t + 6 (5-cycle ADC, one input register, counter reset alignment).
  function automatic int gen(int t);
    real a, i0, q0;
    if (t < ro_start || t >= ro_start + RO_LEN) return $urandom_range(0, 80) - 40;
    a  = 1.0 - $exp(-real'(t - ro_start + 1) / 2.5);
    i0 = C_I + (ro_s1 ? A : -A);
    q0 = C_Q + (ro_s2 ? B : -B);
    return int'(2.0 * a * (i0 * c4(t + 6) - q0 * s4(t + 6))) + $urandom_range(0, 80) - 40;
  endfunction

  // One clock cycle: check the outputs, then drive the inputs for time cyc.
  task automatic step();
    bit e1, e2;
    @(posedge clk); #1;
    cyc++;
    e1 = exp_fb.exists(cyc) ? exp_fb[cyc] : 1'b0;
    e2 = exp_fb2.exists(cyc) ? exp_fb2[cyc] : 1'b0;
    if (exp_fb.exists(cyc) || fb || fb2) begin
      checks++;
      if (fb !== e1 || fb2 !== e2) begin
        failures++;
        $display("cycle %0d: fb/fb2 = %b%b, expected %b%b", cyc, fb, fb2, e1, e2);
      end
    end
    if (fb) begin n_fb++; if (act_on) flip_req = 1; end
    if (exp_fb.exists(cyc) && !e1) n_nofb++;
    if (fb2) n_fb2++;
    tr  = (cyc >= ro_start) && (cyc < ro_start + RO_LEN);
    ain = gen(cyc);
  endtask

  task automatic cfg_write(int a, int v);
    cfg_we = 1; cfg_wa = 4'(a); cfg_wd = v;
    step();
    cfg_we = 0;
  endtask

  task automatic cfg_read(int a, output int v);
    cfg_ra = 4'(a); #1 v = cfg_rd;
  endtask

  // Start a readout in the next cycle and record the expected decision.
  task automatic readout(bit s1, bit s2);
    ro_start = cyc + 1; ro_s1 = s1; ro_s2 = s2;
    exp_fb[ro_start + 9 + d]  = s1 ^ inv;
    exp_fb2[ro_start + 9 + d] = s2 ^ inv;
  endtask

  // One repetition; returns the M1 state and the M2 state.
  task automatic repetition(output bit s_m1, output bit s_m2, input int period);
    int t0;
    bit q;
    s_m1 = 1'($urandom);
    q = s_m1;
    flip_req = 0;
    readout(s_m1, 1'($urandom));
    t0 = ro_start;
    while (cyc < t0 + M2_OFS - 1) step();
    if (flip_req) begin q = ~q; n_flip++; end
    readout(q, 1'($urandom));
    s_m2 = q;
    while (cyc < t0 + period - 1) step();
  endtask

  task automatic take_snapshot();
    for (int a = 0; a < 2**AW; a++) snap[a] = int'(ram.peek(AW'(a)));
  endtask

  function automatic int delta(int a);
    return int'(ram.peek(AW'(a))) - snap[a];
  endfunction

  task automatic drain();
    int st;
    do begin step(); cfg_read(7, st); end while (st[16]);
  endtask

  initial begin
    bit s1, s2;
    int st, v, tot, exp_q [2][2], exp_c [4][2][2], got_c [4][2][2], mech [11];
    ain = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    cyc = 0;

    // settings: offsets, scaling x4, window 4, readout delay d
    cfg_write(0, C_I);
    cfg_write(1, C_Q);
    cfg_write(2, 32'h22);
    cfg_write(4, d);
    cfg_write(5, 8'h53);      // L(1): fb iff x = 0; L(2): fb2 iff y = 0
    repeat (20) step();

    // ---- phase 1: 2-d histogram, window l = 8 --------------------------
    cfg_write(3, 8); n_len++;
    take_snapshot();
    cfg_write(6, 32'h1000 | 32'h10 | HIST_2D);
    exp_q = '{default: 0};
    for (int k = 0; k < 40; k++) begin
      repetition(s1, s2, REP);
      exp_q[s1][0]++;          // M1: I~ sign from s1
      exp_q[s2][0]++;          // M2
    end
    drain();
    cfg_write(6, 0);
    tot = 0;
    for (int a = 0; a < 2**14; a++) tot += delta(a);
    begin
      int hi = 0, lo = 0;
      for (int a = 0; a < 2**14; a++) if ((a >> 7) >= 64) hi += delta(a); else lo += delta(a);
      checks++;
      if (hi != exp_q[1][0] || lo != exp_q[0][0]) begin
        failures++;
        $display("2-d: I>=0 %0d (exp %0d), I<0 %0d (exp %0d)", hi, exp_q[1][0], lo, exp_q[0][0]);
      end
    end
    n_2d = tot;

    // ---- phase 2: correlation mode, actuator on/off alternately ---------
    cfg_write(3, 4); n_len++;
    repeat (10) step();
    take_snapshot();
    cfg_write(6, 32'h10 | HIST_CORR);
    exp_c = '{default: 0};
    for (int k = 0; k < 400; k++) begin
      act_on = (k % 2 == 0);
      repetition(s1, s2, REP);
      exp_c[(k % 2 == 0) ? 1 : 3][s1][s2]++;
    end
    act_on = 1;
    drain();
    cfg_write(6, 0);
    got_c = '{default: 0};
    for (int a = 0; a < 2**AW; a++) begin
      v = delta(a);
      if (v != 0) begin
        n_corr += v;
        got_c[a & 3][((a >> 2) & 127) >= 64][((a >> 14) & 127) >= 64] += v;
      end
    end
    foreach (exp_c[sg, x1, x2]) if (sg % 2 == 1) begin
      checks++;
      if (got_c[sg][x1][x2] != exp_c[sg][x1][x2]) begin
        failures++;
        $display("corr seg %0d R(%0d,%0d): %0d, expected %0d", sg, x1, x2, got_c[sg][x1][x2], exp_c[sg][x1][x2]);
      end
    end
    checks++;
    if (exp_c[1][1][1] != 0 || exp_c[3][1][1] == 0) begin
      failures++; $display("feedback did not reset the excited state");
    end
    $display("feedback on : R_GG %0d R_GE %0d R_EG %0d R_EE %0d",
             got_c[1][0][0], got_c[1][0][1], got_c[1][1][0], got_c[1][1][1]);
    $display("feedback off: R_GG %0d R_GE %0d R_EG %0d R_EE %0d",
             got_c[3][0][0], got_c[3][0][1], got_c[3][1][0], got_c[3][1][1]);

    // a bin read back through the host port
    begin
      int a0 = -1, lat = 0;
      for (int a = 0; a < 2**AW && a0 < 0; a++) if (delta(a) != 0) a0 = a;
      h_en = 1; h_we = 0; h_addr = AW'(a0);
      while (!h_ready) step();
      step(); h_en = 0;
      while (!h_rvalid) begin step(); lat++; end
      checks++;
      if (h_rdata != ram.peek(AW'(a0)) || lat != 1) begin
        failures++; $display("host read %0d, expected %0d, latency %0d", h_rdata, ram.peek(AW'(a0)), lat);
      end
    end

    // ---- phase 3: time-resolved mode, 16-cycle windows -------------------
    take_snapshot();
    cfg_write(6, 32'h1000 | 32'h10 | HIST_TIME);
    for (int k = 0; k < 30; k++) repetition(s1, s2, REP);
    drain();
    cfg_write(6, 0);
    tot = 0;
    for (int a = 0; a < 2**AW; a++) tot += delta(a);
    n_time = tot;
    checks++;
    if (tot != 30 * 2 * 16) begin failures++; $display("time-resolved: %0d increments, expected %0d", tot, 30 * 32); end
    cfg_read(7, st);
    checks++;
    if (st[15:0] != 0) begin failures++; $display("unexpected drops"); end

    // ---- phase 4: overload, markers 17 cycles apart ----------------------
    take_snapshot();
    cfg_write(6, 32'h1000 | 32'h10 | HIST_TIME);
    for (int k = 0; k < 8; k++) begin
      readout(1'($urandom), 1'($urandom));
      repeat (17) step();
    end
    drain();
    cfg_write(6, 0);
    tot = 0;
    for (int a = 0; a < 2**AW; a++) tot += delta(a);
    cfg_read(7, st);
    n_drop = st[15:0];
    checks++;
    if (tot + n_drop != 8 * 16) begin failures++; $display("overload: %0d stored + %0d dropped", tot, n_drop); end

    // ---- phase 5: oscillator mixer and general FIR filter ----------------
    cfg_write(8, 3);
    repeat (20) step();
    for (int r = 0; r < 20; r++) begin repetition(s1, s2, REP); n_flex += 2; end
    for (int k = 0; k < 8; k++) cfg_write(10, (k << 16) | 4096);
    cfg_write(8, 3);          // restart the filters with the new weights
    repeat (20) step();
    for (int r = 0; r < 20; r++) begin repetition(s1, s2, REP); n_flex += 2; end
    cfg_write(0, -C_I);
    cfg_write(1, -C_Q);
    cfg_write(9, 32'h8000_4000);
    inv = 1;
    repeat (20) step();
    for (int r = 0; r < 20; r++) begin repetition(s1, s2, REP); n_rot += 2; end
    cfg_read(9, v);
    checks++;
    if (v != 32'h8000_4000) begin failures++; $display("nco register read %h", v); end

    repeat (40) step();
    $display("flexible-path readouts %0d, phase-rotated readouts %0d", n_flex, n_rot);
    $display("fb %0d, withheld %0d, fb2 %0d, pi pulses %0d, 2-d %0d, corr %0d, time %0d, dropped %0d, window changes %0d",
             n_fb, n_nofb, n_fb2, n_flip, n_2d, n_corr, n_time, n_drop, n_len);
    mech = '{n_fb, n_nofb, n_fb2, n_flip, n_2d, n_corr, n_time, n_drop, n_len, n_flex, n_rot};
    foreach (mech[i]) begin
      checks++;
      if (mech[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
