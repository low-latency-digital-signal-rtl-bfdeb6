// tb_workload_teleport: feedforward of a two-qubit measurement, as in a
// teleportation protocol, on the complete processor at its default
// parameters. One readout carries the outcome of qubit A in the in-phase
// and the outcome of qubit B in the quadrature component; the processor
// compares I and Q with two thresholds (the offsets c_I, c_Q) and issues two
// independent triggers, fb and fb2, to two pulse generators that apply the
// corrections on the receiving qubit.
//
// Each round draws new thresholds, scale factors, a readout delay d of 10 to
// 14 cycles and a pair of lookup tables: L(1) steps through all 16 values and
// L(2) through all 16 in another order, so every Boolean function of the
// two sign bits is used for both triggers. Eight readouts per round carry
// random outcome pairs at levels 600 to 1500 ADC codes away from the
// thresholds. Every cycle, fb and fb2 are compared with L(1)[{x,y}] and
// L(2)[{x,y}] of the chosen outcomes, and they must fire exactly 9 + d
// clock edges after the trigger edge and at no other time. A model receiver
// applies X on fb and Z on fb2; with the usual correction tables (fb on
// qubit A = 1, fb2 on qubit B = 1) its Pauli frame must end at identity.
// Each outcome pair, each trigger and each correction must occur.
module tb_workload_teleport;
  import fbdsp_pkg::*;
  localparam int RO_LEN = 24, SPACING = 44, ROUNDS = 48;

  logic clk = 0, rst = 1;
  int   ain;
  logic signed [ADC_W-1:0] adc;
  logic tr = 0, fb, fb2, fbt;
  logic [1:0] xy;
  logic cfg_we = 0;
  logic [3:0] cfg_wa = 0;
  logic [31:0] cfg_wd = 0, cfg_rd;
  logic h_ready, h_rvalid;
  logic [20:0] r_addr;
  logic [15:0] r_wdata, h_rdata;
  logic r_en, r_we;

  // histogram recording stays off: the memory data input is tied to zero
  feedback_dsp dut (
    .clk, .rst, .adc_i(adc), .tr_i(tr), .fb_o(fb), .fb2_o(fb2), .fbtime_o(fbt),
    .xy_o(xy),
    .cfg_wr_en_i(cfg_we), .cfg_wr_addr_i(cfg_wa), .cfg_wr_data_i(cfg_wd),
    .cfg_rd_addr_i(4'd7), .cfg_rd_data_o(cfg_rd),
    .hmem_en_i(1'b0), .hmem_we_i(1'b0), .hmem_addr_i('0), .hmem_wdata_i('0),
    .hmem_ready_o(h_ready), .hmem_rdata_o(h_rdata), .hmem_rvalid_o(h_rvalid),
    .ram_en_o(r_en), .ram_we_o(r_we), .ram_addr_o(r_addr), .ram_wdata_o(r_wdata),
    .ram_rdata_i(16'd0));

  adc_model #(.LAT(5)) adc_i0 (.clk, .ain, .aout(adc));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0, d = 10, c_i = 0, c_q = 0;
  int ro_start = -1000, lvl_i = 0, lvl_q = 0;
  bit exp_fb [int], exp_fb2 [int];
  int n_pair [4], n_fb = 0, n_fb2 = 0, n_x = 0, n_z = 0, n_frame_ok = 0, n_frame_rounds = 0;
  bit frame_x, frame_z;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int c4(int n); int t[4] = '{1, 0, -1, 0}; return t[n & 3]; endfunction
  function automatic int s4(int n); int t[4] = '{0, 1, 0, -1}; return t[n & 3]; endfunction

  // Analog input at time t; sample t meets mixer phase t + 6.
  function automatic int gen(int t);
    real a;
    if (t < ro_start || t >= ro_start + RO_LEN) return $urandom_range(0, 60) - 30;
    a = 1.0 - $exp(-real'(t - ro_start + 1) / 2.5);
    return int'(2.0 * a * (real'(lvl_i) * c4(t + 6) - real'(lvl_q) * s4(t + 6)))
           + $urandom_range(0, 60) - 30;
  endfunction

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
        if (failures < 10)
          $display("cycle %0d: fb/fb2 = %b%b, expected %b%b", cyc, fb, fb2, e1, e2);
      end
    end
    if (fb)  begin n_fb++;  frame_x ^= 1'b1; n_x++; end
    if (fb2) begin n_fb2++; frame_z ^= 1'b1; n_z++; end
    tr  = (cyc >= ro_start) && (cyc < ro_start + RO_LEN);
    ain = gen(cyc);
  endtask

  task automatic cfg_write(int a, int v);
    cfg_we = 1; cfg_wa = 4'(a); cfg_wd = v;
    step();
    cfg_we = 0;
  endtask

  // A readout of outcome a (qubit A, in I) and b (qubit B, in Q).
  // Outcome 1 lies below the threshold, so it sets the sign bit.
  task automatic readout(bit a, bit b, logic [3:0] l1, logic [3:0] l2);
    ro_start = cyc + 1;
    lvl_i = a ? c_i - int'($urandom_range(600, 1500)) : c_i + int'($urandom_range(600, 1500));
    lvl_q = b ? c_q - int'($urandom_range(600, 1500)) : c_q + int'($urandom_range(600, 1500));
    exp_fb[ro_start + 9 + d]  = l1[{a, b}];
    exp_fb2[ro_start + 9 + d] = l2[{a, b}];
    n_pair[{a, b}]++;
    repeat (SPACING) step();
  endtask

  initial begin
    logic [3:0] l1, l2;
    bit a, b;
    int k;
    ain = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    for (int r = 0; r < ROUNDS; r++) begin
      c_i = int'($urandom_range(0, 3000)) - 1500;
      c_q = int'($urandom_range(0, 3000)) - 1500;
      d   = int'($urandom_range(10, 14));
      k   = int'($urandom_range(0, 2));
      l1  = 4'(r);
      l2  = 4'(r * 7 + 3);
      cfg_write(0, c_i);
      cfg_write(1, c_q);
      cfg_write(2, (k << 4) | k);
      cfg_write(4, d);
      cfg_write(5, {24'b0, l2, l1});
      repeat (20) step();
      for (int n = 0; n < 8; n++) readout(1'($urandom), 1'($urandom), l1, l2);
    end
    // Teleportation corrections: X when qubit A reads 1 (x = 1), Z when
    // qubit B reads 1 (y = 1). The receiver's Pauli frame starts at the
    // measured outcome pair and must be undone by the triggers.
    d = 12;
    cfg_write(4, d);
    cfg_write(5, {24'b0, 4'b1010, 4'b1100});
    repeat (20) step();
    for (int n = 0; n < 40; n++) begin
      a = 1'($urandom); b = 1'($urandom);
      frame_x = a; frame_z = b;
      readout(a, b, 4'b1100, 4'b1010);
      n_frame_rounds++;
      checks++;
      if (frame_x || frame_z) begin
        failures++; $display("receiver frame not corrected: X %0b Z %0b", frame_x, frame_z);
      end else n_frame_ok++;
    end
    repeat (40) step();
    $display("outcome pairs 00/01/10/11: %0d %0d %0d %0d; fb %0d, fb2 %0d; corrected frames %0d of %0d",
             n_pair[0], n_pair[1], n_pair[2], n_pair[3], n_fb, n_fb2, n_frame_ok, n_frame_rounds);
    foreach (n_pair[i]) begin
      checks++;
      if (n_pair[i] == 0) begin failures++; $display("outcome pair %0d never read", i); end
    end
    checks += 4;
    if (n_fb == 0)  begin failures++; $display("fb never fired"); end
    if (n_fb2 == 0) begin failures++; $display("fb2 never fired"); end
    if (n_x == 0)   begin failures++; $display("no X correction"); end
    if (n_z == 0)   begin failures++; $display("no Z correction"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
