// tb_histogram_module: runs the histogram module in its three modes against
// the ZBT RAM model and compares every touched bin with counts kept here.
// Bin addresses are computed independently: bin(v) = clamp(floor((v + 256)
// / 512), -64, 63) + 64, then
//   2-d:           {bin I~, bin Q~}
//   correlation:   {bin I~ now, bin Q~ >> 2, bin I~ at the previous marker, seg}
//   time-resolved: {bin I~, bin Q~, t, seg} for t = 0 .. window-1
// with seg counting markers since recording was enabled. It also checks the
// total number of increments and that each mode ran.
module tb_histogram_module;
  import fbdsp_pkg::*;
  localparam int AW = 21, DW = 16;
  logic clk = 0, rst = 1;
  logic signed [IQ_W-1:0] i_v, q_v;
  logic fbt, en, busy;
  hist_mode_e mode;
  logic [TLEN_W-1:0] tlen;
  logic [15:0] drops;
  logic h_ready, h_rvalid;
  logic [DW-1:0] h_rdata;
  logic r_en, r_we;
  logic [AW-1:0] r_addr;
  logic [DW-1:0] r_wdata, r_rdata;
  int checks = 0, failures = 0;
  int ref_cnt [int];
  int n_inc = 0, n_2d = 0, n_corr = 0, n_time = 0;

  histogram_module dut (.clk, .rst, .i_i(i_v), .q_i(q_v), .fbtime_i(fbt),
    .mode_i(mode), .en_i(en), .tlen_i(tlen), .drop_cnt_o(drops), .busy_o(busy),
    .host_en_i(1'b0), .host_we_i(1'b0), .host_addr_i('0), .host_wdata_i('0),
    .host_ready_o(h_ready), .host_rdata_o(h_rdata), .host_rvalid_o(h_rvalid),
    .ram_en_o(r_en), .ram_we_o(r_we), .ram_addr_o(r_addr), .ram_wdata_o(r_wdata),
    .ram_rdata_i(r_rdata));

  zbt_ram_model #(.AW(AW), .DW(DW), .RD_LAT(2)) ram (
    .clk, .en(r_en), .we(r_we), .addr(r_addr), .wdata(r_wdata), .rdata(r_rdata));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bin(int v);
    int r = int'($floor((real'(v) + 256.0) / 512.0));
    if (r > 63) r = 63;
    if (r < -64) r = -64;
    return r + 64;
  endfunction

  function automatic void count(int a);
    if (ref_cnt.exists(a)) ref_cnt[a]++; else ref_cnt[a] = 1;
    n_inc++;
  endfunction

  task automatic new_values();
    if ($urandom_range(0, 4) == 0) begin
      i_v = ($urandom_range(0, 1) == 1) ? 16'sh7FFF : -16'sh8000;
      q_v = IQ_W'($urandom_range(32767, 32500));
    end else begin
      i_v = IQ_W'($urandom); q_v = IQ_W'($urandom);
    end
  endtask

  task automatic restart(hist_mode_e m);
    en = 0; mode = m; fbt = 0;
    @(posedge clk); #1;
    en = 1;
  endtask

  initial begin
    int prev_i, seg, gap;
    i_v = 0; q_v = 0; fbt = 0; en = 0; mode = HIST_2D; tlen = 16;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // 2-d mode
    restart(HIST_2D);
    for (int k = 0; k < 300; k++) begin
      new_values(); fbt = 1;
      count((bin(int'(i_v)) << 7) | bin(int'(q_v)));
      n_2d++;
      @(posedge clk); #1; fbt = 0;
      repeat ($urandom_range(3, 6)) @(posedge clk);
      #1;
    end
    wait (!busy);

    // correlation mode
    restart(HIST_CORR);
    prev_i = 64;   // buffer starts at zero = bin of 0
    prev_i = 0;
    seg = 0;
    for (int k = 0; k < 300; k++) begin
      new_values(); fbt = 1;
      count((bin(int'(i_v)) << 14) | ((bin(int'(q_v)) >> 2) << 9) | (prev_i << 2) | (seg & 3));
      prev_i = bin(int'(i_v)); seg++;
      n_corr++;
      @(posedge clk); #1; fbt = 0;
      repeat ($urandom_range(3, 6)) @(posedge clk);
      #1;
    end
    wait (!busy);

    // time-resolved mode, windows of 16 and of random length
    restart(HIST_TIME);
    seg = 0;
    for (int k = 0; k < 40; k++) begin
      tlen = (k < 20) ? TLEN_W'(16) : TLEN_W'($urandom_range(1, 16));
      for (int t = 0; t < int'(tlen); t++) begin
        new_values(); fbt = (t == 0);
        count((bin(int'(i_v)) << 14) | (bin(int'(q_v)) << 7) | (t << 3) | (seg & 7));
        @(posedge clk); #1;
      end
      fbt = 0; seg++; n_time++;
      new_values();
      repeat (3 * int'(tlen) + 4) @(posedge clk);
      #1;
    end
    wait (!busy);
    repeat (4) @(posedge clk);

    foreach (ref_cnt[a]) begin
      checks++;
      if (int'(ram.peek(AW'(a))) != ref_cnt[a]) begin
        failures++;
        $display("bin %h: %0d, expected %0d", a, ram.peek(AW'(a)), ref_cnt[a]);
      end
    end
    checks++;
    if (drops != 0) begin failures++; $display("dropped %0d", drops); end
    checks++;
    if (n_2d == 0 || n_corr == 0 || n_time == 0) begin failures++; $display("mode not run"); end
    $display("increments %0d, bins %0d, 2-d %0d, corr %0d, time windows %0d",
             n_inc, ref_cnt.num(), n_2d, n_corr, n_time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
