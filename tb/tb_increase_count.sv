// tb_increase_count: exercises the histogram read-modify-write engine
// against the ZBT RAM model.
//  - back-to-back requests: successive memory writes must be RD_LAT + 1 = 3
//    cycles apart;
//  - random requests to 16 bins with random gaps: every bin must end with
//    exactly the number of requests made for it;
//  - a burst longer than the FIFO: some requests must be dropped (overflow),
//    and stored counts plus drops must equal requests;
//  - host port: write a bin, read it back with rvalid RD_LAT cycles after
//    the command, and check that a bin at 0xFFFF saturates;
//  - light random traffic over all 256 bins, then every bin read back
//    through the host port and compared with a saturating reference count.
module tb_increase_count;
  localparam int AW = 8, DW = 16, RD_LAT = 2, FIFO_D = 8;
  logic clk = 0, rst = 1;
  logic inc_v, drop, busy;
  logic [AW-1:0] inc_a;
  logic h_en, h_we, h_ready, h_rvalid;
  logic [AW-1:0] h_addr;
  logic [DW-1:0] h_wdata, h_rdata;
  logic r_en, r_we;
  logic [AW-1:0] r_addr;
  logic [DW-1:0] r_wdata, r_rdata;
  int checks = 0, failures = 0;
  int ref_cnt [2**AW];
  int n_drop = 0, n_req = 0, last_wr = -1, cyc = 0, n_gap_checks = 0;
  bit check_gap = 0;

  increase_count #(.AW(AW), .DW(DW), .RD_LAT(RD_LAT), .FIFO_D(FIFO_D)) dut (
    .clk, .rst, .inc_valid_i(inc_v), .inc_addr_i(inc_a), .drop_o(drop), .busy_o(busy),
    .host_en_i(h_en), .host_we_i(h_we), .host_addr_i(h_addr), .host_wdata_i(h_wdata),
    .host_ready_o(h_ready), .host_rdata_o(h_rdata), .host_rvalid_o(h_rvalid),
    .ram_en_o(r_en), .ram_we_o(r_we), .ram_addr_o(r_addr), .ram_wdata_o(r_wdata),
    .ram_rdata_i(r_rdata));

  zbt_ram_model #(.AW(AW), .DW(DW), .RD_LAT(RD_LAT)) ram (
    .clk, .en(r_en), .we(r_we), .addr(r_addr), .wdata(r_wdata), .rdata(r_rdata));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && inc_v) n_req <= n_req + 1;
    if (!rst && drop) n_drop <= n_drop + 1;
    if (r_en && r_we && !h_en) begin
      if (check_gap && last_wr >= 0) begin
        checks++; n_gap_checks++;
        if (cyc - last_wr != RD_LAT + 1) begin
          failures++;
          $display("write spacing %0d, expected %0d", cyc - last_wr, RD_LAT + 1);
        end
      end
      last_wr <= cyc;
    end
  end

  task automatic drain();
    inc_v = 0;
    do @(posedge clk); while (busy);
    #1;
  endtask

  task automatic host_write(int a, int v);
    h_en = 1; h_we = 1; h_addr = AW'(a); h_wdata = DW'(v);
    while (!h_ready) @(posedge clk);
    @(posedge clk); #1;
    h_en = 0; h_we = 0;
  endtask

  task automatic host_read(int a, output int v, output int lat);
    h_en = 1; h_we = 0; h_addr = AW'(a);
    #1;
    while (!h_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    h_en = 0;
    lat = 1;
    while (!h_rvalid) begin @(posedge clk); #1; lat++; end
    v = int'(h_rdata);
  endtask

  initial begin
    int v, lat, stored;
    inc_v = 0; inc_a = 0; h_en = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    for (int i = 0; i < 2**AW; i++) ref_cnt[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // 1. back-to-back requests that fit the FIFO
    check_gap = 1;
    for (int i = 0; i < FIFO_D; i++) begin
      inc_v = 1; inc_a = AW'(i); ref_cnt[i]++;
      @(posedge clk); #1;
    end
    drain();
    check_gap = 0;

    // 2. random traffic to 16 bins
    for (int i = 0; i < 600; i++) begin
      if ($urandom_range(0, 3) == 0) begin
        inc_v = 1; inc_a = AW'($urandom_range(16, 31)); ref_cnt[inc_a]++;
      end else inc_v = 0;
      @(posedge clk); #1;
    end
    drain();
    for (int i = 0; i < 32; i++) begin
      checks++;
      if (int'(ram.peek(AW'(i))) != ref_cnt[i]) begin
        failures++;
        $display("bin %0d: %0d, expected %0d", i, ram.peek(AW'(i)), ref_cnt[i]);
      end
    end
    checks++;
    if (n_drop != 0) begin failures++; $display("unexpected drops"); end

    // 3. overflow: 40 back-to-back requests into bin 100
    for (int i = 0; i < 40; i++) begin
      inc_v = 1; inc_a = AW'(100);
      @(posedge clk); #1;
    end
    drain();
    checks++;
    if (n_drop == 0) begin failures++; $display("overflow never happened"); end
    stored = int'(ram.peek(AW'(100)));
    checks++;
    if (stored + n_drop != 40) begin
      failures++;
      $display("overflow: stored %0d + dropped %0d != 40", stored, n_drop);
    end
    $display("overflow: %0d of 40 increments dropped", n_drop);

    // 4. host access and saturation
    host_write(200, 16'hFFFE);
    host_read(200, v, lat);
    checks++;
    if (v != 16'hFFFE || lat != RD_LAT) begin
      failures++; $display("host read %h latency %0d", v, lat);
    end
    repeat (3) begin inc_v = 1; inc_a = AW'(200); @(posedge clk); #1; inc_v = 0; end
    drain();
    checks++;
    if (ram.peek(AW'(200)) != 16'hFFFF) begin failures++; $display("no saturation"); end

    // 5. random traffic over the whole memory, then every bin read back
    //    through the host port and compared with the saturating model
    ref_cnt[100] = stored;
    ref_cnt[200] = 16'hFFFF;
    v = n_drop;
    for (int i = 0; i < 4000; i++) begin
      if ($urandom_range(0, 5) == 0) begin
        inc_v = 1; inc_a = AW'($urandom);
        if (ref_cnt[inc_a] < 16'hFFFF) ref_cnt[inc_a]++;
      end else inc_v = 0;
      @(posedge clk); #1;
    end
    drain();
    checks++;
    if (n_drop != v) begin failures++; $display("drops under light load"); end
    for (int a = 0; a < 2**AW; a++) begin
      int rv;
      host_read(a, rv, lat);
      checks += 2;
      if (rv != ref_cnt[a]) begin
        failures++; $display("host read bin %0d: %0d, expected %0d", a, rv, ref_cnt[a]);
      end
      if (lat != RD_LAT) begin failures++; $display("host read latency %0d", lat); end
    end

    checks++;
    if (n_gap_checks < FIFO_D - 2) begin failures++; $display("spacing not checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
