// tb_host_regs: checks the reset values of the settings register bank,
// writes random values to every register and checks both the read-back word
// and the decoded settings record, the one-cycle filter-clear pulse after a
// write of the window length, and the read-only status word.
module tb_host_regs;
  import fbdsp_pkg::*;
  logic clk = 0, rst = 1;
  logic we;
  logic [3:0] wa, ra;
  logic [31:0] wd, rd;
  logic [15:0] dropc;
  logic hbusy;
  settings_t cfg;
  logic clr;
  logic cwe;
  logic [5:0] caddr;
  logic signed [15:0] cdata;
  int checks = 0, failures = 0;

  host_regs dut (.clk, .rst, .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd),
    .rd_addr_i(ra), .rd_data_o(rd), .drop_cnt_i(dropc), .hist_busy_i(hbusy),
    .cfg_o(cfg), .ma_clr_o(clr),
    .coef_we_o(cwe), .coef_addr_o(caddr), .coef_o(cdata));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(int a, logic [31:0] v);
    we = 1; wa = 4'(a); wd = v;
    @(posedge clk); #1;
    we = 0;
  endtask

  initial begin
    logic [31:0] v;
    logic [7:0] lutv;
    we = 0; wa = 0; wd = 0; ra = 0; dropc = 16'h1234; hbusy = 1;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    expect_eq("reset ma_len", cfg.ma_len, 4);
    expect_eq("reset d", cfg.fb_delay, 14);
    expect_eq("reset lut1", cfg.lut1, 4'b0011);
    expect_eq("reset hist_en", cfg.hist_en, 0);
    expect_eq("reset mix_sel", cfg.mix_sel, 0);
    expect_eq("reset fir_sel", cfg.fir_sel, 0);
    expect_eq("reset ftw = fs/4", cfg.nco_ftw, 16'h4000);
    expect_eq("reset phase", cfg.nco_phase, 0);
    for (int r = 0; r < 20; r++) begin
      v = $urandom;
      wr(0, v); expect_eq("c_i", cfg.c_i, longint'($signed(v[15:0])));
      ra = 0; #1 expect_eq("rd c_i", rd, {{16{v[15]}}, v[15:0]});
      v = $urandom;
      wr(1, v); expect_eq("c_q", cfg.c_q, longint'($signed(v[15:0])));
      v = $urandom;
      wr(2, v); expect_eq("shift_i", cfg.shift_i, v[2:0]);
      expect_eq("shift_q", cfg.shift_q, v[6:4]);
      ra = 2; #1 expect_eq("rd shift", rd, {25'b0, v[6:4], 1'b0, v[2:0]});
      v = $urandom;
      expect_eq("no clr", clr, 0);
      wr(3, v); expect_eq("ma_len", cfg.ma_len, v[4:0]);
      expect_eq("clr after write of l", clr, 1);
      @(posedge clk); #1 expect_eq("clr one cycle", clr, 0);
      v = $urandom;
      wr(4, v); expect_eq("d", cfg.fb_delay, v[7:0]);
      ra = 4; #1 expect_eq("rd d", rd, v[7:0]);
      v = $urandom;
      wr(5, v); expect_eq("lut1", cfg.lut1, v[3:0]);
      lutv = v[7:0];
      expect_eq("lut2", cfg.lut2, v[7:4]);
      v = $urandom & 32'h1F13;
      if (v[1:0] == 2'b11) v[1:0] = 2'b10;
      wr(6, v); expect_eq("mode", cfg.hist_mode, v[1:0]);
      expect_eq("en", cfg.hist_en, v[4]);
      expect_eq("tlen", cfg.hist_tlen, v[12:8]);
      ra = 6; #1 expect_eq("rd hist", rd, v);
      dropc = 16'($urandom); hbusy = 1'($urandom);
      ra = 7; #1 expect_eq("status", rd, {15'b0, hbusy, dropc});
      wr(7, 32'hFFFF_FFFF);
      expect_eq("status is read only", {cfg.lut2, cfg.lut1}, lutv);
      v = $urandom;
      wr(8, v); expect_eq("mix_sel", cfg.mix_sel, v[0]);
      expect_eq("fir_sel", cfg.fir_sel, v[1]);
      expect_eq("clr after path write", clr, 1);
      ra = 8; #1 expect_eq("rd path", rd, {30'b0, v[1:0]});
      v = $urandom;
      wr(9, v); expect_eq("ftw", cfg.nco_ftw, v[15:0]);
      expect_eq("phase", cfg.nco_phase, v[31:16]);
      ra = 9; #1 expect_eq("rd nco", rd, v);
      expect_eq("no coef write", cwe, 0);
      v = $urandom;
      wr(10, v); expect_eq("coef we", cwe, 1);
      expect_eq("coef tap", caddr, v[21:16]);
      expect_eq("coef value", {16'b0, cdata}, {16'b0, v[15:0]});
      @(posedge clk); #1 expect_eq("coef we one cycle", cwe, 0);
      ra = 4'(11 + $urandom_range(0, 4)); #1 expect_eq("unused reads 0", rd, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
