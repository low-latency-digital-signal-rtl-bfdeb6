// host_regs: register bank through which the host computer sets up the
// signal processing and reads the histogram status.
//
// The published design states only that offsets, scale factors, the
// filter window, the readout delay d, the lookup-table entries and the
// histogram settings are written through the interface with the host
// computer. The host bus itself belongs to the commercial board and is not
// described, so the bus below is this implementation's own: a synchronous
// write port and a combinational read port of 32-bit words.
//
// Register map (word address: bits):
//   0  c_I      [15:0] signed offset of the in-phase branch
//   1  c_Q      [15:0] signed offset of the quadrature branch
//   2  shift    [2:0] m_I = 2^k,  [6:4] m_Q = 2^k
//   3  ma_len   [4:0] moving-average window l (writing it re-zeroes the filter)
//   4  fb_delay [7:0] readout delay d in clock cycles
//   5  lut      [3:0] L(1)_xy, [7:4] L(2)_xy, bit index {x,y}
//   6  hist     [1:0] mode (0 2-d, 1 correlation, 2 time-resolved),
//               [4] recording enable, [12:8] time-resolved window length
//   7  status   read only: [15:0] dropped increments, [16] histogram busy
//   8  path     [0] mixer (0 quarter-rate multiplexers, 1 oscillator and
//               multipliers), [1] filter (0 moving average, 1 general FIR)
//   9  nco      [15:0] frequency word f_IF/f_s*2^16, [31:16] phase offset
//  10  coef     write only: [15:0] FIR coefficient, [21:16] tap index
//  11..15       unused, read as 0
// Reset values: offsets 0, m = 1, l = 4 and d = 14 (the values of the
// published example traces), L(1) = "fb when I~ >= 0" (the published
// lookup-table example), L(2) = "fb2 when Q~ >= 0", histogram off, 2-d mode,
// window 16, quarter-rate mixer and moving average selected, oscillator at
// f_s/4 with phase 0.
//
// Timing: a write takes effect at the clock edge that samples it; ma_clr_o
// is high for the cycle after a write to register 3 or 8 (the filters
// restart from zero after their length or the signal path changes);
// coef_we_o is high for the cycle after a write to register 10, together
// with the tap index and coefficient.
module host_regs
  import fbdsp_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en_i,
  input  logic [3:0]  wr_addr_i,
  input  logic [31:0] wr_data_i,
  input  logic [3:0]  rd_addr_i,
  output logic [31:0] rd_data_o,
  input  logic [15:0] drop_cnt_i,
  input  logic        hist_busy_i,
  output settings_t   cfg_o,
  output logic        ma_clr_o,
  output logic                     coef_we_o,
  output logic [TAP_W-1:0]         coef_addr_o,
  output logic signed [COEF_W-1:0] coef_o
);

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_o.c_i       <= '0;
      cfg_o.c_q       <= '0;
      cfg_o.shift_i   <= '0;
      cfg_o.shift_q   <= '0;
      cfg_o.ma_len    <= LEN_W'(4);
      cfg_o.fb_delay  <= D_W'(14);
      cfg_o.lut1      <= 4'b0011;
      cfg_o.lut2      <= 4'b0101;
      cfg_o.hist_mode <= HIST_2D;
      cfg_o.hist_en   <= 1'b0;
      cfg_o.hist_tlen <= TLEN_W'(16);
      cfg_o.mix_sel   <= 1'b0;
      cfg_o.fir_sel   <= 1'b0;
      cfg_o.nco_ftw   <= PH_W'(16'h4000);
      cfg_o.nco_phase <= '0;
      ma_clr_o        <= 1'b1;
      coef_we_o       <= 1'b0;
      coef_addr_o     <= '0;
      coef_o          <= '0;
    end else begin
      ma_clr_o  <= 1'b0;
      coef_we_o <= 1'b0;
      if (wr_en_i) begin
        unique case (wr_addr_i)
          4'd0: cfg_o.c_i <= wr_data_i[IQ_W-1:0];
          4'd1: cfg_o.c_q <= wr_data_i[IQ_W-1:0];
          4'd2: begin
            cfg_o.shift_i <= wr_data_i[SHIFT_W-1:0];
            cfg_o.shift_q <= wr_data_i[4 +: SHIFT_W];
          end
          4'd3: begin
            cfg_o.ma_len <= wr_data_i[LEN_W-1:0];
            ma_clr_o     <= 1'b1;
          end
          4'd4: cfg_o.fb_delay <= wr_data_i[D_W-1:0];
          4'd5: begin
            cfg_o.lut1 <= wr_data_i[3:0];
            cfg_o.lut2 <= wr_data_i[7:4];
          end
          4'd6: begin
            cfg_o.hist_mode <= hist_mode_e'(wr_data_i[1:0]);
            cfg_o.hist_en   <= wr_data_i[4];
            cfg_o.hist_tlen <= wr_data_i[8 +: TLEN_W];
          end
          4'd8: begin
            cfg_o.mix_sel <= wr_data_i[0];
            cfg_o.fir_sel <= wr_data_i[1];
            ma_clr_o      <= 1'b1;
          end
          4'd9: begin
            cfg_o.nco_ftw   <= wr_data_i[PH_W-1:0];
            cfg_o.nco_phase <= wr_data_i[16 +: PH_W];
          end
          4'd10: begin
            coef_we_o   <= 1'b1;
            coef_addr_o <= wr_data_i[16 +: TAP_W];
            coef_o      <= wr_data_i[COEF_W-1:0];
          end
          default: ;  // status is read only, 11..15 unused
        endcase
      end
    end
  end

  always_comb begin
    rd_data_o = '0;
    unique case (rd_addr_i)
      4'd0: rd_data_o = 32'(cfg_o.c_i);
      4'd1: rd_data_o = 32'(cfg_o.c_q);
      4'd2: rd_data_o = 32'({cfg_o.shift_q, 1'b0, cfg_o.shift_i});
      4'd3: rd_data_o = 32'(cfg_o.ma_len);
      4'd4: rd_data_o = 32'(cfg_o.fb_delay);
      4'd5: rd_data_o = 32'({cfg_o.lut2, cfg_o.lut1});
      4'd6: rd_data_o = 32'({cfg_o.hist_tlen, 3'b0, cfg_o.hist_en, 2'b0, cfg_o.hist_mode});
      4'd7: rd_data_o = 32'({hist_busy_i, drop_cnt_i});
      4'd8: rd_data_o = 32'({cfg_o.fir_sel, cfg_o.mix_sel});
      4'd9: rd_data_o = {cfg_o.nco_phase, cfg_o.nco_ftw};
      default: rd_data_o = '0;
    endcase
  end

endmodule
