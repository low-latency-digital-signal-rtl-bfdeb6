// nco_mixer: general digital I/Q mixer for an arbitrary intermediate
// frequency and a host-adjustable phase.
//
// A numerically controlled oscillator (phase accumulator) advances by the
// frequency word every sample; the host phase offset is added and the top
// six bits address a 64-entry cosine table. The table gives cos(theta) and,
// read a quarter turn further on, cos(theta + pi/2) = -sin(theta). Two
// multipliers form Re[S_m] = s*cos and Im[S_m] = -s*sin, as in the published
// multiplier-based mixer, which the published full design carries as the
// "phase-adjustable mixer" beside the quarter-rate multiplexer mixer.
// Own choices (the publication gives no insides): 16-bit phase accumulator,
// 64-entry table, LO values round(2048*cos) so that +-1 is exact, products
// scaled back by 2^-11 (arithmetic shift); one registered stage so that the
// mixer can replace the quarter-rate mixer without re-timing the trigger.
// With frequency word 0x4000 (fs/4) and phase 0 the outputs equal those of
// the quarter-rate mixer sample by sample.
//
// Interface: s_adc_i is the registered ADC sample; ftw_i is
// f_IF/f_s * 2^16; phase_i is the phase offset in units of 2*pi/2^16.
// re_o/im_o belong to the sample present one clock edge earlier; the
// accumulator starts at 0 after reset, in step with the quarter-rate
// mixer's counter.
module nco_mixer
  import fbdsp_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] s_adc_i,
  input  logic [PH_W-1:0]         ftw_i,
  input  logic [PH_W-1:0]         phase_i,
  output logic signed [MIX_W-1:0] re_o,
  output logic signed [MIX_W-1:0] im_o
);

  localparam int unsigned LO_W   = 13;   // -2048 .. 2048
  localparam int unsigned PROD_W = ADC_W + LO_W;

  logic [PH_W-1:0]          acc_q;
  logic [5:0]               idx_c, idx_s;
  logic signed [LO_W-1:0]   lo_c, lo_s;
  logic signed [PROD_W-1:0] p_re, p_im;

  function automatic logic signed [LO_W-1:0] cos_lut(input logic [5:0] k);
    unique case (k)
      6'd0: cos_lut = 13'sd2048;
      6'd1: cos_lut = 13'sd2038;
      6'd2: cos_lut = 13'sd2009;
      6'd3: cos_lut = 13'sd1960;
      6'd4: cos_lut = 13'sd1892;
      6'd5: cos_lut = 13'sd1806;
      6'd6: cos_lut = 13'sd1703;
      6'd7: cos_lut = 13'sd1583;
      6'd8: cos_lut = 13'sd1448;
      6'd9: cos_lut = 13'sd1299;
      6'd10: cos_lut = 13'sd1138;
      6'd11: cos_lut = 13'sd965;
      6'd12: cos_lut = 13'sd784;
      6'd13: cos_lut = 13'sd595;
      6'd14: cos_lut = 13'sd400;
      6'd15: cos_lut = 13'sd201;
      6'd16: cos_lut = 13'sd0;
      6'd17: cos_lut = -13'sd201;
      6'd18: cos_lut = -13'sd400;
      6'd19: cos_lut = -13'sd595;
      6'd20: cos_lut = -13'sd784;
      6'd21: cos_lut = -13'sd965;
      6'd22: cos_lut = -13'sd1138;
      6'd23: cos_lut = -13'sd1299;
      6'd24: cos_lut = -13'sd1448;
      6'd25: cos_lut = -13'sd1583;
      6'd26: cos_lut = -13'sd1703;
      6'd27: cos_lut = -13'sd1806;
      6'd28: cos_lut = -13'sd1892;
      6'd29: cos_lut = -13'sd1960;
      6'd30: cos_lut = -13'sd2009;
      6'd31: cos_lut = -13'sd2038;
      6'd32: cos_lut = -13'sd2048;
      6'd33: cos_lut = -13'sd2038;
      6'd34: cos_lut = -13'sd2009;
      6'd35: cos_lut = -13'sd1960;
      6'd36: cos_lut = -13'sd1892;
      6'd37: cos_lut = -13'sd1806;
      6'd38: cos_lut = -13'sd1703;
      6'd39: cos_lut = -13'sd1583;
      6'd40: cos_lut = -13'sd1448;
      6'd41: cos_lut = -13'sd1299;
      6'd42: cos_lut = -13'sd1138;
      6'd43: cos_lut = -13'sd965;
      6'd44: cos_lut = -13'sd784;
      6'd45: cos_lut = -13'sd595;
      6'd46: cos_lut = -13'sd400;
      6'd47: cos_lut = -13'sd201;
      6'd48: cos_lut = 13'sd0;
      6'd49: cos_lut = 13'sd201;
      6'd50: cos_lut = 13'sd400;
      6'd51: cos_lut = 13'sd595;
      6'd52: cos_lut = 13'sd784;
      6'd53: cos_lut = 13'sd965;
      6'd54: cos_lut = 13'sd1138;
      6'd55: cos_lut = 13'sd1299;
      6'd56: cos_lut = 13'sd1448;
      6'd57: cos_lut = 13'sd1583;
      6'd58: cos_lut = 13'sd1703;
      6'd59: cos_lut = 13'sd1806;
      6'd60: cos_lut = 13'sd1892;
      6'd61: cos_lut = 13'sd1960;
      6'd62: cos_lut = 13'sd2009;
      6'd63: cos_lut = 13'sd2038;
    endcase
  endfunction

  assign idx_c = 6'((acc_q + phase_i) >> (PH_W - 6));
  assign idx_s = idx_c + 6'd16;        // quarter turn later: -sin
  assign lo_c  = cos_lut(idx_c);
  assign lo_s  = cos_lut(idx_s);
  assign p_re  = PROD_W'(s_adc_i) * PROD_W'(lo_c);
  assign p_im  = PROD_W'(s_adc_i) * PROD_W'(lo_s);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_q <= '0;
      re_o  <= '0;
      im_o  <= '0;
    end else begin
      acc_q <= acc_q + ftw_i;
      re_o  <= MIX_W'(p_re >>> (LO_W - 2));
      im_o  <= MIX_W'(p_im >>> (LO_W - 2));
    end
  end

endmodule
