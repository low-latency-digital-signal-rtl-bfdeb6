// fs4_mixer: digital I/Q mixer for an intermediate frequency of a quarter of
// the sampling rate.
//
// Multiplying by cos(2*pi*n/4) and -sin(2*pi*n/4) reduces to the repeating
// sequences (1, 0, -1, 0) and (0, -1, 0, 1). A free-running 2-bit counter
// selects, in each clock cycle, one of four multiplexer inputs per branch:
// the sample, zero, or the negated sample. No multiplier is used. The
// multiplexer outputs are registered, so the mixer is one pipeline stage
// (one clock cycle) deep. This structure follows the published design.
// Own choices: the counter resets to 0 and the outputs are one bit wider than
// the input so that negating the most negative sample cannot overflow.
//
// Interface: s_adc_i is the registered ADC sample. re_o/im_o are Re[S_m] and
// Im[S_m] of the sample present one clock edge earlier.
module fs4_mixer
  import fbdsp_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] s_adc_i,
  output logic signed [MIX_W-1:0] re_o,
  output logic signed [MIX_W-1:0] im_o
);

  logic [1:0]              cnt_q;
  logic signed [MIX_W-1:0] pos, neg, re_d, im_d;

  assign pos = MIX_W'(s_adc_i);
  assign neg = -pos;

  // Multiplexers: Re <- (in0 = s, in1 = 0, in2 = -s, in3 = 0),
  //               Im <- (in0 = 0, in1 = -s, in2 = 0, in3 = s).
  always_comb begin
    unique case (cnt_q)
      2'd0:    begin re_d = pos; im_d = '0;  end
      2'd1:    begin re_d = '0;  im_d = neg; end
      2'd2:    begin re_d = neg; im_d = '0;  end
      default: begin re_d = '0;  im_d = pos; end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q   <= '0;
      re_o    <= '0;
      im_o    <= '0;
    end else begin
      cnt_q   <= cnt_q + 2'd1;
      re_o    <= re_d;
      im_o    <= im_d;
    end
  end

endmodule
