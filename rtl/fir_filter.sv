// fir_filter: general finite-impulse-response low-pass filter with
// host-loaded coefficients (integration weights), one copy per I/Q branch.
//
// y[n] = sum_{k=0}^{N_TAPS-1} c_k x[n-k] * 2^-COEF_FRAC, computed in transposed
// form: every tap multiplies the newest sample by its coefficient and adds
// the product to the partial sum handed on by the next tap, so each cycle
// has one multiplier and one adder in the path regardless of N_TAPS. The
// published full design allows "40-point FIR filters with arbitrary filter
// coefficients" beside the multiplier-less moving average; the number of
// taps is the published one, everything else is this implementation's own:
// 16-bit signed coefficients with 15 fraction bits (range -1 .. 1-2^-15),
// the result is the floor (arithmetic shift) of the scaled sum, saturated to
// OUT_W bits, and after reset the coefficients hold a four-sample average
// (c_0..c_3 = 1/4), the filter of the published experiment.
//
// Interface: coef_we_i writes coef_i into tap coef_addr_i at the clock edge
// (addresses >= N_TAPS are ignored); clr_i re-zeroes the partial sums.
// x_i is one sample per clock; y_o, one edge later, already contains the
// sample x[n] present at that edge, so the filter is one pipeline stage deep,
// like the moving average it can replace.
module fir_filter
  import fbdsp_pkg::*;
#(
  parameter int unsigned IN_W   = MIX_W,
  parameter int unsigned OUT_W  = IQ_W,
  parameter int unsigned N_TAPS = 40
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic                            clr_i,
  input  logic                            coef_we_i,
  input  logic [TAP_W-1:0]                coef_addr_i,
  input  logic signed [COEF_W-1:0]        coef_i,
  input  logic signed [IN_W-1:0]          x_i,
  output logic signed [OUT_W-1:0]         y_o
);

  localparam int unsigned ACC_W = IN_W + COEF_W + $clog2(N_TAPS);
  localparam logic signed [ACC_W-1:0] Y_MAX = ACC_W'((longint'(1) << (OUT_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] Y_MIN = -ACC_W'(longint'(1) << (OUT_W-1));

  logic signed [COEF_W-1:0] coef_q [N_TAPS];
  logic signed [ACC_W-1:0]  z_q    [N_TAPS];
  logic signed [ACC_W-1:0]  prod   [N_TAPS];
  logic signed [ACC_W-1:0]  scaled;

  always_comb
    for (int k = 0; k < N_TAPS; k++)
      prod[k] = ACC_W'(x_i) * ACC_W'(coef_q[k]);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N_TAPS; k++)
        coef_q[k] <= (k < 4) ? COEF_W'(1 << (COEF_FRAC - 2)) : '0;
    end else if (coef_we_i && (32'(coef_addr_i) < N_TAPS)) begin
      coef_q[coef_addr_i] <= coef_i;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr_i) begin
      for (int k = 0; k < N_TAPS; k++) z_q[k] <= '0;
    end else begin
      for (int k = 0; k < N_TAPS - 1; k++) z_q[k] <= z_q[k+1] + prod[k];
      z_q[N_TAPS-1] <= prod[N_TAPS-1];
    end
  end

  assign scaled = z_q[0] >>> COEF_FRAC;
  assign y_o = (scaled > Y_MAX) ? OUT_W'(Y_MAX) :
               (scaled < Y_MIN) ? OUT_W'(Y_MIN) : OUT_W'(scaled);

endmodule
