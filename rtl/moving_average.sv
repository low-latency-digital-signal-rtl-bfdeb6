// moving_average: moving-average (box-car) FIR low-pass filter of runtime
// window length l, one copy per I/Q branch.
//
// Structure, as published: the input a is fanned out; one branch passes a
// variable delay z^-l to give b = a delayed by l samples; a subtractor forms
// a - b, which an accumulator integrates, so that the accumulator holds the
// sum of the last l samples up to the previous cycle. A bypass adder adds
// the present a - b to the accumulator output, which puts the newest sample
// into the sum without waiting for a clock edge, and a constant factor 1/l
// normalises. The delay registers and the accumulator start at zero, which
// makes the running sum exact from the first sample on.
//
// Own choices: the 1/l factor is an arithmetic right shift by floor(log2 l),
// exact for l = 1, 2, 4, 8, 16 (the published experiment uses l = 4) and a gain
// of l/2^floor(log2 l) < 2 otherwise; the result is registered (the pipeline
// register that follows the filter in the block diagram), so the filter adds
// one clock cycle of latency; clr_i re-zeroes the delay and accumulator and
// must be pulsed whenever l is changed; l = 0 is treated as l = 1.
//
// Interface: x_i is one new sample per clock. y_o, one edge later, is
// sum(x[n-l+1..n]) >>> floor(log2 l) for the sample x[n] present at that edge.
module moving_average
  import fbdsp_pkg::*;
#(
  parameter int unsigned IN_W  = MIX_W,
  parameter int unsigned OUT_W = IQ_W,
  parameter int unsigned L_MAX = 16
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          clr_i,
  input  logic [$clog2(L_MAX+1)-1:0]    len_i,
  input  logic signed [IN_W-1:0]        x_i,
  output logic signed [OUT_W-1:0]       y_o
);

  localparam int unsigned ACC_W = IN_W + $clog2(L_MAX) + 1;
  localparam int unsigned LW    = $clog2(L_MAX+1);
  localparam int unsigned IW    = $clog2(L_MAX);

  logic signed [IN_W-1:0]  dly_q [L_MAX];
  logic signed [ACC_W-1:0] acc_q, diff, sum;
  logic signed [IN_W-1:0]  b;
  logic [LW-1:0]           len_eff;
  logic [$clog2(LW)+1:0]   nshift;

  // l limited to 1 .. L_MAX.
  always_comb begin
    if (len_i == '0)                 len_eff = LW'(1);
    else if (len_i > LW'(L_MAX))     len_eff = LW'(L_MAX);
    else                             len_eff = len_i;
  end

  // Variable delay z^-l: tap l-1 of the shift register.
  assign b = dly_q[IW'(len_eff - LW'(1))];

  assign diff = ACC_W'(x_i) - ACC_W'(b);
  assign sum  = acc_q + diff;         // bypass adder

  // floor(log2 l)
  always_comb begin
    nshift = '0;
    for (int k = 0; k < LW; k++)
      if (len_eff[k]) nshift = ($clog2(LW)+2)'(k);
  end

  always_ff @(posedge clk) begin
    if (rst || clr_i) begin
      for (int i = 0; i < L_MAX; i++) dly_q[i] <= '0;
      acc_q <= '0;
      y_o   <= '0;
    end else begin
      dly_q[0] <= x_i;
      for (int i = 1; i < L_MAX; i++) dly_q[i] <= dly_q[i-1];
      acc_q <= sum;                   // accumulator +=
      y_o   <= OUT_W'(sum >>> nshift);
    end
  end

endmodule
