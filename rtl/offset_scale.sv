// offset_scale: offset subtraction and scaling of one quadrature,
// y = m * (x - c), with m a power of two chosen by the host.
//
// As published, the block has no flip-flops (it sits inside one pipeline
// stage together with the state discrimination) and uses no multiplier: the
// factor m is a multiplexer selecting one of several shifted copies of the
// difference. After offset subtraction the discrimination threshold is zero,
// so c sets the threshold in the I/Q plane.
// Own choices: m = 2^shift with shift = 0 .. 7 (left shifts only), and the
// result saturates to the output width so that its sign, which the state
// discrimination uses, is always correct.
//
// Interface: purely combinational; x_i, c_i and shift_i to y_o.
module offset_scale
  import fbdsp_pkg::*;
#(
  parameter int unsigned W = IQ_W
) (
  input  logic signed [W-1:0]       x_i,
  input  logic signed [W-1:0]       c_i,
  input  logic [SHIFT_W-1:0]        shift_i,
  output logic signed [W-1:0]       y_o
);

  localparam int unsigned EXT_W = W + 1 + (2**SHIFT_W - 1);
  localparam logic signed [EXT_W-1:0] MAXV = EXT_W'({1'b0, {(W-1){1'b1}}});
  localparam logic signed [EXT_W-1:0] MINV = -MAXV - EXT_W'(1);

  logic signed [W:0]       diff;
  logic signed [EXT_W-1:0] shifted;

  assign diff = {x_i[W-1], x_i} - {c_i[W-1], c_i};

  // Multiplexer over the shifted copies diff * 2^k.
  always_comb begin
    shifted = EXT_W'(diff);
    for (int k = 0; k < 2**SHIFT_W; k++)
      if (shift_i == SHIFT_W'(k)) shifted = EXT_W'(diff) <<< k;
  end

  always_comb begin
    if (shifted > MAXV)      y_o = MAXV[W-1:0];
    else if (shifted < MINV) y_o = MINV[W-1:0];
    else                     y_o = shifted[W-1:0];
  end

endmodule
