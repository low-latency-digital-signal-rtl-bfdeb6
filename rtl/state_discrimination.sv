// state_discrimination: decides the qubit state from the signs of the
// pre-processed quadratures and issues the feedback triggers fb and fb2 at
// the readout time.
//
// As published: the synchronised trigger passes a rising-edge detector (1 in
// the cycle where the trigger is 1 and was 0 in the cycle before) and a
// host-set variable delay z^-d, d clock cycles of 10 ns = readout time. The
// delayed pulse is the fbTime marker. The sign bits x (of I~) and y (of Q~),
// 0 for non-negative and 1 for negative, address two 4-entry lookup tables
// L(1)_xy and L(2)_xy written by the host; fb = L(1)_xy AND fbTime and
// fb2 = L(2)_xy AND fbTime. Because the offset was subtracted before, the
// sign test is a threshold test on I and Q.
//
// Own choices: the variable delay is a shift register of 2^D_W-1 stages with
// a tap multiplexer (d = 0 gives the edge pulse itself), so any number of
// trigger edges may be in flight; fb and fb2 are registered (the last
// pipeline register of the block diagram), while fbtime_o is the unregistered
// marker so that the histogram records the very I~, Q~ used for the decision.
// LUT bit {x,y} (x the upper bit) holds L_xy. xy_o shows the two sign bits
// for monitoring; they are the inputs' sign bits, wired straight through.
//
// Interface: tr_i is the trigger delayed to match i_i/q_i. In the cycle
// d clock edges after the edge detector sees the rising trigger, fbtime_o is
// 1 and the sign decision is taken; fb_o/fb2_o show it one edge later, for
// one cycle.
module state_discrimination
  import fbdsp_pkg::*;
#(
  parameter int unsigned W = IQ_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                tr_i,
  input  logic signed [W-1:0] i_i,
  input  logic signed [W-1:0] q_i,
  input  logic [D_W-1:0]      delay_i,
  input  logic [3:0]          lut1_i,
  input  logic [3:0]          lut2_i,
  output logic                fbtime_o,
  output logic                fb_o,
  output logic                fb2_o,
  output logic [1:0]          xy_o
);

  localparam int unsigned DMAX = 2**D_W - 1;

  logic            tr_prev_q, edge_det;
  logic [DMAX-1:0] dly_q;
  logic            x, y;

  assign edge_det = tr_i & ~tr_prev_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      tr_prev_q <= 1'b0;
      dly_q     <= '0;
    end else begin
      tr_prev_q <= tr_i;
      dly_q     <= {dly_q[DMAX-2:0], edge_det};
    end
  end

  assign fbtime_o = (delay_i == '0) ? edge_det : dly_q[delay_i - D_W'(1)];

  // take sign bit
  assign x    = i_i[W-1];
  assign y    = q_i[W-1];
  assign xy_o = {x, y};

  always_ff @(posedge clk) begin
    if (rst) begin
      fb_o  <= 1'b0;
      fb2_o <= 1'b0;
    end else begin
      fb_o  <= lut1_i[{x, y}] & fbtime_o;
      fb2_o <= lut2_i[{x, y}] & fbtime_o;
    end
  end

endmodule
