// delay_line: a z^-n delay built from a chain of n synchronous D flip-flops.
//
// The signal-processing pipeline uses it for the ADC input register (z^-1,
// 14 bits) and for the trigger line, which passes z^-6, z^-1 and z^-1 so that
// it stays aligned with the samples: six registers cover the external ADC's
// conversion and transfer delay, the two single registers track the mixer
// and moving-average pipeline stages. Stage counts follow the published
// block diagram; reset to zero is a choice of this implementation.
//
// Interface: d_i is sampled on every rising clock edge; q_o shows the value
// d_i had DEPTH edges earlier. DEPTH = 0 is a plain wire.
module delay_line #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 6
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);

  if (DEPTH == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_regs
    logic [WIDTH-1:0] stage_q [DEPTH];

    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < DEPTH; i++) stage_q[i] <= '0;
      end else begin
        stage_q[0] <= d_i;
        for (int i = 1; i < DEPTH; i++) stage_q[i] <= stage_q[i-1];
      end
    end

    assign q_o = stage_q[DEPTH-1];
  end

endmodule
