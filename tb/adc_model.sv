// adc_model: behavioural model of the 14-bit, 100 MS/s pipelined ADC in
// front of the signal processor (behavioural model, not synthesizable
// intent). The converter's pipeline takes four sample clocks and the
// transfer to the logic one more, so a code presented on ain at one clock
// edge appears on aout LAT = 5 edges later. Codes outside the 14-bit range
// are clipped, as the converter would.
module adc_model #(
  parameter int LAT = 5
) (
  input  logic               clk,
  input  int                 ain,
  output logic signed [13:0] aout
);
  logic signed [13:0] pipe [LAT];

  initial for (int i = 0; i < LAT; i++) pipe[i] = '0;

  always @(posedge clk) begin
    pipe[0] <= (ain > 8191) ? 14'sd8191 : (ain < -8192) ? -14'sd8192 : 14'(ain);
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign aout = pipe[LAT-1];
endmodule
