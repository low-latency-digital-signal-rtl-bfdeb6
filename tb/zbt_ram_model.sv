// zbt_ram_model: behavioural model of the external ZBT synchronous SRAM that
// holds the histogram (behavioural model, not synthesizable intent).
//
// A command (en, we, addr, wdata) is taken at a rising clock edge. A write
// updates the array at that edge; a read returns the word on rdata exactly
// RD_LAT edges later. The array starts at zero so that a testbench need not
// clear it first. The real part has separate late-write data timing, which
// the controller in this design does not rely on.
module zbt_ram_model #(
  parameter int unsigned AW     = 21,
  parameter int unsigned DW     = 16,
  parameter int unsigned RD_LAT = 2
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [2**AW];
  logic [DW-1:0] pipe [RD_LAT];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
    for (int i = 0; i < RD_LAT; i++) pipe[i] = '0;
  end

  always @(posedge clk) begin
    if (en && we) mem[addr] <= wdata;
    pipe[0] <= (en && !we) ? mem[addr] : '0;
    for (int i = 1; i < RD_LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign rdata = pipe[RD_LAT-1];

  // Peek into the array without a bus cycle.
  function automatic logic [DW-1:0] peek(input logic [AW-1:0] a);
    return mem[a];
  endfunction

endmodule
