// increase_count: adds one to a histogram bin held in an external ZBT
// (zero-bus-turnaround) synchronous SRAM, and gives the host read/write
// access to that memory when no recording is in progress.
//
// The published design names this block and states its function only: it
// manages the memory traffic needed to increase the stored count whenever
// the enable flag is set. The way it does so is this implementation's own:
// - Bin addresses to be incremented enter a FIFO of FIFO_D entries, because
//   the time-resolved histogram mode requests one increment per clock cycle
//   for up to 16 cycles, faster than a read-modify-write can finish.
// - One engine works the FIFO serially: it issues a read, waits RD_LAT clock
//   cycles for the data, and issues the write of count + 1 (saturating at
//   all ones) in the cycle the data arrives. The next read may follow one
//   cycle later, so one increment takes RD_LAT + 1 cycles and a later read
//   never sees a stale count: no forwarding is needed.
// - A request that meets a full FIFO is dropped and reported on drop_o.
// - The host port is served only while the FIFO is empty and the engine idle
//   (host_ready_o); its read data return RD_LAT cycles after the command,
//   on host_rdata_o, which is the memory data bus wired straight through
//   (qualified by host_rvalid_o), so those 16 outputs follow an input.
//
// Memory port: a command (ram_en_o, ram_we_o, ram_addr_o, and ram_wdata_o
// for a write) is valid for one cycle; read data are expected on ram_rdata_i
// exactly RD_LAT clock edges later.
module increase_count #(
  parameter int unsigned AW     = 21,
  parameter int unsigned DW     = 16,
  parameter int unsigned RD_LAT = 2,
  parameter int unsigned FIFO_D = 32
) (
  input  logic          clk,
  input  logic          rst,
  // increment requests
  input  logic          inc_valid_i,
  input  logic [AW-1:0] inc_addr_i,
  output logic          drop_o,
  output logic          busy_o,
  // host access
  input  logic          host_en_i,
  input  logic          host_we_i,
  input  logic [AW-1:0] host_addr_i,
  input  logic [DW-1:0] host_wdata_i,
  output logic          host_ready_o,
  output logic [DW-1:0] host_rdata_o,
  output logic          host_rvalid_o,
  // ZBT RAM
  output logic          ram_en_o,
  output logic          ram_we_o,
  output logic [AW-1:0] ram_addr_o,
  output logic [DW-1:0] ram_wdata_o,
  input  logic [DW-1:0] ram_rdata_i
);

  localparam int unsigned PW = $clog2(FIFO_D);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_WRITE} state_e;

  // FIFO of pending bin addresses
  logic [AW-1:0] fifo_q [FIFO_D];
  logic [PW-1:0] wp_q, rp_q;
  logic [PW:0]   cnt_q;
  logic          fifo_empty, fifo_full, push, pop;

  assign fifo_empty = (cnt_q == '0);
  assign fifo_full  = (cnt_q == (PW+1)'(FIFO_D));
  assign push       = inc_valid_i && !fifo_full;
  assign drop_o     = inc_valid_i && fifo_full;

  // engine
  state_e                  state_q;
  logic [AW-1:0]           addr_q;
  logic [$clog2(RD_LAT+1)-1:0] wait_q;
  logic [RD_LAT:0]         host_rd_pipe_q;

  assign pop          = (state_q == S_IDLE) && !fifo_empty;
  assign host_ready_o = (state_q == S_IDLE) && fifo_empty;
  assign busy_o       = !fifo_empty || (state_q != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) begin
        fifo_q[wp_q] <= inc_addr_i;
        wp_q <= (wp_q == PW'(FIFO_D-1)) ? '0 : wp_q + PW'(1);
      end
      if (pop) rp_q <= (rp_q == PW'(FIFO_D-1)) ? '0 : rp_q + PW'(1);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      wait_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (pop) begin
          addr_q  <= fifo_q[rp_q];
          wait_q  <= ($clog2(RD_LAT+1))'(RD_LAT - 1);
          state_q <= (RD_LAT > 1) ? S_WAIT : S_WRITE;
        end
        S_WAIT: begin
          wait_q <= wait_q - 1'b1;
          if (wait_q == ($clog2(RD_LAT+1))'(1)) state_q <= S_WRITE;
        end
        default: state_q <= S_IDLE;   // S_WRITE: data has arrived, write issued
      endcase
    end
  end

  // memory command multiplexer
  always_comb begin
    ram_en_o    = 1'b0;
    ram_we_o    = 1'b0;
    ram_addr_o  = addr_q;
    ram_wdata_o = '0;
    if (pop) begin
      ram_en_o   = 1'b1;
      ram_addr_o = fifo_q[rp_q];
    end else if (state_q == S_WRITE) begin
      ram_en_o    = 1'b1;
      ram_we_o    = 1'b1;
      ram_wdata_o = (ram_rdata_i == '1) ? ram_rdata_i : ram_rdata_i + DW'(1);
    end else if (host_en_i && host_ready_o) begin
      ram_en_o    = 1'b1;
      ram_we_o    = host_we_i;
      ram_addr_o  = host_addr_i;
      ram_wdata_o = host_wdata_i;
    end
  end

  // host read return
  always_ff @(posedge clk) begin
    if (rst) host_rd_pipe_q <= '0;
    else     host_rd_pipe_q <= {host_rd_pipe_q[RD_LAT-1:0],
                                host_en_i && host_ready_o && !host_we_i};
  end
  assign host_rvalid_o = host_rd_pipe_q[RD_LAT-1];
  assign host_rdata_o  = ram_rdata_i;

  // FIFO and engine rules.
  a_fifo_bound: assert property (@(posedge clk) disable iff (rst) cnt_q <= (PW+1)'(FIFO_D));
  a_no_pop_empty: assert property (@(posedge clk) disable iff (rst) pop |-> !fifo_empty);
  a_one_cmd: assert property (@(posedge clk) disable iff (rst)
                              (state_q == S_WRITE) |-> (ram_en_o && ram_we_o && !pop));

endmodule
