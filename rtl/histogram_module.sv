// histogram_module: builds histograms of the pre-processed quadratures I~
// and Q~ in an external ZBT RAM, one count per bin.
//
// Published behaviour:
// - I~ and Q~ are rounded to 7 bits, so the full range -1 .. +1 is split into
//   128 bins per dimension.
// - 2-d mode: {I~, Q~} is a 14-bit bin address, counted on every fbTime marker.
// - Correlation mode: a buffer keeps I~ from the previous fbTime marker (I~1),
//   and the bin address {I~2, Q~ reduced to 5 bits, I~1, seg} (21 bits)
//   pairs it with the present value I~2. seg is a 2-bit segment counter
//   that tells alternating experiment scenarios apart.
// - Time-resolved mode: a time counter started by fbTime keeps the enable
//   active for up to 16 consecutive cycles, and {I~, Q~, t (4 bits),
//   seg (3 bits)} is the 21-bit address.
// - Counts are 16-bit words (2^21 words = 2^25 bits of ZBT RAM).
//
// Own choices: rounding is to nearest with saturation and the bin index is
// offset binary (bin 0 = -1, bin 127 just under +1), so addresses grow with
// the signal; the 5-bit Q~ of the correlation mode is the upper 5 bits of
// the 7-bit bin; the segment counter advances on every fbTime marker, so in
// an experiment with two readouts per repetition, odd segment values mark
// the (first readout, second readout) pairs and seg[1] tells alternate
// repetitions apart; the time-resolved window length is a host setting of
// 1 .. 16 cycles and restarts if a new marker arrives during a window; the
// buffer and segment counters are cleared while recording is disabled.
// The memory traffic is delegated to increase_count.
//
// Timing: the bin address is registered one cycle after the sample it
// belongs to and then queued for the read-modify-write.
module histogram_module
  import fbdsp_pkg::*;
#(
  parameter int unsigned W      = IQ_W,
  parameter int unsigned AW     = 21,
  parameter int unsigned DW     = 16,
  parameter int unsigned RD_LAT = 2,
  parameter int unsigned FIFO_D = 32
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] i_i,
  input  logic signed [W-1:0] q_i,
  input  logic                fbtime_i,
  input  hist_mode_e          mode_i,
  input  logic                en_i,
  input  logic [TLEN_W-1:0]   tlen_i,
  output logic [15:0]         drop_cnt_o,
  output logic                busy_o,
  // host access to the histogram memory
  input  logic                host_en_i,
  input  logic                host_we_i,
  input  logic [AW-1:0]       host_addr_i,
  input  logic [DW-1:0]       host_wdata_i,
  output logic                host_ready_o,
  output logic [DW-1:0]       host_rdata_o,
  output logic                host_rvalid_o,
  // ZBT RAM
  output logic                ram_en_o,
  output logic                ram_we_o,
  output logic [AW-1:0]       ram_addr_o,
  output logic [DW-1:0]       ram_wdata_o,
  input  logic [DW-1:0]       ram_rdata_i
);

  // Round a W-bit fraction to a 7-bit offset-binary bin index.
  function automatic logic [BIN_W-1:0] to_bin(logic signed [W-1:0] v);
    logic signed [W:0] r;
    logic signed [W:0] q;
    r = {v[W-1], v} + (W+1)'(1 << (W - BIN_W - 1));
    q = r >>> (W - BIN_W);
    if (q > (W+1)'(2**(BIN_W-1) - 1)) q = (W+1)'(2**(BIN_W-1) - 1);
    return {~q[BIN_W-1], q[BIN_W-2:0]};
  endfunction

  logic [BIN_W-1:0] ib, qb;
  assign ib = to_bin(i_i);
  assign qb = to_bin(q_i);

  logic [BIN_W-1:0] buf_q;      // correlation buffer, I~1
  logic [2:0]       seg_q;      // segment counter
  logic [2:0]       tseg_q;     // segment of the running time window
  logic [4:0]       t_q;        // time counter
  logic             twin_q;     // time window active

  logic             inc_v_q;
  logic [AW-1:0]    inc_a_q;

  always_ff @(posedge clk) begin
    if (rst || !en_i) begin
      buf_q   <= '0;
      seg_q   <= '0;
      tseg_q  <= '0;
      t_q     <= '0;
      twin_q  <= 1'b0;
      inc_v_q <= 1'b0;
      inc_a_q <= '0;
    end else begin
      inc_v_q <= 1'b0;
      if (fbtime_i) seg_q <= seg_q + 3'd1;
      unique case (mode_i)
        HIST_CORR: begin
          if (fbtime_i) begin
            buf_q   <= ib;
            inc_v_q <= 1'b1;
            inc_a_q <= AW'({ib, qb[BIN_W-1 -: 5], buf_q, seg_q[1:0]});
          end
        end
        HIST_TIME: begin
          if (fbtime_i) begin
            twin_q  <= (tlen_i > TLEN_W'(1));
            t_q     <= 5'd1;
            tseg_q  <= seg_q;
            inc_v_q <= 1'b1;
            inc_a_q <= AW'({ib, qb, 4'd0, seg_q});
          end else if (twin_q) begin
            inc_v_q <= 1'b1;
            inc_a_q <= AW'({ib, qb, t_q[3:0], tseg_q});
            t_q     <= t_q + 5'd1;
            if (t_q + 5'd1 >= 5'(tlen_i) || t_q == 5'd15) twin_q <= 1'b0;
          end
        end
        default: begin  // HIST_2D
          if (fbtime_i) begin
            inc_v_q <= 1'b1;
            inc_a_q <= AW'({ib, qb});
          end
        end
      endcase
    end
  end

  logic drop;

  increase_count #(.AW(AW), .DW(DW), .RD_LAT(RD_LAT), .FIFO_D(FIFO_D)) u_inc (
    .clk, .rst,
    .inc_valid_i (inc_v_q),
    .inc_addr_i  (inc_a_q),
    .drop_o      (drop),
    .busy_o,
    .host_en_i, .host_we_i, .host_addr_i, .host_wdata_i,
    .host_ready_o, .host_rdata_o, .host_rvalid_o,
    .ram_en_o, .ram_we_o, .ram_addr_o, .ram_wdata_o, .ram_rdata_i
  );

  always_ff @(posedge clk) begin
    if (rst)                     drop_cnt_o <= '0;
    else if (drop && drop_cnt_o != '1) drop_cnt_o <= drop_cnt_o + 16'd1;
  end

endmodule
