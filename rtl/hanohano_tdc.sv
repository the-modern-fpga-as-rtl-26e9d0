`timescale 1ns/1ps
// hanohano_tdc: 16-channel photomultiplier TDC/QDC with on-chip FIFO.
//
// One FPGA serves as time digitizer, charge digitizer and data collection node
// for a bundle of 16 PMTs. A shared Gray-code timebase (gray_timebase, 2 ns
// step from both edges of the 250 MHz clock) is latched by every channel
// (tdc_channel) on the leading and trailing edge of its comparator output.
// Finished records are collected by a round-robin arbiter, one per clock, and
// written as tdc_hit_t {channel, t_lead, tot} into a FIFO (sync_fifo), from
// which the optical-link readout drains them through the read port.
//
// Flow control: a channel keeps its record until the arbiter takes it; the
// arbiter takes one only when the FIFO is not full, so a full FIFO stalls the
// collection, and a channel that completes another hit while stalled drops it
// (counted in `drop_count`). `hit_count` counts records written to the FIFO.
// Latency from a trailing edge to the FIFO is about four clocks. Round-robin
// collection, the drop policy and the counters are this design's choices.
module hanohano_tdc #(
  parameter int unsigned N_CH       = daq_pkg::PMT_CHANNELS,
  parameter int unsigned FIFO_DEPTH = daq_pkg::TDC_FIFO_DEPTH
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_CH-1:0]             pmt_cmp,
  input  logic                        rd_en,
  output daq_pkg::tdc_hit_t           rd_data,
  output logic                        rd_valid,
  output logic                        fifo_empty,
  output logic                        fifo_full,
  output logic [$clog2(FIFO_DEPTH):0] fifo_level,
  output logic [31:0]                 hit_count,
  output logic [31:0]                 drop_count
);
  import daq_pkg::*;

  localparam int unsigned CB = $clog2(N_CH);
  localparam int unsigned TB = daq_pkg::TDC_BITS;

  logic [TB-1:0]   gtime;
  logic [N_CH-1:0] ch_valid, ch_ack, ch_drop;
  logic [TB-1:0]   ch_lead [N_CH];
  logic [TB-1:0]   ch_tot  [N_CH];

  logic [CB-1:0]   rr_last, pick;
  logic            pick_ok;
  tdc_hit_t        wr_hit;
  logic            wr_en;

  gray_timebase #(.BITS(TB)) u_time (.clk, .rst_n, .gray(gtime));

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tdc_channel #(.BITS(TB)) u_ch (
      .clk, .rst_n, .hit(pmt_cmp[c]), .gtime,
      .valid(ch_valid[c]), .t_lead(ch_lead[c]), .tot(ch_tot[c]),
      .ack(ch_ack[c]), .dropped(ch_drop[c])
    );
  end

  // Round-robin choice: first waiting channel after the last one served.
  always_comb begin
    pick    = '0;
    pick_ok = 1'b0;
    for (int k = 1; k <= N_CH; k++) begin
      logic [CB-1:0] idx;
      idx = CB'((32'(rr_last) + k) % N_CH);
      if (!pick_ok && ch_valid[idx]) begin
        pick    = idx;
        pick_ok = 1'b1;
      end
    end
  end

  assign wr_en  = pick_ok && !fifo_full;
  assign ch_ack = wr_en ? (N_CH'(1) << pick) : '0;

  always_comb begin
    wr_hit.channel = pick;
    wr_hit.t_lead  = ch_lead[pick];
    wr_hit.tot     = ch_tot[pick];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_last    <= CB'(N_CH - 1);
      hit_count  <= '0;
      drop_count <= '0;
    end else begin
      if (wr_en) begin
        rr_last   <= pick;
        hit_count <= hit_count + 1;
      end
      drop_count <= drop_count + 32'($countones(ch_drop));
    end
  end

  sync_fifo #(.WIDTH(HIT_BITS), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en, .wr_data(wr_hit), .full(fifo_full),
    .rd_en, .rd_data, .rd_valid, .empty(fifo_empty), .level(fifo_level)
  );

endmodule
