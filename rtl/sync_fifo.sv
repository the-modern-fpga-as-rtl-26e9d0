`timescale 1ns/1ps
// sync_fifo: single-clock first-in first-out buffer, written as a memory
// array so that it maps onto on-chip block RAM.
//
// Write: `wr_en` with `wr_data` stores a word unless the FIFO is `full` (a
// write while full is a protocol error, flagged by an assertion). Read:
// `rd_en` while not `empty` pops the oldest word; it appears on `rd_data`
// with `rd_valid` one clock later (registered block-RAM read). `level` is the
// number of stored words. The default 512 x 36 matches one 18-kbit block RAM
// holding one 36-bit hit record per word; the published design only names "an
// on-chip FIFO", so the size and the read timing are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = daq_pkg::HIT_BITS,
  parameter int unsigned DEPTH = daq_pkg::TDC_FIFO_DEPTH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [WIDTH-1:0]       wr_data,
  output logic                   full,
  input  logic                   rd_en,
  output logic [WIDTH-1:0]       rd_data,
  output logic                   rd_valid,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned AB = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AB:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign level = wptr - rptr;
  assign full  = (level == (AB+1)'(DEPTH));
  assign empty = (wptr == rptr);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AB-1:0]] <= wr_data;
    if (do_rd) rd_data <= mem[rptr[AB-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      rd_valid <= 1'b0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      rd_valid <= do_rd;
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("sync_fifo: write while full");
  a_no_read_when_empty: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("sync_fifo: read while empty");

endmodule
