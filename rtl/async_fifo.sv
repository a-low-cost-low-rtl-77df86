`timescale 1ns / 1ps
// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Words written on wr_clk are read on rd_clk. The memory is read
// synchronously (one registered read port, as block RAM has), and an
// output register in front of it makes the read side
// first-word-fall-through: rd_data shows the oldest word whenever
// rd_empty is low, and rd_en pops it; the next word is fetched from the
// memory in the same cycle, so back-to-back reads run at one word per
// cycle. Pointers are one bit wider than the address and cross clock
// domains in Gray code through two-flop synchronizers, so full and empty
// are pessimistic by the synchronizer latency (two cycles of the other
// clock) and never optimistic. A written word can be read about three
// read clocks after it is written. The output register adds
// one word of capacity: DEPTH + 1 words in all. rd_count is the number of
// words the read side can be sure of, the output register included.
// A write while full and a read while empty are ignored.
// DEPTH must be a power of two. Each side has its own active-low
// asynchronous reset; both must be asserted together.
// The design description asks only for a FIFO that crosses from the
// lpGBT clock to the Ethernet clock; this structure is a common textbook
// one chosen by this implementation.
module async_fifo #(
  parameter int unsigned WIDTH = 224,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     wr_clk,
  input  logic                     wr_rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     wr_full,

  input  logic                     rd_clk,
  input  logic                     rd_rst_n,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     rd_empty,
  output logic [$clog2(DEPTH)+1:0] rd_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wptr_bin, wptr_gray, rptr_bin, rptr_gray;
  logic [AW:0] wptr_gray_rd, rptr_gray_wr;   // synchronized copies
  logic [AW:0] wptr_bin_rd;

  // ---------------- write side ----------------
  logic do_wr;
  assign do_wr = wr_en && !wr_full;

  always_ff @(posedge wr_clk) begin
    if (do_wr) mem[wptr_bin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr_bin  <= '0;
      wptr_gray <= '0;
    end else if (do_wr) begin
      wptr_bin  <= wptr_bin + 1'b1;
      wptr_gray <= (AW+1)'(netgbt_pkg::bin2gray(32'(wptr_bin + 1'b1)));
    end
  end

  sync_ff #(.WIDTH(AW+1)) u_sync_r2w (
    .clk(wr_clk), .rst_n(wr_rst_n), .d(rptr_gray), .q(rptr_gray_wr));

  // Full when the pointers differ only in their two top bits (Gray code).
  assign wr_full = (wptr_gray == {~rptr_gray_wr[AW:AW-1], rptr_gray_wr[AW-2:0]});

  // ---------------- read side ----------------
  // rptr points at the next word to fetch from the memory into the output
  // register q_data; q_valid says the output register holds a word.
  logic             mem_empty, fetch, q_valid;
  logic [WIDTH-1:0] q_data;

  assign mem_empty = (rptr_gray == wptr_gray_rd);
  assign fetch     = !mem_empty && (!q_valid || rd_en);

  always_ff @(posedge rd_clk) begin
    if (fetch) q_data <= mem[rptr_bin[AW-1:0]];
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n)   q_valid <= 1'b0;
    else if (fetch)  q_valid <= 1'b1;
    else if (rd_en)  q_valid <= 1'b0;
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr_bin  <= '0;
      rptr_gray <= '0;
    end else if (fetch) begin
      rptr_bin  <= rptr_bin + 1'b1;
      rptr_gray <= (AW+1)'(netgbt_pkg::bin2gray(32'(rptr_bin + 1'b1)));
    end
  end

  sync_ff #(.WIDTH(AW+1)) u_sync_w2r (
    .clk(rd_clk), .rst_n(rd_rst_n), .d(wptr_gray), .q(wptr_gray_rd));

  assign wptr_bin_rd = (AW+1)'(netgbt_pkg::gray2bin(32'(wptr_gray_rd)));
  assign rd_empty    = !q_valid;
  assign rd_data     = q_data;
  // at most DEPTH words in the memory plus one in the output register
  assign rd_count    = (AW+2)'(wptr_bin_rd - rptr_bin) + (AW+2)'(q_valid);

  if (DEPTH < 4 || (1 << AW) != DEPTH) begin : g_bad_depth
    $error("async_fifo: DEPTH must be a power of two, at least 4");
  end
endmodule
