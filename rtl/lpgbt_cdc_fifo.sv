`timescale 1ns / 1ps
// lpgbt_cdc_fifo: the mixed-width FIFO between the lpGBT decoder and the
// Ethernet transmit path.
//
// Write side (lpGBT clock, 40 MHz): one 224-bit decoded lpGBT user word per
// cycle with lpgbt_valid. The lpGBT link cannot be stalled, so a word
// that arrives while the FIFO is full is dropped and counted. Words are
// only stored while wr_enable (from the register file, synchronized here)
// is set.
// Read side (Ethernet clock, 156.25 MHz): a 64-bit valid/ready stream.
// The crossing is an asynchronous FIFO of whole 224-bit words with Gray
// pointers; the 224 -> 64 width change follows it in the read clock domain
// (gearbox_224_64), so together they act as one FIFO with a narrower read
// port. avail is the number of 64-bit words that can be read without a
// gap, so a packet is started only when all of it is present.
// drop_count is the dropped-word counter, carried to the read clock in
// Gray code; it lags by a few read-clock cycles.
// The description gives the widths, the clocks and the role of this FIFO;
// the depth, the drop policy and the split into FIFO plus gearbox are
// choices of this implementation.
module lpgbt_cdc_fifo #(
  parameter int unsigned DEPTH = 512       // 224-bit words
) (
  // lpGBT clock domain
  input  logic         lpgbt_clk,
  input  logic         lpgbt_rst_n,
  input  logic         lpgbt_valid,
  input  logic [netgbt_pkg::LPGBT_W-1:0] lpgbt_data,
  // Ethernet clock domain
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_enable,
  output logic [netgbt_pkg::AXIS_W-1:0] m_tdata,
  output logic         m_tvalid,
  input  logic         m_tready,
  output logic [$clog2(DEPTH)+3:0] avail,
  output logic [31:0]  drop_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  // ---- lpGBT clock domain ----
  logic        en_wr;
  logic        wr_full;
  logic [31:0] drop_bin, drop_gray;

  sync_ff #(.WIDTH(1)) u_sync_en (
    .clk(lpgbt_clk), .rst_n(lpgbt_rst_n), .d(wr_enable), .q(en_wr));

  always_ff @(posedge lpgbt_clk or negedge lpgbt_rst_n) begin
    if (!lpgbt_rst_n) begin
      drop_bin  <= '0;
      drop_gray <= '0;
    end else if (lpgbt_valid && en_wr && wr_full) begin
      drop_bin  <= drop_bin + 1'b1;
      drop_gray <= netgbt_pkg::bin2gray(drop_bin + 1'b1);
    end
  end

  // ---- crossing ----
  logic [223:0] f_data;
  logic         f_empty, f_rd;
  logic [AW+1:0] f_count;

  async_fifo #(.WIDTH(224), .DEPTH(DEPTH)) u_fifo (
    .wr_clk(lpgbt_clk), .wr_rst_n(lpgbt_rst_n),
    .wr_en(lpgbt_valid && en_wr), .wr_data(lpgbt_data), .wr_full(wr_full),
    .rd_clk(clk), .rd_rst_n(rst_n),
    .rd_en(f_rd), .rd_data(f_data), .rd_empty(f_empty), .rd_count(f_count));

  // ---- Ethernet clock domain ----
  logic [3:0] lanes;

  gearbox_224_64 u_gearbox (
    .clk(clk), .rst_n(rst_n),
    .in_data(f_data), .in_valid(!f_empty), .in_ready(f_rd),
    .out_data(m_tdata), .out_valid(m_tvalid), .out_ready(m_tready),
    .lanes(lanes));

  // Each stored word is 7 lanes, each output word 2 lanes.
  assign avail = (AW+4)'(((32'(f_count) * 7) + 32'(lanes)) >> 1);

  logic [31:0] drop_gray_rd;
  sync_ff #(.WIDTH(32)) u_sync_drop (
    .clk(clk), .rst_n(rst_n), .d(drop_gray), .q(drop_gray_rd));
  assign drop_count = netgbt_pkg::gray2bin(drop_gray_rd);
endmodule
