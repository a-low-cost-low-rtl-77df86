`timescale 1ns / 1ps
// netgbt_link: one lpGBT-to-10GbE conversion channel.
//
// Decoded lpGBT user words (224 bits, 40 MHz lpGBT clock) enter the
// mixed-width FIFO, which crosses them into the 156.25 MHz Ethernet clock
// and narrows them to 64-bit words. The packetizer takes PKT_WORDS words
// at a time once they are all present; the network stack puts Ethernet,
// IPv4 and UDP-Lite headers in front and hands the frame to the 10GbE MAC
// over AXI-Stream (m_axis_*). The register file sets addresses, ports,
// packet size and enable and reports packet and drop counts.
// Rates: the lpGBT side brings at most 224 bits per 25 ns (8.96 Gbps);
// the stream side moves 64 bits per 6.4 ns (10 Gbps), and a 4096-byte
// payload costs 518 beats plus one idle cycle (3.32 us against 3.66 us
// for the data to arrive), so with the MAC never stalling the FIFO does
// not fill. The chain FIFO -> packetizer -> headers -> MAC is the design
// description's; the way the blocks hand over to each other is this
// implementation's.
module netgbt_link #(
  parameter int unsigned FIFO_DEPTH = 512
) (
  // lpGBT clock domain (from the lpGBT-FPGA decoder)
  input  logic         lpgbt_clk,
  input  logic         lpgbt_rst_n,
  input  logic         lpgbt_valid,
  input  logic [223:0] lpgbt_data,
  // Ethernet clock domain
  input  logic         clk,
  input  logic         rst_n,
  // register bus
  input  logic         reg_we,
  input  logic [7:0]   reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic [31:0]  reg_rdata,
  // AXI-Stream to the 10GbE MAC
  output logic [63:0]  m_axis_tdata,
  output logic [7:0]   m_axis_tkeep,
  output logic         m_axis_tvalid,
  input  logic         m_axis_tready,
  output logic         m_axis_tlast
);
  import netgbt_pkg::*;
  localparam int unsigned AVAIL_W = $clog2(FIFO_DEPTH) + 4;

  logic                 enable;
  logic [PKT_LEN_W-1:0] pkt_words, p_len;
  net_cfg_t             cfg;
  logic [31:0]          pkt_count, drop_count;

  logic [63:0]          f_tdata, p_tdata;
  logic                 f_tvalid, f_tready, p_tvalid, p_tready, p_tlast;
  logic [AVAIL_W-1:0]   avail;

  netgbt_regs u_regs (
    .clk(clk), .rst_n(rst_n),
    .we(reg_we), .addr(reg_addr), .wdata(reg_wdata), .rdata(reg_rdata),
    .enable(enable), .pkt_words(pkt_words), .cfg(cfg),
    .pkt_count(pkt_count), .drop_count(drop_count));

  lpgbt_cdc_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .lpgbt_clk(lpgbt_clk), .lpgbt_rst_n(lpgbt_rst_n),
    .lpgbt_valid(lpgbt_valid), .lpgbt_data(lpgbt_data),
    .clk(clk), .rst_n(rst_n), .wr_enable(enable),
    .m_tdata(f_tdata), .m_tvalid(f_tvalid), .m_tready(f_tready),
    .avail(avail), .drop_count(drop_count));

  packetizer #(.AVAIL_W(AVAIL_W)) u_pkt (
    .clk(clk), .rst_n(rst_n), .enable(enable), .pkt_words(pkt_words),
    .avail(avail),
    .s_tdata(f_tdata), .s_tvalid(f_tvalid), .s_tready(f_tready),
    .m_tdata(p_tdata), .m_tvalid(p_tvalid), .m_tready(p_tready),
    .m_tlast(p_tlast), .m_len(p_len), .pkt_count(pkt_count));

  udplite_tx u_net (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .s_tdata(p_tdata), .s_tvalid(p_tvalid), .s_tready(p_tready),
    .s_tlast(p_tlast), .s_len(p_len),
    .m_tdata(m_axis_tdata), .m_tkeep(m_axis_tkeep), .m_tvalid(m_axis_tvalid),
    .m_tready(m_axis_tready), .m_tlast(m_axis_tlast));
endmodule
