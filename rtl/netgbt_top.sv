`timescale 1ns / 1ps
// netgbt_top: the NetGBT media converter, NUM_LINKS independent channels
// that each turn one lpGBT uplink into one 10GbE stream of UDP-Lite/IPv4
// datagrams (four links on the proof-of-concept board).
//
// Each link has its own lpGBT clock and reset, as each lpGBT-FPGA decoder
// runs on its own recovered clock; all links share the Ethernet clock of
// the 10G Ethernet subsystem. The transceivers, the lpGBT-FPGA decoders,
// the Ethernet MAC/PCS and the management processor are outside this RTL:
// their signals are this module's ports. Register bus: reg_addr[7:0]
// selects a register of the link given by the upper address bits (see
// netgbt_regs for the map); reads are combinational.
// Four links and per-link conversion are from the design description; the
// shared register bus and its address split are this implementation's.
module netgbt_top #(
  parameter int unsigned NUM_LINKS  = 4,
  parameter int unsigned FIFO_DEPTH = 512,
  localparam int unsigned LSEL_W    = (NUM_LINKS > 1) ? $clog2(NUM_LINKS) : 1
) (
  // from the lpGBT-FPGA decoders
  input  logic [NUM_LINKS-1:0]          lpgbt_clk,
  input  logic [NUM_LINKS-1:0]          lpgbt_rst_n,
  input  logic [NUM_LINKS-1:0]          lpgbt_valid,
  input  logic [NUM_LINKS-1:0][223:0]   lpgbt_data,
  // Ethernet clock (156.25 MHz) and reset
  input  logic                          clk,
  input  logic                          rst_n,
  // register bus from the management side
  input  logic                          reg_we,
  input  logic [LSEL_W+7:0]             reg_addr,
  input  logic [31:0]                   reg_wdata,
  output logic [31:0]                   reg_rdata,
  // AXI-Stream to the 10GbE MACs, one per link
  output logic [NUM_LINKS-1:0][63:0]    m_axis_tdata,
  output logic [NUM_LINKS-1:0][7:0]     m_axis_tkeep,
  output logic [NUM_LINKS-1:0]          m_axis_tvalid,
  input  logic [NUM_LINKS-1:0]          m_axis_tready,
  output logic [NUM_LINKS-1:0]          m_axis_tlast
);
  logic [31:0] rdata [NUM_LINKS];
  logic [LSEL_W-1:0] lsel;
  assign lsel = reg_addr[LSEL_W+7:8];

  for (genvar i = 0; i < NUM_LINKS; i++) begin : g_link
    netgbt_link #(.FIFO_DEPTH(FIFO_DEPTH)) u_link (
      .lpgbt_clk(lpgbt_clk[i]), .lpgbt_rst_n(lpgbt_rst_n[i]),
      .lpgbt_valid(lpgbt_valid[i]), .lpgbt_data(lpgbt_data[i]),
      .clk(clk), .rst_n(rst_n),
      .reg_we(reg_we && (32'(lsel) == i)), .reg_addr(reg_addr[7:0]),
      .reg_wdata(reg_wdata), .reg_rdata(rdata[i]),
      .m_axis_tdata(m_axis_tdata[i]), .m_axis_tkeep(m_axis_tkeep[i]),
      .m_axis_tvalid(m_axis_tvalid[i]), .m_axis_tready(m_axis_tready[i]),
      .m_axis_tlast(m_axis_tlast[i]));
  end

  assign reg_rdata = (32'(lsel) < NUM_LINKS) ? rdata[lsel] : 32'h0;
endmodule
