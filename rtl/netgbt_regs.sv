`timescale 1ns / 1ps
// netgbt_regs: configuration and status registers of one conversion link.
//
// A simple synchronous register bus (word address, 32-bit data, write
// strobe, combinational read data) in the Ethernet clock domain. In the
// system it is driven by a JTAG debug core or by a soft microcontroller
// reached over a management network; both sit outside this RTL.
// Register map (word addresses):
//   0x00 CTRL       [0] enable: store lpGBT words and send packets
//   0x01 PKT_WORDS  [10:0] UDP-Lite payload per packet in 64-bit words
//                   (reset 512 = 4096 bytes)
//   0x02 SRC_MAC_LO [31:0]   0x03 SRC_MAC_HI [15:0] -> MAC bits 47:32
//   0x04 DST_MAC_LO [31:0]   0x05 DST_MAC_HI [15:0]
//   0x06 SRC_IP              0x07 DST_IP
//   0x08 PORTS      [31:16] UDP source port, [15:0] UDP destination port
//   0x10 PKT_COUNT  read only: packets sent
//   0x11 DROP_COUNT read only: lpGBT words lost because the FIFO was full
// Other addresses read as 0 and ignore writes. A write takes effect on the
// next clock edge. That the converter is set up through registers is from
// the design description; the map and the reset values are choices of
// this implementation.
module netgbt_regs #(
  parameter netgbt_pkg::net_cfg_t DEF_CFG = '{
    src_mac:  48'h02_00_00_00_00_01,
    dst_mac:  48'h02_00_00_00_00_FE,
    src_ip:   32'hC0A8_010A,        // 192.168.1.10
    dst_ip:   32'hC0A8_0101,        // 192.168.1.1
    src_port: 16'd50000,
    dst_port: 16'd50000},
  parameter int unsigned DEF_PKT_WORDS = netgbt_pkg::DEF_PKT_WORDS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [7:0]           addr,
  input  logic [31:0]          wdata,
  output logic [31:0]          rdata,
  // configuration out
  output logic                 enable,
  output logic [netgbt_pkg::PKT_LEN_W-1:0] pkt_words,
  output netgbt_pkg::net_cfg_t cfg,
  // status in
  input  logic [31:0]          pkt_count,
  input  logic [31:0]          drop_count
);
  import netgbt_pkg::*;

  localparam logic [7:0] A_CTRL = 8'h00, A_PKT_WORDS = 8'h01,
                         A_SMAC_LO = 8'h02, A_SMAC_HI = 8'h03,
                         A_DMAC_LO = 8'h04, A_DMAC_HI = 8'h05,
                         A_SIP = 8'h06, A_DIP = 8'h07, A_PORTS = 8'h08,
                         A_PKT_CNT = 8'h10, A_DROP_CNT = 8'h11;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable    <= 1'b0;
      pkt_words <= PKT_LEN_W'(DEF_PKT_WORDS);
      cfg       <= DEF_CFG;
    end else if (we) begin
      case (addr)
        A_CTRL:      enable             <= wdata[0];
        A_PKT_WORDS: pkt_words          <= wdata[PKT_LEN_W-1:0];
        A_SMAC_LO:   cfg.src_mac[31:0]  <= wdata;
        A_SMAC_HI:   cfg.src_mac[47:32] <= wdata[15:0];
        A_DMAC_LO:   cfg.dst_mac[31:0]  <= wdata;
        A_DMAC_HI:   cfg.dst_mac[47:32] <= wdata[15:0];
        A_SIP:       cfg.src_ip         <= wdata;
        A_DIP:       cfg.dst_ip         <= wdata;
        A_PORTS:     {cfg.src_port, cfg.dst_port} <= wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    case (addr)
      A_CTRL:      rdata = {31'h0, enable};
      A_PKT_WORDS: rdata = 32'(pkt_words);
      A_SMAC_LO:   rdata = cfg.src_mac[31:0];
      A_SMAC_HI:   rdata = {16'h0, cfg.src_mac[47:32]};
      A_DMAC_LO:   rdata = cfg.dst_mac[31:0];
      A_DMAC_HI:   rdata = {16'h0, cfg.dst_mac[47:32]};
      A_SIP:       rdata = cfg.src_ip;
      A_DIP:       rdata = cfg.dst_ip;
      A_PORTS:     rdata = {cfg.src_port, cfg.dst_port};
      A_PKT_CNT:   rdata = pkt_count;
      A_DROP_CNT:  rdata = drop_count;
      default:     rdata = '0;
    endcase
  end
endmodule
