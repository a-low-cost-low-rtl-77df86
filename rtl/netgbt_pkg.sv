`timescale 1ns / 1ps
// netgbt_pkg: types, constants and helper functions shared by the lpGBT to
// 10GbE media converter.
//
// The converter turns the 224-bit user words of an lpGBT uplink (FEC5,
// 10.24 Gbps, one word per 40 MHz clock) into UDP-Lite / IPv4 / Ethernet
// frames on a 64-bit, 156.25 MHz AXI-Stream interface feeding a 10GbE MAC.
// The 224-bit width, the two clock rates, the choice of UDP-Lite over IPv4
// over Ethernet and the 4 kB packet size come from the design description;
// the register layout, the 64-bit stream width, header field values such
// as TTL and the byte order inside a 224-bit word are choices of this
// implementation.
package netgbt_pkg;

  // lpGBT-FPGA FEC5 uplink user word width and Ethernet stream width.
  localparam int unsigned LPGBT_W = 224;
  localparam int unsigned AXIS_W  = 64;

  // Header sizes in bytes: Ethernet II, IPv4 without options, UDP-Lite.
  localparam int unsigned ETH_HDR_B = 14;
  localparam int unsigned IP_HDR_B  = 20;
  localparam int unsigned UDP_HDR_B = 8;
  localparam int unsigned HDR_B     = ETH_HDR_B + IP_HDR_B + UDP_HDR_B; // 42

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDPLITE = 8'd136;   // IANA number of UDP-Lite
  localparam logic [7:0]  IP_TTL = 8'd64;

  // Largest UDP-Lite payload in 64-bit words for a 9000-byte MTU:
  // (9000 - 20 - 8) / 8 = 1121.
  localparam int unsigned MAX_PKT_WORDS = 1121;
  // Default payload: 4096 bytes = 512 words.
  localparam int unsigned DEF_PKT_WORDS = 512;
  localparam int unsigned PKT_LEN_W = 11;

  // Per-link configuration, written through the register file.
  typedef struct packed {
    logic [47:0] src_mac;
    logic [47:0] dst_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
  } net_cfg_t;

  // Binary <-> Gray code for pointers and counters that cross clocks.
  function automatic logic [31:0] bin2gray(input logic [31:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [31:0] gray2bin(input logic [31:0] g);
    logic [31:0] b;
    b[31] = g[31];
    for (int i = 30; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // One's-complement add of a 16-bit word into a running 32-bit sum.
  function automatic logic [15:0] csum_fold(input logic [31:0] s);
    logic [31:0] t;
    t = {16'h0, s[15:0]} + {16'h0, s[31:16]};
    t = {16'h0, t[15:0]} + {16'h0, t[31:16]};
    return t[15:0];
  endfunction

  // IPv4 header checksum (RFC 791) of the header this design sends:
  // version 4, IHL 5, TOS 0, given total length and identification,
  // flags DF, fragment offset 0, TTL, protocol UDP-Lite.
  function automatic logic [15:0] ipv4_checksum(input logic [15:0] total_len,
                                                input logic [15:0] ident,
                                                input logic [31:0] src_ip,
                                                input logic [31:0] dst_ip);
    logic [31:0] s;
    s = 32'h4500 + {16'h0, total_len} + {16'h0, ident} + 32'h4000
      + {16'h0, IP_TTL, IP_PROTO_UDPLITE}
      + {16'h0, src_ip[31:16]} + {16'h0, src_ip[15:0]}
      + {16'h0, dst_ip[31:16]} + {16'h0, dst_ip[15:0]};
    return ~csum_fold(s);
  endfunction

  // UDP-Lite checksum (RFC 3828) with a checksum coverage of 8, i.e. the
  // pseudo header and the UDP-Lite header only; the payload is not covered.
  // The pseudo-header length field is the full UDP-Lite length.
  function automatic logic [15:0] udplite_checksum(input logic [31:0] src_ip,
                                                   input logic [31:0] dst_ip,
                                                   input logic [15:0] udp_len,
                                                   input logic [15:0] src_port,
                                                   input logic [15:0] dst_port);
    logic [31:0] s;
    logic [15:0] c;
    s = {16'h0, src_ip[31:16]} + {16'h0, src_ip[15:0]}
      + {16'h0, dst_ip[31:16]} + {16'h0, dst_ip[15:0]}
      + {24'h0, IP_PROTO_UDPLITE} + {16'h0, udp_len}
      + {16'h0, src_port} + {16'h0, dst_port} + 32'd8;
    c = ~csum_fold(s);
    // A computed zero is sent as all ones (zero is not allowed in UDP-Lite).
    return (c == 16'h0) ? 16'hFFFF : c;
  endfunction

endpackage
