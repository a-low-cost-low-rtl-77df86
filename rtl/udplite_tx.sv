`timescale 1ns / 1ps
// udplite_tx: network stack of the converter. Puts an Ethernet II, an
// IPv4 and a UDP-Lite header in front of every packet of 64-bit words.
//
// When the first word of a packet is offered, the 42-byte header is built
// from the link configuration (MAC and IP addresses, UDP ports), the
// packet length s_len (in 64-bit words, held for the whole packet) and a
// per-packet IPv4 identification that counts up from 0. Both checksums
// are computed here: the IPv4 header checksum, and the UDP-Lite checksum
// with a checksum coverage of 8, which covers the pseudo header and the
// UDP-Lite header but not the payload, so no pass over the data is needed.
// IPv4 header: version 4, IHL 5, TOS 0, DF set, TTL 64, protocol 136.
//
// Timing: one cycle to build the header, five header beats, then the
// payload shifted by two bytes (42 = 5*8 + 2): each output beat carries
// the last two bytes of the previous input word and the first six of the
// current one, and one final beat with m_tkeep = 8'h03 carries the last
// two payload bytes. A packet of N words leaves as N + 6 beats, back to
// back when m_tready stays high. Byte 0 of a beat is tdata[7:0], as on
// the AMD 10G Ethernet MAC AXI-Stream interface; the MAC adds preamble,
// frame check sequence and inter-frame gap.
// Prepending UDP-Lite, IP and Ethernet headers is from the design
// description; the header field values listed above, the fixed checksum
// coverage and the beat layout are choices of this implementation.
module udplite_tx #(
  parameter int unsigned LEN_W = netgbt_pkg::PKT_LEN_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  netgbt_pkg::net_cfg_t cfg,
  // payload packets
  input  logic [63:0]          s_tdata,
  input  logic                 s_tvalid,
  output logic                 s_tready,
  input  logic                 s_tlast,
  input  logic [LEN_W-1:0]     s_len,
  // Ethernet frames to the MAC
  output logic [63:0]          m_tdata,
  output logic [7:0]           m_tkeep,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic                 m_tlast
);
  import netgbt_pkg::*;

  typedef enum logic [1:0] {IDLE, HDR, PAY, TAIL} state_t;
  state_t state;

  logic [HDR_B*8-1:0] hdr_new, hdr_q;    // byte i at [8*i +: 8]
  logic [15:0]        ident;
  logic [2:0]         beat;
  logic [15:0]        carry;
  logic               xfer;

  // ---------------- header construction ----------------
  logic [15:0] pay_bytes, udp_len, ip_len, ip_csum, udp_csum;
  always_comb begin
    pay_bytes = 16'(s_len) << 3;
    udp_len   = pay_bytes + 16'(UDP_HDR_B);
    ip_len    = udp_len + 16'(IP_HDR_B);
    ip_csum   = ipv4_checksum(ip_len, ident, cfg.src_ip, cfg.dst_ip);
    udp_csum  = udplite_checksum(cfg.src_ip, cfg.dst_ip, udp_len,
                                 cfg.src_port, cfg.dst_port);
    // Fields in network byte order: the first byte sent is the most
    // significant one; the lowest bits of hdr_new are sent first.
    hdr_new = { // written last byte first
      udp_csum[7:0], udp_csum[15:8],                    // 40-41 checksum
      8'd8, 8'd0,                                       // 38-39 coverage
      cfg.dst_port[7:0], cfg.dst_port[15:8],            // 36-37
      cfg.src_port[7:0], cfg.src_port[15:8],            // 34-35
      cfg.dst_ip[7:0], cfg.dst_ip[15:8], cfg.dst_ip[23:16], cfg.dst_ip[31:24], // 30-33
      cfg.src_ip[7:0], cfg.src_ip[15:8], cfg.src_ip[23:16], cfg.src_ip[31:24], // 26-29
      ip_csum[7:0], ip_csum[15:8],                      // 24-25
      IP_PROTO_UDPLITE, IP_TTL,                         // 22-23
      8'h00, 8'h40,                                     // 20-21 flags DF
      ident[7:0], ident[15:8],                          // 18-19
      ip_len[7:0], ip_len[15:8],                        // 16-17
      8'h00, 8'h45,                                     // 14-15
      ETHERTYPE_IPV4[7:0], ETHERTYPE_IPV4[15:8],        // 12-13
      cfg.src_mac[7:0], cfg.src_mac[15:8], cfg.src_mac[23:16],
      cfg.src_mac[31:24], cfg.src_mac[39:32], cfg.src_mac[47:40], // 6-11
      cfg.dst_mac[7:0], cfg.dst_mac[15:8], cfg.dst_mac[23:16],
      cfg.dst_mac[31:24], cfg.dst_mac[39:32], cfg.dst_mac[47:40]  // 0-5
    };
  end

  // ---------------- output mux ----------------
  always_comb begin
    m_tdata  = '0;
    m_tkeep  = 8'hFF;
    m_tvalid = 1'b0;
    m_tlast  = 1'b0;
    s_tready = 1'b0;
    case (state)
      HDR: begin
        m_tdata  = hdr_q[64*beat +: 64];
        m_tvalid = 1'b1;
      end
      PAY: begin
        m_tdata  = {s_tdata[47:0], carry};
        m_tvalid = s_tvalid;
        s_tready = m_tready;
      end
      TAIL: begin
        m_tdata  = {48'h0, carry};
        m_tkeep  = 8'h03;
        m_tvalid = 1'b1;
        m_tlast  = 1'b1;
      end
      default: ;
    endcase
  end

  assign xfer = m_tvalid && m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      hdr_q <= '0;
      ident <= '0;
      beat  <= '0;
      carry <= '0;
    end else begin
      case (state)
        IDLE: if (s_tvalid) begin
          hdr_q <= hdr_new;
          beat  <= '0;
          state <= HDR;
        end
        HDR: if (xfer) begin
          beat <= beat + 1'b1;
          if (beat == 3'd4) begin
            carry <= hdr_q[8*40 +: 16];
            state <= PAY;
          end
        end
        PAY: if (xfer) begin
          carry <= s_tdata[63:48];
          if (s_tlast) state <= TAIL;
        end
        TAIL: if (xfer) begin
          ident <= ident + 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // AXI-Stream rule: an offered beat stays until it is taken.
  ap_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_tlast)));
endmodule
