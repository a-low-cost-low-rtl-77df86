`timescale 1ns / 1ps
// packetizer: cuts the continuous 64-bit word stream from the mixed-width
// FIFO into packets of a configured number of words.
//
// A packet is started only when enable is set and the FIFO reports at
// least that many words present (avail), so once started the packet flows
// without a gap: the 10GbE MAC needs each frame's beats back to back.
// The length is latched at the start of the packet and shown on m_len for
// the network stack, which needs it for the IP and UDP-Lite length fields
// before the first word is sent. m_tlast marks the last word. A length of
// 0 is treated as 1 and lengths above MAX_WORDS are cut to MAX_WORDS.
// Clearing enable stops new packets; a packet already started completes.
// Interface: AXI-Stream style valid/ready on both sides; s_tready follows
// m_tready combinationally while a packet is being sent. Throughput is one
// word per cycle inside a packet and one idle cycle between packets.
// Reading the FIFO in chunks to form large packets is from the design
// description; the start rule and the length handling are this
// implementation's choices.
module packetizer #(
  parameter int unsigned LEN_W     = netgbt_pkg::PKT_LEN_W,
  parameter int unsigned AVAIL_W   = 13,
  parameter int unsigned MAX_WORDS = netgbt_pkg::MAX_PKT_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,
  input  logic [LEN_W-1:0]   pkt_words,
  input  logic [AVAIL_W-1:0] avail,
  // from the FIFO
  input  logic [63:0]        s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  // to the network stack
  output logic [63:0]        m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               m_tlast,
  output logic [LEN_W-1:0]   m_len,
  output logic [31:0]        pkt_count
);
  typedef enum logic {IDLE, SEND} state_t;
  state_t           state;
  logic [LEN_W-1:0] len_req, len, cnt;
  logic             xfer;

  always_comb begin
    len_req = pkt_words;
    if (len_req == '0) len_req = LEN_W'(1);
    if (32'(len_req) > MAX_WORDS) len_req = LEN_W'(MAX_WORDS);
  end

  assign m_tdata  = s_tdata;
  assign m_tvalid = (state == SEND) && s_tvalid;
  assign s_tready = (state == SEND) && m_tready;
  assign m_tlast  = (cnt == len - 1'b1);
  assign m_len    = len;
  assign xfer     = m_tvalid && m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      len       <= LEN_W'(1);
      cnt       <= '0;
      pkt_count <= '0;
    end else begin
      case (state)
        IDLE: if (enable && 32'(avail) >= 32'(len_req)) begin
          state <= SEND;
          len   <= len_req;
          cnt   <= '0;
        end
        SEND: if (xfer) begin
          cnt <= cnt + 1'b1;
          if (m_tlast) begin
            state     <= IDLE;
            pkt_count <= pkt_count + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Words were counted before the packet started, so none may be missing.
  ap_no_underrun: assert property (@(posedge clk) disable iff (!rst_n)
    (state == SEND) |-> s_tvalid);
endmodule
