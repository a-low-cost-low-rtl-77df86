`timescale 1ns / 1ps
// tb_frame_checker: testbench monitor for one converter output stream.
//
// Watches the AXI-Stream towards a 10GbE MAC and checks every frame on its
// own terms: the Ethernet addresses and type, the IPv4 header (version,
// length consistent with the frame, checksum, identification counting up
// by one, DF, TTL, protocol 136), the UDP-Lite header (ports, checksum
// coverage 8, checksum over pseudo header and header), tkeep only on the
// last beat, and no idle cycle inside a frame. Payload bytes of all frames
// are joined into one byte stream and cut into 28-byte lpGBT words. The
// testbench source builds each word from seven 32-bit lanes
// {LINK[3:0], index*8 + lane}; the monitor checks the lanes of every word
// and adds up the gaps in the index sequence, which must equal the words
// the converter reports as dropped. A word whose top nibble is 0xF was
// sent while the link was disabled and must never appear.
module tb_frame_checker #(
  parameter int unsigned LINK = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] tdata,
  input  logic [7:0]  tkeep,
  input  logic        tvalid,
  input  logic        tready,
  input  logic        tlast,
  input  netgbt_pkg::net_cfg_t cfg,
  output int          frames,
  output int          checks,
  output int          failures,
  output int          gaps,
  output int          records,
  output int          last_len_words,
  output int          stall_cycles,
  output int          frames_448
);
  byte unsigned fr [$];
  byte unsigned pay [$];
  int  next_ident = 0;
  int  last_idx = -1;
  bit  in_frame = 0;

  initial begin
    frames = 0; checks = 0; failures = 0; gaps = 0; records = 0;
    last_len_words = 0; stall_cycles = 0; frames_448 = 0;
  end

  function automatic logic [15:0] ocsum(byte unsigned b[$]);
    logic [31:0] s = 0;
    for (int i = 0; i < b.size(); i += 2)
      s += 32'({b[i], (i + 1 < b.size()) ? b[i+1] : 8'h00});
    while (s[31:16] != 0) s = 32'(s[15:0]) + 32'(s[31:16]);
    return s[15:0];
  endfunction

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL link %0d frame %0d: %s", LINK, frames, what);
    end
  endfunction

  function automatic logic [15:0] be16(int i);
    return {fr[i], fr[i+1]};
  endfunction
  function automatic logic [31:0] be32(int i);
    return {fr[i], fr[i+1], fr[i+2], fr[i+3]};
  endfunction

  function automatic void check_frame();
    byte unsigned ip[$], ph[$];
    int iplen;
    if (fr.size() < 42) begin
      chk(0, $sformatf("runt frame of %0d bytes", fr.size()));
      return;
    end
    chk({be32(0), be16(4)} == cfg.dst_mac, "destination MAC");
    chk({be32(6), be16(10)} == cfg.src_mac, "source MAC");
    chk(be16(12) == 16'h0800, "ethertype");
    chk(fr[14] == 8'h45 && fr[15] == 8'h00, "IPv4 version/IHL/TOS");
    iplen = int'(be16(16));
    chk(iplen + 14 == fr.size(), $sformatf("IP length %0d for frame of %0d", iplen, fr.size()));
    chk(int'(be16(18)) == (next_ident & 32'hFFFF), $sformatf("ident %0d exp %0d", be16(18), next_ident));
    next_ident++;
    chk(be16(20) == 16'h4000 && fr[22] == 8'd64 && fr[23] == 8'd136, "flags/TTL/protocol");
    for (int i = 14; i < 34; i++) ip.push_back(fr[i]);
    chk(ocsum(ip) == 16'hFFFF, "IPv4 header checksum");
    chk(be32(26) == cfg.src_ip && be32(30) == cfg.dst_ip, "IP addresses");
    chk(be16(34) == cfg.src_port && be16(36) == cfg.dst_port, "UDP ports");
    chk(be16(38) == 16'd8, "UDP-Lite checksum coverage");
    for (int i = 26; i < 34; i++) ph.push_back(fr[i]);
    ph.push_back(8'h00); ph.push_back(8'd136);
    ph.push_back(8'((iplen - 20) >> 8)); ph.push_back(8'(iplen - 20));
    for (int i = 34; i < 42; i++) ph.push_back(fr[i]);
    chk(ocsum(ph) == 16'hFFFF, "UDP-Lite checksum");
    last_len_words = (fr.size() - 42) / 8;
    chk((fr.size() - 42) % 8 == 0, "payload not whole 64-bit words");
    if (last_len_words == 448) frames_448++;
    for (int i = 42; i < fr.size(); i++) pay.push_back(fr[i]);
    // cut complete 28-byte lpGBT words
    while (pay.size() >= 28) begin
      logic [31:0] lane [7];
      int idx;
      for (int l = 0; l < 7; l++)
        lane[l] = {pay[4*l+3], pay[4*l+2], pay[4*l+1], pay[4*l]};
      for (int b = 0; b < 28; b++) void'(pay.pop_front());
      records++;
      chk(lane[0][31:28] != 4'hF, "word written while the link was disabled");
      chk(lane[0][31:28] == 4'(LINK), $sformatf("word of link %0d on link %0d", lane[0][31:28], LINK));
      idx = int'(lane[0][27:3]);
      for (int l = 0; l < 7; l++)
        chk(lane[l] == {4'(LINK), 28'(idx * 8 + l)}, $sformatf("lane %0d of word %0d: %h", l, idx, lane[l]));
      chk(idx > last_idx, $sformatf("word %0d after %0d", idx, last_idx));
      if (idx > last_idx) gaps += idx - last_idx - 1;
      last_idx = idx;
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (tvalid && !tready) stall_cycles++;
      if (in_frame && !tvalid) chk(0, "idle cycle inside a frame");
      if (tvalid && tready) begin
        in_frame = !tlast;
        chk(tlast || tkeep == 8'hFF, "partial tkeep before the last beat");
        for (int b = 0; b < 8; b++) if (tkeep[b]) fr.push_back(tdata[8*b +: 8]);
        if (tlast) begin
          check_frame();
          frames++;
          fr.delete();
        end
      end
    end
  end
endmodule
