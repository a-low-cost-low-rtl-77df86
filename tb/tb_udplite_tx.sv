`timescale 1ns / 1ps
// tb_udplite_tx: self-checking test of the Ethernet / IPv4 / UDP-Lite
// header inserter.
//
// For each packet the testbench builds the expected frame byte by byte:
// the 42-byte header with both checksums computed here by a generic
// 16-bit one's-complement sum over the header bytes (and, for UDP-Lite,
// over the pseudo header), followed by the payload. The frame the module
// sends is collected from tdata/tkeep and compared byte for byte. Packets
// of several lengths are sent with random stalls on both sides, and once
// with none, where the frame must take exactly N + 6 cycles. The IPv4
// identification must count up from 0. A checksum over the received IPv4
// header must also come out as 0xFFFF.
module tb_udplite_tx;
  import netgbt_pkg::*;
  localparam int unsigned LEN_W = 11;

  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;

  net_cfg_t         cfg;
  logic [63:0]      s_tdata = '0, m_tdata;
  logic             s_tvalid = 0, s_tready, s_tlast = 0;
  logic [LEN_W-1:0] s_len = '0;
  logic [7:0]       m_tkeep;
  logic             m_tvalid, m_tready = 1, m_tlast;

  udplite_tx #(.LEN_W(LEN_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] ocsum(byte unsigned b[$]);
    logic [31:0] s = 0;
    for (int i = 0; i < b.size(); i += 2)
      s += 32'({b[i], (i + 1 < b.size()) ? b[i+1] : 8'h00});
    while (s[31:16] != 0) s = 32'(s[15:0]) + 32'(s[31:16]);
    return s[15:0];
  endfunction

  function automatic void put16(ref byte unsigned q[$], input logic [15:0] v);
    q.push_back(v[15:8]); q.push_back(v[7:0]);
  endfunction
  function automatic void put32(ref byte unsigned q[$], input logic [31:0] v);
    put16(q, v[31:16]); put16(q, v[15:0]);
  endfunction

  byte unsigned exp_q [$];
  byte unsigned got_q [$];

  function automatic void expect_frame(int nwords, int ident, int seed);
    byte unsigned ip[$], udp[$], ph[$];
    logic [15:0] c;
    int udp_len = 8 + 8 * nwords;
    for (int i = 5; i >= 0; i--) exp_q.push_back(cfg.dst_mac[8*i +: 8]);
    for (int i = 5; i >= 0; i--) exp_q.push_back(cfg.src_mac[8*i +: 8]);
    put16(exp_q, 16'h0800);
    ip = {8'h45, 8'h00};
    put16(ip, 16'(20 + udp_len)); put16(ip, 16'(ident));
    ip.push_back(8'h40); ip.push_back(8'h00); ip.push_back(8'd64); ip.push_back(8'd136);
    put16(ip, 16'h0000); put32(ip, cfg.src_ip); put32(ip, cfg.dst_ip);
    c = ~ocsum(ip);
    ip[10] = c[15:8]; ip[11] = c[7:0];
    foreach (ip[i]) exp_q.push_back(ip[i]);
    put16(udp, cfg.src_port); put16(udp, cfg.dst_port); put16(udp, 16'd8); put16(udp, 16'h0);
    put32(ph, cfg.src_ip); put32(ph, cfg.dst_ip); ph.push_back(8'h00); ph.push_back(8'd136);
    put16(ph, 16'(udp_len));
    foreach (udp[i]) ph.push_back(udp[i]);
    c = ~ocsum(ph);
    if (c == 0) c = 16'hFFFF;
    udp[6] = c[15:8]; udp[7] = c[7:0];
    foreach (udp[i]) exp_q.push_back(udp[i]);
    for (int w = 0; w < nwords; w++)
      for (int b = 0; b < 8; b++) exp_q.push_back(8'((seed * 131 + w * 8 + b) & 8'hFF));
  endfunction

  bit stall_in = 0, stall_out = 0;
  int beats = 0, frames = 0, first_cyc = 0, cyc = 0, last_frame_cycles = 0;

  // sink: collect bytes, compare at tlast
  always @(posedge clk) begin
    cyc <= cyc + 1;
    m_tready <= stall_out ? (($urandom % 3) != 0) : 1'b1;
    if (rst_n && m_tvalid && m_tready) begin
      if (beats == 0) first_cyc = cyc;
      beats++;
      for (int b = 0; b < 8; b++) if (m_tkeep[b]) got_q.push_back(m_tdata[8*b +: 8]);
      check(m_tlast || m_tkeep == 8'hFF, "partial tkeep before the last beat");
      if (m_tlast) begin
        byte unsigned iph[$];
        last_frame_cycles = cyc - first_cyc + 1;
        check(got_q.size() == exp_q.size(),
              $sformatf("frame %0d: %0d bytes exp %0d", frames, got_q.size(), exp_q.size()));
        for (int i = 0; i < got_q.size() && i < exp_q.size(); i++)
          if (got_q[i] != exp_q[i]) begin
            check(0, $sformatf("frame %0d byte %0d got %h exp %h", frames, i, got_q[i], exp_q[i]));
            break;
          end
        checks++;
        for (int i = 14; i < 34; i++) iph.push_back(got_q[i]);
        check(ocsum(iph) == 16'hFFFF, "received IPv4 header checksum does not verify");
        got_q.delete();
        exp_q.delete();
        beats = 0;
        frames++;
      end
    end
  end

  // source: obeys the AXI-Stream rule (a beat offered stays until taken)
  int  src_n = 0, src_w = 0, src_seed = 0;
  bit  src_busy = 0;
  function automatic logic [63:0] src_word(int seed, int w);
    logic [63:0] d;
    for (int b = 0; b < 8; b++) d[8*b +: 8] = 8'((seed * 131 + w * 8 + b) & 8'hFF);
    return d;
  endfunction

  always @(posedge clk) begin
    automatic int w = src_w;
    if (s_tvalid && s_tready) w++;
    if (!(s_tvalid && !s_tready)) begin
      if (src_busy && w < src_n) begin
        s_tdata  <= src_word(src_seed, w);
        s_tlast  <= (w == src_n - 1);
        s_tvalid <= stall_in ? (($urandom % 4) != 0) : 1'b1;
      end else begin
        s_tvalid <= 1'b0;
        s_tlast  <= 1'b0;
        if (src_busy) src_busy <= 1'b0;
      end
    end
    src_w <= w;
  end

  task automatic send_packet(int nwords, int seed);
    @(negedge clk);
    s_len    = LEN_W'(nwords);
    src_n    = nwords;
    src_seed = seed;
    src_w    = 0;
    src_busy = 1;
    @(negedge clk);
    wait (!src_busy);
  endtask

  initial begin
    cfg = '{src_mac: 48'h02_11_22_33_44_55, dst_mac: 48'hB8_CE_F6_01_02_03,
            src_ip: 32'h0A00_0001, dst_ip: 32'h0A00_00FE,
            src_port: 16'd4660, dst_port: 16'd50001};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // no stalls: exact beat count and cycle count
    expect_frame(4, 0, 1);
    send_packet(4, 1);
    wait (frames == 1);
    check(last_frame_cycles == 4 + 6, $sformatf("frame took %0d cycles exp 10", last_frame_cycles));
    expect_frame(512, 1, 2);
    send_packet(512, 2);
    wait (frames == 2);
    check(last_frame_cycles == 512 + 6, $sformatf("4096-byte payload frame took %0d cycles exp 518", last_frame_cycles));

    // random stalls, assorted lengths
    stall_in = 1; stall_out = 1;
    for (int p = 0; p < 12; p++) begin
      automatic int n = (p == 0) ? 1 : 1 + ($urandom % 40);
      if (p == 5) begin
        cfg.dst_port = 16'hFFFF;
        cfg.src_ip   = 32'hFFFF_FFFF;
      end
      repeat (2) @(posedge clk);
      expect_frame(n, 2 + p, 3 + p);
      send_packet(n, 3 + p);
      wait (frames == 3 + p);
    end
    repeat (20) @(posedge clk);
    check(frames == 14, $sformatf("frames %0d exp 14", frames));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
