`timescale 1ns / 1ps
// tb_packetizer: self-checking test of the packetizer.
//
// A model FIFO in the testbench holds numbered 64-bit words and reports
// its fill level as avail. The test checks that a packet starts only when
// the configured number of words is present, that its words come out in
// order with m_tlast on the last one and m_len equal to the length, that
// a packet moves one word per cycle when the sink is always ready (the
// stream rate the 10GbE MAC needs), that random sink stalls lose or
// repeat nothing, that lengths of 0 and above MAX_WORDS are clamped, that
// clearing enable stops new packets, and that pkt_count counts them.
module tb_packetizer;
  localparam int unsigned MAX_WORDS = 20;
  localparam int unsigned LEN_W = 11, AVAIL_W = 13;

  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;

  logic               enable = 0;
  logic [LEN_W-1:0]   pkt_words = 8;
  logic [AVAIL_W-1:0] avail;
  logic [63:0]        s_tdata, m_tdata;
  logic               s_tvalid, s_tready, m_tvalid, m_tready = 1, m_tlast;
  logic [LEN_W-1:0]   m_len;
  logic [31:0]        pkt_count;

  packetizer #(.LEN_W(LEN_W), .AVAIL_W(AVAIL_W), .MAX_WORDS(MAX_WORDS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model FIFO
  logic [63:0] src_q [$];
  int next_word = 0;
  assign s_tvalid = src_q.size() > 0;
  assign s_tdata  = s_tvalid ? src_q[0] : 64'h0;
  assign avail    = AVAIL_W'(src_q.size());

  task automatic add_words(int n);
    for (int i = 0; i < n; i++) begin
      src_q.push_back({32'hC0DE_0000, 32'(next_word)});
      next_word++;
    end
  endtask

  // sink
  int exp_word = 0, in_pkt = 0, pkts = 0, exp_len = 8;
  int start_cycle = 0, cyc = 0;
  bit random_stall = 0, check_rate = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (random_stall) m_tready <= ($urandom % 4) != 0;
    else m_tready <= 1'b1;
    if (rst_n && s_tvalid && s_tready) void'(src_q.pop_front());
    if (rst_n && m_tvalid && m_tready) begin
      if (in_pkt == 0) start_cycle = cyc;
      check(m_tdata == {32'hC0DE_0000, 32'(exp_word)},
            $sformatf("word %0d got %h", exp_word, m_tdata));
      check(32'(m_len) == exp_len, $sformatf("m_len %0d exp %0d", m_len, exp_len));
      check(m_tlast == (in_pkt == exp_len - 1),
            $sformatf("tlast %b at word %0d of %0d", m_tlast, in_pkt, exp_len));
      exp_word++;
      in_pkt++;
      if (m_tlast) begin
        if (check_rate)
          check(cyc - start_cycle == exp_len - 1,
                $sformatf("packet took %0d cycles for %0d words", cyc - start_cycle + 1, exp_len));
        in_pkt = 0;
        pkts++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // not enabled: no packet even with data
    add_words(30);
    repeat (20) @(posedge clk);
    check(pkts == 0 && !m_tvalid, "packet while disabled");

    // enabled, 8-word packets, sink always ready: 3 packets, 6 words stay
    check_rate = 1;
    enable = 1;
    repeat (60) @(posedge clk);
    check(pkts == 3, $sformatf("pkts %0d exp 3", pkts));
    check(src_q.size() == 6, $sformatf("left %0d exp 6 (below one packet)", src_q.size()));
    add_words(1);
    repeat (10) @(posedge clk);
    check(pkts == 3, "started with 7 of 8 words");
    add_words(1);
    repeat (20) @(posedge clk);
    check(pkts == 4, "did not start with 8 words");

    // random sink stalls
    check_rate = 0;
    random_stall = 1;
    add_words(8 * 20);
    repeat (600) @(posedge clk);
    check(pkts == 24, $sformatf("pkts %0d exp 24 after stalls", pkts));

    // length clamping: 0 -> 1, 50 -> MAX_WORDS
    random_stall = 0;
    enable = 0;
    repeat (5) @(posedge clk);
    pkt_words = 0; exp_len = 1;
    enable = 1;
    add_words(3);
    repeat (20) @(posedge clk);
    check(pkts == 27, $sformatf("pkts %0d exp 27 with length 0", pkts));
    enable = 0;
    repeat (5) @(posedge clk);
    pkt_words = 50; exp_len = MAX_WORDS;
    enable = 1;
    add_words(2 * MAX_WORDS);
    repeat (100) @(posedge clk);
    check(pkts == 29, $sformatf("pkts %0d exp 29 with clamped length", pkts));
    check(pkt_count == 29, $sformatf("pkt_count %0d", pkt_count));
    check(src_q.size() == 0, "words left");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
