`timescale 1ns / 1ps
// tb_lpgbt_cdc_fifo: self-checking test of the mixed-width FIFO.
//
// A 40 MHz writer sends 224-bit words made by a fixed hash of their index
// and lane; a 156.25 MHz reader takes 64-bit words. A queue of 32-bit
// lanes (seven pushed per accepted word, two popped per beat) predicts
// every output word. Phases: (1) a long run at the full lpGBT word rate
// with a reader that stalls one cycle in sixteen (9.4 Gbps), which must
// lose nothing; (2) a stalled reader and an overfilled FIFO, checking the
// drop counter and the avail count; (3) writes while disabled, which must
// be ignored.
module tb_lpgbt_cdc_fifo;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned STORED = DEPTH + 2;   // words held when the reader stalls

  logic lpgbt_clk = 0, clk = 0;
  logic lpgbt_rst_n = 0, rst_n = 0;
  logic lpgbt_valid = 0;
  logic [223:0] lpgbt_data = '0;
  logic wr_enable = 0;
  logic [63:0] m_tdata;
  logic m_tvalid, m_tready = 0;
  logic [$clog2(DEPTH)+3:0] avail;
  logic [31:0] drop_count;

  always #12.5 lpgbt_clk = ~lpgbt_clk;
  always #3.2  clk = ~clk;

  lpgbt_cdc_fifo #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] lanes_q [$];
  int beats = 0;
  int widx = 0;

  function automatic logic [31:0] lane_val(int k, int i);
    return (32'(k) * 32'h9E37_79B1) ^ (32'(i) * 32'h85EB_CA6B) ^ 32'h1234_5678;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // write one word per lpGBT cycle; push to model when 'accept' is set
  task automatic write_word(bit accept);
    logic [223:0] w;
    for (int i = 0; i < 7; i++) w[32*i +: 32] = lane_val(widx, i);
    lpgbt_data  <= w;
    lpgbt_valid <= 1'b1;
    if (accept) for (int i = 0; i < 7; i++) lanes_q.push_back(lane_val(widx, i));
    widx++;
    @(posedge lpgbt_clk);
  endtask

  task automatic idle_lpgbt(int n);
    lpgbt_valid <= 1'b0;
    repeat (n) @(posedge lpgbt_clk);
  endtask

  // output checker
  always @(posedge clk) begin
    if (rst_n && m_tvalid && m_tready) begin
      beats++;
      if (lanes_q.size() < 2) begin
        check(0, "output beat with no data expected");
      end else begin
        logic [63:0] exp;
        exp[31:0]  = lanes_q.pop_front();
        exp[63:32] = lanes_q.pop_front();
        check(m_tdata == exp, $sformatf("beat %0d: got %h exp %h", beats, m_tdata, exp));
      end
    end
  end

  int stall_cnt = 0;
  bit rd_pattern = 0, rd_open = 0;
  always @(posedge clk) begin
    stall_cnt <= stall_cnt + 1;
    if (rd_pattern) m_tready <= (stall_cnt % 16) != 15;
    else            m_tready <= rd_open;
  end

  initial begin
    repeat (4) @(posedge lpgbt_clk);
    lpgbt_rst_n = 1; rst_n = 1;
    wr_enable = 1;
    repeat (4) @(posedge lpgbt_clk);

    // ---- phase 1: sustained rate ----
    rd_pattern = 1;
    @(posedge lpgbt_clk);
    for (int k = 0; k < 400; k++) write_word(1);
    idle_lpgbt(20);
    check(drop_count == 0, $sformatf("phase 1 drops %0d", drop_count));
    check(beats == 400 * 7 / 2, $sformatf("phase 1 beats %0d", beats));
    check(lanes_q.size() == 0, "phase 1 residue");

    // ---- phase 2: overflow ----
    rd_pattern = 0;
    rd_open = 0;
    repeat (4) @(posedge lpgbt_clk);
    // stored: DEPTH in memory, one in the output register, one in the gearbox
    for (int k = 0; k < STORED + 5; k++) write_word(k < STORED);
    idle_lpgbt(10);
    check(drop_count == 5, $sformatf("phase 2 drops %0d exp 5", drop_count));
    check(32'(avail) == STORED * 7 / 2, $sformatf("avail %0d exp %0d", avail, STORED * 7 / 2));
    beats = 0;
    rd_open = 1;
    repeat (400) @(posedge clk);
    check(beats == STORED * 7 / 2, $sformatf("phase 2 beats %0d", beats));
    check(32'(avail) == 0, $sformatf("avail after drain %0d", avail));
    check(lanes_q.size() == STORED * 7 % 2, "lanes left in gearbox");

    // ---- phase 3: disabled ----
    wr_enable = 0;
    repeat (4) @(posedge lpgbt_clk);
    beats = 0;
    for (int k = 0; k < 10; k++) write_word(0);
    idle_lpgbt(10);
    check(beats == 0, "disabled writes produced output");
    wr_enable = 1;
    repeat (4) @(posedge lpgbt_clk);
    write_word(1);
    idle_lpgbt(10);
    check(beats == (STORED * 7 % 2 + 7) / 2,
          $sformatf("after re-enable beats %0d exp %0d", beats, (STORED * 7 % 2 + 7) / 2));
    check(lanes_q.size() == (STORED * 7 % 2 + 7) % 2, "residue after re-enable");
    check(drop_count == 5, "drop count kept");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
