`timescale 1ns / 1ps
// tb_netgbt_top: end-to-end test of the whole converter with every
// parameter at its default: four links, 512-word FIFOs, 4096-byte packets.
//
// Each link has its own lpGBT source on its own 40 MHz clock (periods a
// few ps apart, as recovered clocks are) and its own MAC model. Each link
// is set up through the shared register bus with its own addresses and
// ports, and every frame is checked by tb_frame_checker. The links are
// then driven into different situations at the same time:
//   link 0: MAC always ready, full lpGBT rate: nothing may be dropped;
//   link 1: packet size changed to 3584 bytes;
//   link 2: a long MAC stall that overflows its FIFO (drops);
//   link 3: random MAC back-pressure, then disabled and re-enabled.
// The test counts each of these events and fails if one never happened.
module tb_netgbt_top;
  import netgbt_pkg::*;
  localparam int N = 4;

  logic [N-1:0] lpgbt_clk = '0, lpgbt_rst_n = '0;
  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;
  always #12.500 lpgbt_clk[0] = ~lpgbt_clk[0];
  always #12.499 lpgbt_clk[1] = ~lpgbt_clk[1];
  always #12.502 lpgbt_clk[2] = ~lpgbt_clk[2];
  always #12.497 lpgbt_clk[3] = ~lpgbt_clk[3];

  logic [N-1:0]        lpgbt_valid;
  logic [N-1:0][223:0] lpgbt_data;
  logic                reg_we = 0;
  logic [9:0]          reg_addr = '0;
  logic [31:0]         reg_wdata = '0, reg_rdata;
  logic [N-1:0][63:0]  m_axis_tdata;
  logic [N-1:0][7:0]   m_axis_tkeep;
  logic [N-1:0]        m_axis_tvalid, m_axis_tready, m_axis_tlast;

  netgbt_top dut (.*);

  bit [N-1:0] run = '0, garbage = '0;
  int sent [N];
  net_cfg_t exp_cfg [N];
  int frames [N], c_checks [N], c_failures [N], gaps [N], records [N];
  int last_len [N], stall_cycles [N], frames_448 [N];

  for (genvar i = 0; i < N; i++) begin : g_tb
    tb_lpgbt_source #(.LINK(i)) u_src (.clk(lpgbt_clk[i]), .run(run[i]),
      .garbage(garbage[i]), .valid(lpgbt_valid[i]), .data(lpgbt_data[i]),
      .sent(sent[i]));
    tb_frame_checker #(.LINK(i)) u_chk (.clk(clk), .rst_n(rst_n),
      .tdata(m_axis_tdata[i]), .tkeep(m_axis_tkeep[i]), .tvalid(m_axis_tvalid[i]),
      .tready(m_axis_tready[i]), .tlast(m_axis_tlast[i]), .cfg(exp_cfg[i]),
      .frames(frames[i]), .checks(c_checks[i]), .failures(c_failures[i]),
      .gaps(gaps[i]), .records(records[i]), .last_len_words(last_len[i]),
      .stall_cycles(stall_cycles[i]), .frames_448(frames_448[i]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(int link, logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    reg_addr = {2'(link), a}; reg_wdata = d; reg_we = 1;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic rd(int link, logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_addr = {2'(link), a};
    #0.1;
    d = reg_rdata;
  endtask

  // MAC models
  bit hold2 = 0, rand3 = 0;
  always @(posedge clk) begin
    m_axis_tready[0] <= 1'b1;
    m_axis_tready[1] <= 1'b1;
    m_axis_tready[2] <= !hold2;
    m_axis_tready[3] <= rand3 ? (($urandom % 8) != 0) : 1'b1;
  end

  logic [31:0] v;
  int f3;
  // mechanism counters
  int n_overflow = 0, n_backpressure = 0, n_size_change = 0, n_disable = 0, n_frames = 0;

  initial begin
    for (int i = 0; i < N; i++)
      exp_cfg[i] = '{src_mac: {40'h02_4E_47_00_00, 8'(i)}, dst_mac: {40'h0C_42_A1_00_00, 8'(16 + i)},
                     src_ip: 32'hC0A8_6400 + 32'(10 + i), dst_ip: 32'hC0A8_6400 + 32'(100 + i),
                     src_port: 16'(6000 + i), dst_port: 16'(7000 + i)};
    repeat (4) @(posedge clk);
    lpgbt_rst_n = '1; rst_n = 1;
    for (int i = 0; i < N; i++) begin
      wr(i, 8'h02, exp_cfg[i].src_mac[31:0]); wr(i, 8'h03, 32'(exp_cfg[i].src_mac[47:32]));
      wr(i, 8'h04, exp_cfg[i].dst_mac[31:0]); wr(i, 8'h05, 32'(exp_cfg[i].dst_mac[47:32]));
      wr(i, 8'h06, exp_cfg[i].src_ip);        wr(i, 8'h07, exp_cfg[i].dst_ip);
      wr(i, 8'h08, {exp_cfg[i].src_port, exp_cfg[i].dst_port});
    end
    for (int i = 0; i < N; i++) begin
      rd(i, 8'h08, v);
      check(v == {exp_cfg[i].src_port, exp_cfg[i].dst_port}, $sformatf("link %0d PORTS read back %h", i, v));
      wr(i, 8'h00, 32'h1);
    end
    #100ns;
    run = '1;

    #30us;
    // link 1: 3584-byte packets; link 2: long stall; link 3: back-pressure
    wr(1, 8'h01, 32'd448);
    hold2 = 1;
    rand3 = 1;
    #25us;
    hold2 = 0;
    rand3 = 0;
    #20us;
    // link 3: disable with marked words, then enable again
    run[3] = 0;
    #1us;
    wr(3, 8'h00, 32'h0);
    #4us;
    f3 = frames[3];
    garbage[3] = 1; run[3] = 1;
    #5us;
    run[3] = 0;
    #1us;
    garbage[3] = 0;
    check(frames[3] == f3, "link 3 sent a frame while disabled");
    wr(3, 8'h00, 32'h1);
    n_disable++;
    #100ns;
    run[3] = 1;
    #25us;

    // ---- results ----
    for (int i = 0; i < N; i++) begin
      logic [31:0] drops;
      rd(i, 8'h11, drops);
      check(gaps[i] == int'(drops), $sformatf("link %0d: data gap %0d, drops %0d", i, gaps[i], drops));
      if (drops > 0) n_overflow++;
      if (stall_cycles[i] > 0) n_backpressure++;
      n_frames += frames[i];
      check(frames[i] >= 10, $sformatf("link %0d only %0d frames", i, frames[i]));
      $display("link %0d: frames=%0d words=%0d drops=%0d stall_cycles=%0d frames_3584B=%0d",
               i, frames[i], records[i], drops, stall_cycles[i], frames_448[i]);
    end
    rd(0, 8'h11, v);
    check(v == 0, "link 0 dropped words at the full lpGBT rate");
    n_size_change = frames_448[1];
    check(frames_448[0] == 0 && frames_448[1] >= 5, "packet size change on link 1 only");
    check(frames[3] > f3, "link 3 did not resume");
    $display("events: frames=%0d overflow_links=%0d backpressure_links=%0d size_change_frames=%0d disable_cycles=%0d",
             n_frames, n_overflow, n_backpressure, n_size_change, n_disable);
    check(n_overflow >= 1, "no FIFO overflow happened");
    check(n_backpressure >= 2, "no MAC back-pressure happened");
    check(n_size_change >= 1, "no packet size change happened");
    check(n_disable >= 1, "no disable/enable happened");
    for (int i = 0; i < N; i++) begin
      checks += c_checks[i];
      failures += c_failures[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
