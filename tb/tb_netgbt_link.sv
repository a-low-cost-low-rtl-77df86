`timescale 1ns / 1ps
// tb_netgbt_link: end-to-end test of one conversion channel at its
// default size (512-word FIFO, 4096-byte packets).
//
// The lpGBT source runs at the full 40 MHz word rate; the stream goes to a
// MAC model that can stall. Every frame is checked by tb_frame_checker.
// Phases: (1) register set-up and a run with the MAC always ready: no
// word may be lost and frames must come back to back (rate check);
// (2) short random MAC stalls; (3) a long MAC stall that overfills the
// FIFO: words are dropped and the drop counter must equal the gap seen in
// the data; (4) a 3584-byte packet size; (5) link disabled while the
// source sends marked words, which must never appear.
module tb_netgbt_link;
  import netgbt_pkg::*;

  logic lpgbt_clk = 0, clk = 0, lpgbt_rst_n = 0, rst_n = 0;
  always #12.5 lpgbt_clk = ~lpgbt_clk;
  always #3.2  clk = ~clk;

  logic         lpgbt_valid;
  logic [223:0] lpgbt_data;
  logic         reg_we = 0;
  logic [7:0]   reg_addr = '0;
  logic [31:0]  reg_wdata = '0, reg_rdata;
  logic [63:0]  m_axis_tdata;
  logic [7:0]   m_axis_tkeep;
  logic         m_axis_tvalid, m_axis_tready = 1, m_axis_tlast;

  netgbt_link dut (.*);

  bit run = 0, garbage = 0;
  int sent;
  tb_lpgbt_source #(.LINK(5)) u_src (.clk(lpgbt_clk), .run(run), .garbage(garbage),
    .valid(lpgbt_valid), .data(lpgbt_data), .sent(sent));

  net_cfg_t exp_cfg;
  int frames, c_checks, c_failures, gaps, records, last_len, stall_cycles, frames_448;
  tb_frame_checker #(.LINK(5)) u_chk (.clk(clk), .rst_n(rst_n),
    .tdata(m_axis_tdata), .tkeep(m_axis_tkeep), .tvalid(m_axis_tvalid),
    .tready(m_axis_tready), .tlast(m_axis_tlast), .cfg(exp_cfg),
    .frames(frames), .checks(c_checks), .failures(c_failures), .gaps(gaps),
    .records(records), .last_len_words(last_len), .stall_cycles(stall_cycles),
    .frames_448(frames_448));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    reg_addr = a; reg_wdata = d; reg_we = 1;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_addr = a;
    #0.1;
    d = reg_rdata;
  endtask

  bit random_stall = 0, hold = 0;
  always @(posedge clk)
    m_axis_tready <= hold ? 1'b0 : random_stall ? (($urandom % 8) != 0) : 1'b1;

  logic [31:0] v, drops;
  int f0;

  initial begin
    exp_cfg = '{src_mac: 48'h02_4E_47_00_00_05, dst_mac: 48'h0C_42_A1_00_00_01,
                src_ip: 32'hC0A8_6405, dst_ip: 32'hC0A8_6401,
                src_port: 16'd6005, dst_port: 16'd7005};
    repeat (4) @(posedge lpgbt_clk);
    lpgbt_rst_n = 1; rst_n = 1;
    wr(8'h02, exp_cfg.src_mac[31:0]); wr(8'h03, 32'(exp_cfg.src_mac[47:32]));
    wr(8'h04, exp_cfg.dst_mac[31:0]); wr(8'h05, 32'(exp_cfg.dst_mac[47:32]));
    wr(8'h06, exp_cfg.src_ip);        wr(8'h07, exp_cfg.dst_ip);
    wr(8'h08, {exp_cfg.src_port, exp_cfg.dst_port});
    rd(8'h01, v);
    check(v == 512, "default packet size is 512 words");
    wr(8'h00, 32'h1);
    #100ns;   // enable reaches the lpGBT clock domain through a synchronizer
    run = 1;

    // (1) full rate, MAC always ready: about 14 frames
    #50us;
    rd(8'h11, drops);
    check(drops == 0, $sformatf("%0d words dropped at full rate", drops));
    check(frames >= 12, $sformatf("only %0d frames in 50 us", frames));
    check(last_len == 512, "4096-byte payloads");

    // (2) short random stalls (7/8 ready = 8.75 Gbps of stream, below the
    // 8.96 Gbps input, so the FIFO slowly fills but does not overflow here)
    random_stall = 1;
    #10us;
    random_stall = 0;
    #10us;
    check(stall_cycles > 0, "no MAC stall happened");
    rd(8'h11, drops);
    check(drops == 0, "drops during short stalls");

    // (3) long stall: overflow
    hold = 1;
    #25us;
    hold = 0;
    #30us;
    rd(8'h11, drops);
    check(drops > 0, "no overflow happened");
    check(gaps == int'(drops), $sformatf("gap in data %0d but %0d drops reported", gaps, drops));

    // (4) 3584-byte packets
    wr(8'h01, 32'd448);
    #40us;
    check(frames_448 >= 5, $sformatf("%0d frames of 3584 bytes", frames_448));

    // (5) disable, send marked words, re-enable
    run = 0;
    #1us;
    wr(8'h00, 32'h0);
    #4us;     // a packet already started is completed
    f0 = frames;
    garbage = 1; run = 1;
    #5us;
    run = 0;
    #1us;
    garbage = 0;
    check(frames == f0, "frame sent while disabled");
    wr(8'h00, 32'h1);
    #100ns;
    run = 1;
    #20us;
    check(frames > f0, "no frames after re-enable");
    rd(8'h10, v);
    check(v == 32'(frames) || v == 32'(frames) + 1, $sformatf("PKT_COUNT %0d, frames seen %0d", v, frames));
    rd(8'h11, drops);
    check(gaps == int'(drops), $sformatf("final gap %0d drops %0d", gaps, drops));

    $display("frames=%0d records=%0d drops=%0d stall_cycles=%0d", frames, records, drops, stall_cycles);
    checks += c_checks;
    failures += c_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
