`timescale 1ns / 1ps
// tb_packet_size_sweep: throughput of one conversion channel against the
// UDP-Lite payload size, with the lpGBT side at its full rate (224 bits
// every 25 ns = 8.96 Gbps) and a MAC that never stalls.
//
// Sizes go from 56 to 8960 bytes in doublings of 56 bytes (two lpGBT
// words) plus the 8960-byte jumbo case; 3584 bytes is the size at which
// the throughput measurement of the design peaked. For each size the
// link is reset, configured and run for 200 us; frames are timed over the
// last 150 us. The channel spends N + 7 cycles of 6.4 ns on a payload of
// N words, so its capacity is N / (N + 7) * 10 Gbps; the measured payload
// rate must equal the smaller of that and 8.96 Gbps within 1 %, and words
// may be dropped only where the capacity is below the input rate. For
// 3584 bytes the packet rate must be 312,500 packets/s and the rate of
// frames without FCS (payload + 42 header bytes) 9.065 Gbps, within 0.5 %;
// the published measurement of the design at this size is 312,490 +- 54
// packets/s and 9064 +- 2 Mbps.
module tb_packet_size_sweep;
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
  logic         m_axis_tvalid, m_axis_tready, m_axis_tlast;
  assign m_axis_tready = 1'b1;

  netgbt_link dut (.*);

  bit run = 0;
  int sent;
  tb_lpgbt_source #(.LINK(1)) u_src (.clk(lpgbt_clk), .run(run), .garbage(1'b0),
    .valid(lpgbt_valid), .data(lpgbt_data), .sent(sent));

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

  // frame timing
  bit    measuring = 0;
  int    beats = 0, win_frames = 0, bad_len = 0, exp_bytes = 0;
  realtime t_first, t_last;
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      beats++;
      if (m_axis_tlast) begin
        automatic int bytes = (beats - 1) * 8 + $countones(m_axis_tkeep);
        if (bytes != exp_bytes) bad_len++;
        if (measuring) begin
          if (win_frames == 0) t_first = $realtime;
          t_last = $realtime;
          win_frames++;
        end
        beats = 0;
      end
    end
  end

  localparam int NSIZES = 9;
  int sizes [NSIZES] = '{56, 112, 224, 448, 896, 1792, 3584, 7168, 8960};
  int n_overflow = 0, n_nodrop = 0;

  initial begin
    for (int s = 0; s < NSIZES; s++) begin
      automatic int nbytes = sizes[s];
      automatic int nwords = nbytes / 8;
      automatic real cap_gbps = 10.0 * nwords / (nwords + 7);
      automatic real exp_gbps = (cap_gbps < 8.96) ? cap_gbps : 8.96;
      automatic real pay_gbps, pps;
      logic [31:0] drops;

      run = 0;
      repeat (4) @(posedge lpgbt_clk);
      lpgbt_rst_n = 0; rst_n = 0;
      repeat (4) @(posedge lpgbt_clk);
      lpgbt_rst_n = 1; rst_n = 1;
      beats = 0; win_frames = 0; bad_len = 0;
      exp_bytes = 42 + nbytes;
      wr(8'h01, 32'(nwords));
      wr(8'h00, 32'h1);
      #100ns;
      run = 1;
      #50us;
      measuring = 1;
      #150us;
      measuring = 0;
      rd(8'h11, drops);
      pay_gbps = (win_frames - 1) * nbytes * 8.0 / (t_last - t_first);   // bits per ns
      pps = (win_frames - 1) / (t_last - t_first) * 1.0e9;
      $display("payload %5d B: %0d frames, payload %.3f Gbps (expected %.3f), %.0f packets/s, frames %.3f Gbps, drops %0d",
               nbytes, win_frames, pay_gbps, exp_gbps, pps, pps * (nbytes + 42) * 8.0 / 1.0e9, drops);
      check(bad_len == 0, $sformatf("%0d B: %0d frames of wrong length", nbytes, bad_len));
      check(win_frames >= 3, $sformatf("%0d B: only %0d frames", nbytes, win_frames));
      check(pay_gbps > exp_gbps * 0.99 && pay_gbps < exp_gbps * 1.01,
            $sformatf("%0d B: %.3f Gbps, expected %.3f", nbytes, pay_gbps, exp_gbps));
      if (cap_gbps >= 8.96) begin
        check(drops == 0, $sformatf("%0d B: %0d drops with enough capacity", nbytes, drops));
        n_nodrop++;
      end else if (cap_gbps < 8.5) begin
        check(drops > 0, $sformatf("%0d B: capacity %.2f Gbps yet no drops", nbytes, cap_gbps));
        n_overflow++;
      end
      if (nbytes == 3584) begin
        check(pps > 312500 * 0.995 && pps < 312500 * 1.005, $sformatf("3584 B: %.0f packets/s", pps));
        check(pps * 3626 * 8.0 > 9.065e9 * 0.995 && pps * 3626 * 8.0 < 9.065e9 * 1.005,
              "3584 B: frame throughput not 9.065 Gbps");
      end
    end
    check(n_overflow >= 1 && n_nodrop >= 1, "sweep did not cover both regimes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
