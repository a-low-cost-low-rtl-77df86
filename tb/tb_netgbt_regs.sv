`timescale 1ns / 1ps
// tb_netgbt_regs: self-checking test of the link register file.
//
// Checks the reset values, writes every register with a fresh pattern and
// reads it back, checks that each write lands in the right field of the
// configuration outputs and nowhere else, that the two status registers
// show their inputs and ignore writes, and that unmapped addresses read 0.
module tb_netgbt_regs;
  import netgbt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;

  logic        we = 0;
  logic [7:0]  addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic        enable;
  logic [PKT_LEN_W-1:0] pkt_words;
  net_cfg_t    cfg;
  logic [31:0] pkt_count = 32'h1111_2222, drop_count = 32'h3333_4444;

  netgbt_regs dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    addr = a; wdata = d; we = 1;
    @(negedge clk);
    we = 0;
  endtask

  task automatic chk_rd(logic [7:0] a, logic [31:0] exp, string what);
    @(negedge clk);
    addr = a;
    #0.1;
    check(rdata == exp, $sformatf("%s: read %h exp %h", what, rdata, exp));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset values
    check(enable == 0, "enable reset");
    check(pkt_words == 512, "pkt_words reset 512 (4096 bytes)");
    check(cfg.src_mac == 48'h02_00_00_00_00_01 && cfg.dst_port == 16'd50000, "cfg reset");

    wr(8'h00, 32'hFFFF_FFFF);
    check(enable == 1, "enable set");
    chk_rd(8'h00, 32'h1, "CTRL read");
    wr(8'h00, 32'h0);
    check(enable == 0, "enable cleared");
    wr(8'h01, 32'd448);
    check(pkt_words == 448, "PKT_WORDS");
    chk_rd(8'h01, 32'd448, "PKT_WORDS read");
    wr(8'h02, 32'hDEAD_BEEF);
    wr(8'h03, 32'hFFFF_0A0B);
    check(cfg.src_mac == 48'h0A0B_DEAD_BEEF, $sformatf("src_mac %h", cfg.src_mac));
    chk_rd(8'h03, 32'h0000_0A0B, "SRC_MAC_HI read");
    wr(8'h04, 32'h0102_0304);
    wr(8'h05, 32'h0000_B8CE);
    check(cfg.dst_mac == 48'hB8CE_0102_0304, $sformatf("dst_mac %h", cfg.dst_mac));
    chk_rd(8'h04, 32'h0102_0304, "DST_MAC_LO read");
    wr(8'h06, 32'h0A00_0001);
    wr(8'h07, 32'h0A00_0002);
    check(cfg.src_ip == 32'h0A00_0001 && cfg.dst_ip == 32'h0A00_0002, "IPs");
    chk_rd(8'h07, 32'h0A00_0002, "DST_IP read");
    wr(8'h08, 32'h1234_ABCD);
    check(cfg.src_port == 16'h1234 && cfg.dst_port == 16'hABCD, "ports");
    chk_rd(8'h08, 32'h1234_ABCD, "PORTS read");
    check(cfg.src_mac == 48'h0A0B_DEAD_BEEF, "src_mac unchanged by later writes");
    chk_rd(8'h10, 32'h1111_2222, "PKT_COUNT");
    chk_rd(8'h11, 32'h3333_4444, "DROP_COUNT");
    wr(8'h10, 32'h0);
    chk_rd(8'h10, 32'h1111_2222, "PKT_COUNT read only");
    wr(8'h20, 32'hFFFF_FFFF);
    chk_rd(8'h20, 32'h0, "unmapped reads 0");
    check(enable == 0 && pkt_words == 448, "unmapped write changed nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
