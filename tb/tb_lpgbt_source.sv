`timescale 1ns / 1ps
// tb_lpgbt_source: testbench stand-in for the lpGBT-FPGA decoder output.
//
// While run is set it delivers one 224-bit word per lpGBT clock, as the
// FEC5 uplink does, made of seven 32-bit lanes {LINK[3:0], index*8 + lane}
// with the index counting words sent. While garbage is set as well, the
// words carry 0xF in the top nibble and do not advance the index; these
// are meant to be sent while the link is disabled. sent counts real words.
module tb_lpgbt_source #(
  parameter int unsigned LINK = 0
) (
  input  logic         clk,
  input  logic         run,
  input  logic         garbage,
  output logic         valid,
  output logic [223:0] data,
  output int           sent
);
  int idx = 0;
  initial begin
    valid = 0; data = '0; sent = 0;
  end
  always @(posedge clk) begin
    valid <= run;
    if (run) begin
      for (int l = 0; l < 7; l++)
        data[32*l +: 32] <= garbage ? {4'hF, 28'(l)} : {4'(LINK), 28'(idx * 8 + l)};
      if (!garbage) begin
        idx  <= idx + 1;
        sent <= sent + 1;
      end
    end
  end
endmodule
