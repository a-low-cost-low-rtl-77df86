`timescale 1ns / 1ps
// gearbox_224_64: width converter from 224-bit lpGBT words to 64-bit
// stream words, in one clock domain.
//
// Seven 32-bit lanes of an input word are appended to a 9-lane (288-bit)
// accumulator; every output beat takes the two lowest lanes. Two input
// words therefore become exactly seven output beats. Bits leave in order:
// input bits [63:0] form the first output beat, and so on, so the byte in
// bits [7:0] of a 224-bit word is the first one on the wire.
// A new word is accepted in the same cycle as an output beat whenever it
// fits, so the output can run one beat per cycle indefinitely (64 bits per
// cycle against at most 224 bits per input word). Both sides use
// valid/ready; in_ready depends combinationally on out_ready.
// lanes tells how many 32-bit lanes are held (0..9), so the owner can work
// out how many output beats are already buffered.
// The 224-bit input width is from the design description; the 64-bit
// output width and the lane scheme are this implementation's.
module gearbox_224_64 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [223:0] in_data,
  input  logic         in_valid,
  output logic         in_ready,
  output logic [63:0]  out_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [3:0]   lanes
);
  localparam int unsigned NLANE = 9;

  logic [32*NLANE-1:0] acc, acc_shift, acc_next;
  logic [3:0]          cnt, cnt_after_pop;
  logic                pop, load;

  assign out_valid     = (cnt >= 4'd2);
  assign out_data      = acc[63:0];
  assign pop           = out_valid && out_ready;
  assign cnt_after_pop = pop ? cnt - 4'd2 : cnt;
  assign in_ready      = (cnt_after_pop <= 4'd2);
  assign load          = in_valid && in_ready;
  assign lanes         = cnt;

  always_comb begin
    acc_shift = pop ? (acc >> 64) : acc;
    acc_next  = acc_shift;
    if (load)
      acc_next = acc_shift | ({64'h0, in_data} << (32 * cnt_after_pop));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      cnt <= '0;
    end else begin
      acc <= acc_next;
      cnt <= load ? cnt_after_pop + 4'd7 : cnt_after_pop;
    end
  end

  // Output must not drop a beat under back-pressure.
  ap_cnt_range: assert property (@(posedge clk) disable iff (!rst_n) cnt <= 4'd9);
endmodule
