`timescale 1ns / 1ps
// sync_ff: two-flop synchronizer for signals that cross into clk's domain.
//
// Each bit passes through STAGES flip-flops clocked by the destination
// clock. Only single-bit signals, or multi-bit values that change one bit
// at a time (Gray-coded pointers and counters), may be passed through it.
// Latency: STAGES destination clock cycles. Reset (active low,
// asynchronous) clears all stages. A standard synchronizer; the design
// description does not discuss clock-crossing circuits.
module sync_ff #(
  parameter int unsigned WIDTH  = 1,
  parameter int unsigned STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] stage [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < STAGES; i++) stage[i] <= '0;
    end else begin
      stage[0] <= d;
      for (int i = 1; i < STAGES; i++) stage[i] <= stage[i-1];
    end
  end

  assign q = stage[STAGES-1];
endmodule
