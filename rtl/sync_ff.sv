`timescale 1ns/1ps
// sync_ff: STAGES-deep flip-flop synchroniser for one asynchronous input bit.
// Output follows the input STAGES system-clock cycles later. Resets to RST_VAL.
module sync_ff #(
  parameter int unsigned STAGES  = 2,
  parameter bit          RST_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic [STAGES-1:0] sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr <= {STAGES{RST_VAL}};
    else        sr <= {sr[STAGES-2:0], d};
  end
  assign q = sr[STAGES-1];
endmodule
