`timescale 1ns/1ps
// ro_health_mon: frequency-window health and aging monitor of the PVT sensor.
//
// Whenever a new frequency result is latched (`sample` pulse) and the monitor
// is enabled, the upper byte of the 16-bit count is compared with the
// programmable lower and upper bounds. `below`, `above` and `stalled` (a result
// of zero edges: the selected oscillator did not run) are registered and held
// until the next sample; `alert` is their OR. `clear` drops all flags.
// Result appears one clock after `sample`.
//
// Comparing against programmable bounds and flagging a stalled oscillator
// follow the paper. Comparing the upper count byte with the 8-bit bound
// registers is this design's choice (the registers are one byte wide).
module ro_health_mon (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        clear,
  input  logic        sample,
  input  logic [15:0] count,
  input  logic [7:0]  bound_lo,
  input  logic [7:0]  bound_hi,
  output logic        below,
  output logic        above,
  output logic        stalled,
  output logic        alert
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      below   <= 1'b0;
      above   <= 1'b0;
      stalled <= 1'b0;
    end else if (clear) begin
      below   <= 1'b0;
      above   <= 1'b0;
      stalled <= 1'b0;
    end else if (en && sample) begin
      below   <= count[15:8] < bound_lo;
      above   <= count[15:8] > bound_hi;
      stalled <= count == 16'd0;
    end
  end
  assign alert = below | above | stalled;
endmodule
