`timescale 1ns/1ps
// lfsr16: 16-bit Fibonacci linear-feedback shift register with a programmable
// feedback polynomial, used as the neuron's pseudorandom source.
//
// Every enabled cycle the state shifts left and the new least significant bit
// is the parity of (state AND poly):  s <= {s[14:0], ^(s & poly)}.
// A maximal-length polynomial such as 0xB400 (x^16+x^14+x^13+x^11+1) gives the
// full period of 65535 states. `load` copies `seed` into the state (it has
// priority over stepping). If the state is ever all zeros (a zero seed, or a
// polynomial that collapses the state), the next cycle forces it to GUARD_VAL
// so the register can never lock up.
//
// The update equation and the zero-state guard are the paper's; the reset
// state, the guard value and the load strobe are this design's choices.
module lfsr16 #(
  parameter logic [15:0] SEED_RESET = 16'hACE1,
  parameter logic [15:0] GUARD_VAL  = 16'h0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        load,
  input  logic [15:0] seed,
  input  logic [15:0] poly,
  output logic [15:0] state
);
  logic fb;
  assign fb = ^(state & poly);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               state <= SEED_RESET;
    else if (load)            state <= seed;
    else if (state == 16'd0)  state <= GUARD_VAL;
    else if (en)              state <= {state[14:0], fb};
  end
endmodule
