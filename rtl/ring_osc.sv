`timescale 1ns/1ps
// ring_osc: BEHAVIOURAL MODEL, not synthesizable. In silicon each ring is a
// chain of hand-instantiated standard cells kept intact through synthesis and
// layout: a two-input NAND that takes the enable and starts the inversion
// chain, followed by STAGES-1 inverters, STAGES being odd (7, 11, 15, 21 or 31
// in the sensor). Such a loop has no logic-simulation meaning, so this model
// reproduces its terminal behaviour instead:
//   * en = 0: the NAND output is forced high and, after the even number of
//     inverters that follow, osc rests high (the ring is stopped and gated).
//   * en = 1: osc toggles every STAGES stage delays, i.e. a period of
//     2*STAGES*STAGE_DELAY_PS, with up to JITTER_PS of random extra delay per
//     half period standing in for the thermal phase jitter the TRNG harvests.
// The NAND-plus-inverter structure is the paper's; the stage delay and jitter
// values are placeholders chosen for simulation, since the paper gives no
// absolute frequency (it leaves that to silicon measurement).
module ring_osc #(
  parameter int unsigned STAGES         = 7,
  parameter int unsigned STAGE_DELAY_PS = 300,
  parameter int unsigned JITTER_PS      = 20
) (
  input  logic en,
  output logic osc
);
  initial osc = 1'b1;

  always begin
    if (!en) begin
      osc = 1'b1;
      @(posedge en);
    end else begin
      #((STAGES * STAGE_DELAY_PS + (JITTER_PS > 0 ? ($urandom % (JITTER_PS + 1)) : 0)) * 1ps);
      if (en) osc = ~osc;
    end
  end
endmodule
