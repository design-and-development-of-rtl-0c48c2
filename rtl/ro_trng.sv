`timescale 1ns/1ps
// ro_trng: jitter-based true-random-number generator fed by two free-running
// ring oscillators of the sensor bank.
//
// Each system-clock cycle both rings are sampled through two-flip-flop
// synchronisers; the phase relation between them drifts with oscillator jitter.
// The extracted bit is the exclusive-or of the two samples and of the previous
// extracted bit (a running-parity XOR network that whitens short runs). Bits
// shift MSB-first into an 8-bit collector; after eight new bits the byte is
// copied to `data` and `valid` is raised. `valid` clears when the host reads
// the byte (`rd_ack`) or when the generator is disabled.
//
// Reuse of the oscillator bank, jitter sampling and the XOR extraction follow
// the paper; the synchroniser depth, the running-parity form of the XOR network
// and the 8-bit collection are this design's choices.
module ro_trng (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       osc_a,     // asynchronous
  input  logic       osc_b,     // asynchronous
  input  logic       rd_ack,    // host read of the data register
  output logic [7:0] data,
  output logic       valid
);
  logic a_s, b_s;
  sync_ff #(.STAGES(2)) u_sa (.clk, .rst_n, .d(osc_a), .q(a_s));
  sync_ff #(.STAGES(2)) u_sb (.clk, .rst_n, .d(osc_b), .q(b_s));

  logic       prev_bit, new_bit;
  logic [6:0] coll;
  logic [2:0] nbits;

  assign new_bit = a_s ^ b_s ^ prev_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_bit <= 1'b0;
      coll     <= '0;
      nbits    <= '0;
      data     <= '0;
      valid    <= 1'b0;
    end else if (!en) begin
      nbits    <= '0;
      valid    <= 1'b0;
    end else begin
      prev_bit <= new_bit;
      coll     <= {coll[5:0], new_bit};
      nbits    <= nbits + 3'd1;
      if (nbits == 3'd7) begin
        data  <= {coll[6:0], new_bit};
        valid <= 1'b1;
      end else if (rd_ack) begin
        valid <= 1'b0;
      end
    end
  end
endmodule
