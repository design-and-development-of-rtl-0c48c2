`timescale 1ns/1ps
// stoch_neuron: stochastic leaky integrate-and-fire neuron tile.
//
// A 16-bit LFSR (lfsr16) runs every enabled cycle. Its top three bits s[15:13]
// pick one of eight 8-bit activation levels from a writable table (reset
// contents approximate a sigmoid), and its low byte s[7:0] is the random value
// compared against that level: a stochastic event happens when
// s[7:0] < LUT[s[15:13]], i.e. with probability LUT/256. Bits s[12:8] are not
// used. A stochastic event or the external spike input (`ext_spike`, ui_in[0],
// synchronised) adds the input current I to the 16-bit membrane with
// saturation at 0xFFFF; any other cycle subtracts the leak DECAY, saturating at
// zero. I is the selected activation level in free-running mode (CTRL[2] = 1)
// or the 4-bit parallel weight (`weight`, ui_in[7:4]) zero-extended in
// host-driven mode (CTRL[2] = 0).
//
// When the membrane's upper byte reaches THRESH (V[15:8] >= THRESH) the next
// clock emits a one-cycle spike, clears the membrane and starts a refractory
// interval of CTRL[7:5] cycles (0-7) in which the membrane holds and no spike
// can fire. The LFSR keeps running through the refractory interval.
//
// Registers (SPI): 0 CTRL [0] enable, [1] accumulator reset (level: holds the
// membrane, refractory counter and sticky flags clear), [2] free-run, [7:5]
// refractory length; 1/2 POLY_L/H; 3/4 SEED_L/H (a write reloads the LFSR
// with the new seed on the next clock); 5 THRESH; 6 DECAY; 7 STATUS (read
// only) [0] spike, [1] accumulator saturated (sticky), [2] spike latched
// (sticky), [3] membrane MSB, [6] refractory; 8-F activation table.
//
// From the paper: the LFSR equation and guard, the LUT address and compare
// bits, the saturating update equation, the threshold on the upper byte with
// reset to zero, the refractory interval and every named register and bit. This
// design's choices: the reset values of POLY (0xB400), SEED (0xACE1), DECAY
// (4) and the table (16, 32, 64, 128, 192, 224, 240, 248), read off the
// paper's plotted characteristics; the one-clock spike registration; the
// sticky-flag clearing; the level-sensitive accumulator reset.
module stoch_neuron #(
  parameter logic [15:0] POLY_RESET   = 16'hB400,
  parameter logic [15:0] SEED_RESET   = 16'hACE1,
  parameter logic [7:0]  THRESH_RESET = 8'h80,
  parameter logic [7:0]  DECAY_RESET  = 8'h04,
  parameter logic [7:0]  CTRL_RESET   = 8'h04
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       miso_oe,
  input  logic       ext_spike,
  input  logic [3:0] weight,
  output logic       spike,
  output logic [7:0] membrane_hi,
  output logic       refractory
);
  import neuro_pkg::*;

  localparam logic [7:0] LUT_RESET [8] = '{8'd16, 8'd32, 8'd64, 8'd128,
                                           8'd192, 8'd224, 8'd240, 8'd248};

  reg_bus_if bus ();
  spi_slave u_spi (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe, .bus(bus.master));

  logic [7:0]  r_ctrl, r_thresh, r_decay;
  logic [15:0] r_poly, r_seed;
  logic [7:0]  lut [8];
  logic        seed_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ctrl    <= CTRL_RESET;
      r_poly    <= POLY_RESET;
      r_seed    <= SEED_RESET;
      r_thresh  <= THRESH_RESET;
      r_decay   <= DECAY_RESET;
      seed_load <= 1'b0;
      for (int i = 0; i < 8; i++) lut[i] <= LUT_RESET[i];
    end else begin
      seed_load <= 1'b0;
      if (bus.we && bus.addr[6:4] == 3'b000) begin
        if (bus.addr[3]) lut[bus.addr[2:0]] <= bus.wdata;
        else begin
          unique case (bus.addr[3:0])
            NR_CTRL:   r_ctrl        <= bus.wdata;
            NR_POLY_L: r_poly[7:0]   <= bus.wdata;
            NR_POLY_H: r_poly[15:8]  <= bus.wdata;
            NR_SEED_L: begin r_seed[7:0]  <= bus.wdata; seed_load <= 1'b1; end
            NR_SEED_H: begin r_seed[15:8] <= bus.wdata; seed_load <= 1'b1; end
            NR_THRESH: r_thresh      <= bus.wdata;
            NR_DECAY:  r_decay       <= bus.wdata;
            default: ;
          endcase
        end
      end
    end
  end

  logic enable, acc_rst, free_run;
  logic [2:0] refr_len;
  assign enable   = r_ctrl[0];
  assign acc_rst  = r_ctrl[1];
  assign free_run = r_ctrl[2];
  assign refr_len = r_ctrl[7:5];

  // ---------------- pseudorandom source ----------------
  logic [15:0] s;
  lfsr16 u_lfsr (.clk, .rst_n, .en(enable), .load(seed_load), .seed(r_seed),
                 .poly(r_poly), .state(s));

  // ---------------- activation ----------------
  logic [7:0] act;
  logic       fire_st, ext_s, event_in;
  assign act     = lut[s[15:13]];          // direct array read, no output register
  assign fire_st = s[7:0] < act;
  sync_ff #(.STAGES(2)) u_sync_ext (.clk, .rst_n, .d(ext_spike), .q(ext_s));
  assign event_in = fire_st | ext_s;

  logic [3:0] weight_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) weight_q <= '0;
    else        weight_q <= weight;
  end

  // ---------------- membrane ----------------
  logic [15:0] v, current;
  logic [16:0] v_sum;
  logic [15:0] v_leak;
  assign current = free_run ? {8'h00, act} : {12'h000, weight_q};
  assign v_sum   = {1'b0, v} + {1'b0, current};
  assign v_leak  = (v > {8'h00, r_decay}) ? v - {8'h00, r_decay} : 16'h0000;

  logic [2:0] refr_cnt;
  logic       sat_flag, spike_latched;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v             <= '0;
      spike         <= 1'b0;
      refr_cnt      <= '0;
      sat_flag      <= 1'b0;
      spike_latched <= 1'b0;
    end else if (acc_rst) begin
      v             <= '0;
      spike         <= 1'b0;
      refr_cnt      <= '0;
      sat_flag      <= 1'b0;
      spike_latched <= 1'b0;
    end else if (!enable) begin
      spike <= 1'b0;
    end else if (refr_cnt != 3'd0) begin
      spike    <= 1'b0;
      refr_cnt <= refr_cnt - 3'd1;
    end else if (v[15:8] >= r_thresh) begin
      spike         <= 1'b1;
      spike_latched <= 1'b1;
      v             <= '0;
      refr_cnt      <= refr_len;
    end else begin
      spike <= 1'b0;
      if (event_in) begin
        if (v_sum[16]) begin
          v        <= 16'hFFFF;
          sat_flag <= 1'b1;
        end else begin
          v <= v_sum[15:0];
        end
      end else begin
        v <= v_leak;
      end
    end
  end

  assign refractory  = refr_cnt != 3'd0;
  assign membrane_hi = v[15:8];

  // ---------------- read mux ----------------
  always_comb begin
    bus.rdata = 8'h00;
    if (bus.addr[6:4] == 3'b000) begin
      if (bus.addr[3]) bus.rdata = lut[bus.addr[2:0]];
      else begin
        unique case (bus.addr[3:0])
          NR_CTRL:   bus.rdata = r_ctrl;
          NR_POLY_L: bus.rdata = r_poly[7:0];
          NR_POLY_H: bus.rdata = r_poly[15:8];
          NR_SEED_L: bus.rdata = r_seed[7:0];
          NR_SEED_H: bus.rdata = r_seed[15:8];
          NR_THRESH: bus.rdata = r_thresh;
          NR_DECAY:  bus.rdata = r_decay;
          NR_STATUS: bus.rdata = {1'b0, refractory, 2'b00, v[15], spike_latched, sat_flag, spike};
          default:   bus.rdata = 8'h00;
        endcase
      end
    end
  end
endmodule
