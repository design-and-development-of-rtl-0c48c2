`timescale 1ns/1ps
// ro_sensor: ring-oscillator process/voltage/temperature sensor tile.
//
// Five rings of 7, 11, 15, 21 and 31 inverting stages (ring_osc) can each be
// enabled on their own (RO_EN). One ring, or in differential mode the beat of a
// pair, is optionally divided by 8/16/32/64 in the oscillator domain, crosses
// into the system clock domain through a three-stage synchroniser, and its
// rising edges are counted by a 16-bit saturating counter during a measurement
// window. The window is set in one of two ways, chosen by the `mode_serial`
// pin (ui_in[6]):
//   * parallel control (mode_serial = 0): edges are counted while `cnt_en`
//     (ui_in[3]) is high; a rising edge of `clr` (ui_in[4]) latches the count
//     into the holding register and restarts the counter. Holding `clr` high
//     does nothing more. The ring is selected by `par_sel` (ui_in[2:0]).
//   * serial control (mode_serial = 1): writing CTRL[0] starts a hardware
//     gate of GATE_H:GATE_L system-clock cycles (0 is taken as 1); at its end
//     the count is latched and STATUS[0] (done) rises. The ring is RO_SEL[2:0].
// The held 16-bit result is presented a byte at a time on `dout`, high byte
// when `byte_sel` (ui_in[5]) is 1, and as FREQ_L/FREQ_H over SPI. The
// counter saturates at 0xFFFF and sets the overflow flag.
//
// Differential mode (TRNG_CTL[2]) samples ring A with the rising edges of ring
// B (DIFF_SEL[2:0] and [5:3]); the sampled signal toggles at the beat
// frequency |fA - fB|, which is then prescaled and counted. The same pair feeds
// the jitter TRNG (ro_trng, TRNG_CTL[0]) and every latched result feeds the
// health monitor (ro_health_mon, TRNG_CTL[1], bounds HEALTH_LO/HI).
//
// Register map (SPI, 8-bit): 0 CTRL [0] start gate, [1] clear measurement
// (both self-clearing); 1 RO_SEL; 2 RO_EN [4:0]; 3/4 GATE_L/H; 5 PRESCALE
// [2:0] 0 = /1, 1 = /8, 2 = /16, 3 = /32, 4 = /64; 6 STATUS [0] done,
// [1] overflow, [2] gate busy, [3] health alert, [4] TRNG byte valid,
// [5] serial mode; 7/8 FREQ_L/H; 9 TRNG_CTL; A DIFF_SEL; B/C HEALTH_LO/HI;
// D TRNG_DAT (read clears its valid bit); E HEALTH_ST [0] alert, [1] below,
// [2] above, [3] stalled; F reserved, reads 0.
//
// Follows the paper: ring lengths, NAND enables, three-stage synchroniser,
// 16-bit counter, the two control modes and their pins, the edge-detected clear,
// gate registers at 0x03/0x04, prescaler ratios, differential pair, TRNG,
// health bounds, register addresses and the named CTRL/TRNG_CTL bits. This
// design's choices: the beat detector (a flip-flop clocked by ring B), the
// prescaler encoding, the STATUS and HEALTH_ST bit positions, the DIFF_SEL
// layout, the parallel-mode select pins, the register reset values and the
// synchronisation of the parallel control pins.
module ro_sensor #(
  parameter int unsigned      RO_STAGE_DELAY_PS = 300,
  parameter logic [15:0]      GATE_RESET        = 16'd1000
) (
  input  logic       clk,
  input  logic       rst_n,
  // shared SPI bus
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       miso_oe,
  // parallel control and readout
  input  logic [2:0] par_sel,
  input  logic       cnt_en,
  input  logic       clr,
  input  logic       byte_sel,
  input  logic       mode_serial,
  output logic [7:0] dout,
  output logic       overflow,
  output logic       meas_done,
  output logic       health_alert,
  output logic       raw_osc,
  output logic       sync_osc
);
  import neuro_pkg::*;

  localparam int unsigned NRO = 5;
  localparam int unsigned RO_LEN [NRO] = '{7, 11, 15, 21, 31};

  // ---------------- register file ----------------
  reg_bus_if bus ();
  spi_slave u_spi (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe, .bus(bus.master));

  logic [7:0]  r_ctrl_hi, r_ro_sel, r_ro_en, r_prescale, r_trng_ctl, r_diff_sel;
  logic [7:0]  r_hlo, r_hhi;
  logic [15:0] r_gate;
  logic        cmd_start, cmd_clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ctrl_hi  <= '0;
      r_ro_sel   <= '0;
      r_ro_en    <= 8'h1F;
      r_gate     <= GATE_RESET;
      r_prescale <= '0;
      r_trng_ctl <= '0;
      r_diff_sel <= 8'h08;    // A = ring 0, B = ring 1
      r_hlo      <= 8'h00;
      r_hhi      <= 8'hFF;
    end else if (bus.we && bus.addr[6:4] == 3'b000) begin
      unique case (bus.addr[3:0])
        RO_CTRL:      r_ctrl_hi  <= {bus.wdata[7:2], 2'b00};
        RO_SEL:       r_ro_sel   <= bus.wdata;
        RO_EN:        r_ro_en    <= bus.wdata;
        RO_GATE_L:    r_gate[7:0]  <= bus.wdata;
        RO_GATE_H:    r_gate[15:8] <= bus.wdata;
        RO_PRESCALE:  r_prescale <= bus.wdata;
        RO_TRNG_CTL:  r_trng_ctl <= bus.wdata;
        RO_DIFF_SEL:  r_diff_sel <= bus.wdata;
        RO_HEALTH_LO: r_hlo      <= bus.wdata;
        RO_HEALTH_HI: r_hhi      <= bus.wdata;
        default: ;    // read-only or reserved
      endcase
    end
  end

  assign cmd_start = bus.we && bus.addr == 7'(RO_CTRL) && bus.wdata[0];
  assign cmd_clear = bus.we && bus.addr == 7'(RO_CTRL) && bus.wdata[1];

  // ---------------- oscillator bank ----------------
  logic [NRO-1:0] ro;
  for (genvar i = 0; i < NRO; i++) begin : g_ro
    ring_osc #(.STAGES(RO_LEN[i]), .STAGE_DELAY_PS(RO_STAGE_DELAY_PS)) u_ro (
      .en(r_ro_en[i]), .osc(ro[i]));
  end

  function automatic logic pick(input logic [NRO-1:0] v, input logic [2:0] s);
    return (s < 3'(NRO)) ? v[s] : 1'b0;
  endfunction

  logic [2:0] sel;
  logic       osc_sel, osc_a, osc_b, beat, meas;
  assign sel     = mode_serial ? r_ro_sel[2:0] : par_sel;
  assign osc_sel = pick(ro, sel);
  assign osc_a   = pick(ro, r_diff_sel[2:0]);
  assign osc_b   = pick(ro, r_diff_sel[5:3]);

  // beat detector: ring A sampled by ring B toggles at |fA - fB|
  always_ff @(posedge osc_b or negedge rst_n) begin
    if (!rst_n) beat <= 1'b0;
    else        beat <= osc_a;
  end

  assign meas = r_trng_ctl[2] ? beat : osc_sel;

  // prescaler: ripple counter in the oscillator domain
  logic [5:0] div;
  logic       pre_out;
  always_ff @(posedge meas or negedge rst_n) begin
    if (!rst_n) div <= '0;
    else        div <= div + 6'd1;
  end
  always_comb begin
    unique case (r_prescale[2:0])
      3'd1:    pre_out = div[2];
      3'd2:    pre_out = div[3];
      3'd3:    pre_out = div[4];
      3'd4:    pre_out = div[5];
      default: pre_out = meas;
    endcase
  end

  assign raw_osc = meas;

  // ---------------- clock-domain crossing and edge detect ----------------
  logic osc_s, osc_d, osc_rise;
  sync_ff #(.STAGES(3)) u_sync_osc (.clk, .rst_n, .d(pre_out), .q(osc_s));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) osc_d <= 1'b0;
    else        osc_d <= osc_s;
  end
  assign osc_rise = osc_s & ~osc_d;
  assign sync_osc = osc_s;

  logic cnt_en_s, clr_s, clr_d, clr_rise;
  sync_ff #(.STAGES(2)) u_sync_en  (.clk, .rst_n, .d(cnt_en), .q(cnt_en_s));
  sync_ff #(.STAGES(2)) u_sync_clr (.clk, .rst_n, .d(clr),    .q(clr_s));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) clr_d <= 1'b0;
    else        clr_d <= clr_s;
  end
  assign clr_rise = clr_s & ~clr_d;

  // ---------------- counter, gate timer, holding register ----------------
  logic [15:0] count, hold, gate_left;
  logic        busy, done, ovf, ovf_hold, latch;
  logic        counting;

  assign counting = mode_serial ? busy : cnt_en_s;

  logic [15:0] count_inc;
  logic        ovf_inc;
  always_comb begin
    count_inc = count;
    ovf_inc   = ovf;
    if (counting && osc_rise) begin
      if (count == 16'hFFFF) ovf_inc = 1'b1;
      else                   count_inc = count + 16'd1;
    end
  end

  assign latch = mode_serial ? (busy && gate_left == 16'd1) : clr_rise;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      hold      <= '0;
      gate_left <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      ovf       <= 1'b0;
      ovf_hold  <= 1'b0;
    end else if (cmd_clear) begin
      count     <= '0;
      hold      <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      ovf       <= 1'b0;
      ovf_hold  <= 1'b0;
    end else if (cmd_start && mode_serial) begin
      count     <= '0;
      ovf       <= 1'b0;
      gate_left <= (r_gate == 16'd0) ? 16'd1 : r_gate;
      busy      <= 1'b1;
      done      <= 1'b0;
    end else if (latch) begin
      hold      <= count_inc;
      ovf_hold  <= ovf_inc;
      count     <= '0;
      ovf       <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b1;
      gate_left <= '0;
    end else begin
      count <= count_inc;
      ovf   <= ovf_inc;
      if (busy) gate_left <= gate_left - 16'd1;
    end
  end

  logic latched_q;   // one cycle after a latch: hold is valid
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) latched_q <= 1'b0;
    else        latched_q <= latch && !cmd_clear && !(cmd_start && mode_serial);
  end

  // ---------------- TRNG and health ----------------
  logic [7:0] trng_data;
  logic       trng_valid;
  ro_trng u_trng (.clk, .rst_n, .en(r_trng_ctl[0]), .osc_a, .osc_b,
                  .rd_ack(bus.re && bus.addr == 7'(RO_TRNG_DAT)),
                  .data(trng_data), .valid(trng_valid));

  logic h_below, h_above, h_stalled;
  ro_health_mon u_health (.clk, .rst_n, .en(r_trng_ctl[1]), .clear(cmd_clear),
                          .sample(latched_q), .count(hold),
                          .bound_lo(r_hlo), .bound_hi(r_hhi),
                          .below(h_below), .above(h_above), .stalled(h_stalled),
                          .alert(health_alert));

  // ---------------- read mux ----------------
  always_comb begin
    bus.rdata = 8'h00;
    if (bus.addr[6:4] == 3'b000) begin
      unique case (bus.addr[3:0])
        RO_CTRL:      bus.rdata = r_ctrl_hi;
        RO_SEL:       bus.rdata = r_ro_sel;
        RO_EN:        bus.rdata = r_ro_en;
        RO_GATE_L:    bus.rdata = r_gate[7:0];
        RO_GATE_H:    bus.rdata = r_gate[15:8];
        RO_PRESCALE:  bus.rdata = r_prescale;
        RO_STATUS:    bus.rdata = {2'b00, mode_serial, trng_valid, health_alert, busy, ovf_hold, done};
        RO_FREQ_L:    bus.rdata = hold[7:0];
        RO_FREQ_H:    bus.rdata = hold[15:8];
        RO_TRNG_CTL:  bus.rdata = r_trng_ctl;
        RO_DIFF_SEL:  bus.rdata = r_diff_sel;
        RO_HEALTH_LO: bus.rdata = r_hlo;
        RO_HEALTH_HI: bus.rdata = r_hhi;
        RO_TRNG_DAT:  bus.rdata = trng_data;
        RO_HEALTH_ST: bus.rdata = {4'h0, h_stalled, h_above, h_below, health_alert};
        default:      bus.rdata = 8'h00;
      endcase
    end
  end

  assign dout      = byte_sel ? hold[15:8] : hold[7:0];
  assign overflow  = ovf_hold;
  assign meas_done = done;
endmodule
