`timescale 1ns/1ps
// stdp_ctrl: on-chip spike-timing-dependent plasticity controller tile.
//
// An external timestamp clock (`ts_clk`, synchronised, rising edges) advances
// an 8-bit wrapping counter. Rising edges of the pre- and post-synaptic spike
// inputs (two-stage synchronisers plus edge detection) capture the counter
// into PRE_TS / POST_TS and set a valid flag; while the machine is idle a later
// edge overwrites the earlier capture. With learning enabled and both flags
// set, a four-state machine runs IDLE -> COMPUTE -> UPDATE -> DONE:
//   COMPUTE  dt = t_post - t_pre (8-bit two's complement). dt >= 0 is
//            potentiation and reads LUT[|dt| mod 4]; dt < 0 is depression and
//            reads LUT[4 + (|dt| mod 4)]. |dt| is checked against TIME_WIN.
//   UPDATE   dw = LUT >> (3 - r) with r = LEARN_RT[1:0] (1/8, 1/4, 1/2, 1).
//            The anti-Hebbian bit swaps the sign; the result is committed to
//            WT_UPD subject to the reward gating below. Pairs outside the
//            window commit nothing.
//   DONE     continuous mode: clear both valid flags and return to IDLE;
//            single-shot mode (CTRL[2]): stay here until CTRL[1] (reset).
// With no gating the committed update is visible three clocks after both
// valid flags are set.
//
// Three-factor options: reward gate (CTRL[4]) alone commits only if the
// synchronised `reward` input is high in the UPDATE cycle. With the
// eligibility trace (CTRL[5]) an in-window pair also loads an 8-bit leaky
// trace with 255, which then decays every cycle by max(1, trace >> k), k =
// LEARN_RT[6:4]; with the reward gate also on, the update is held pending and
// committed by the first reward that arrives while the trace is non-zero, and
// dropped when the trace reaches zero. A committed update's magnitude is the
// base update, not the trace level.
//
// WT_UPD is 8-bit two's complement: a selected table entry of 127 or more is
// clipped to +/-127 and raises the weight-overflow flag.
//
// Registers: 0 CTRL [0] enable, [1] reset (level), [2] single-shot,
// [3] anti-Hebbian, [4] reward gate, [5] eligibility trace; 1 LEARN_RT [1:0]
// rate, [6:4] trace decay shift; 2 TIME_WIN; 3 PRE_TS; 4 POST_TS; 5 DELTA_T;
// 6 WT_UPD; 7 STATUS [0] update ready, [1] potentiation, [2] depression,
// [3] weight overflow, [4] reward, [5] trace non-zero; 8-F plasticity table.
//
// From the paper: the timestamp counter, synchronisers, four-state machine,
// table layout and index, right-shift rate, window, single-shot/continuous
// modes, reward gate, leaky trace, anti-Hebbian swap and the register bits.
// This design's choices: where the trace decay rate lives (LEARN_RT[6:4]), the
// trace arithmetic, what counts as full scale, the table reset values (read
// off the paper's plotted default curve: 127, 63, 31, 15 and 50, 25, 12 with
// the unreachable depression entry 0) and the exact timing of capture.
module stdp_ctrl #(
  parameter logic [7:0] LEARN_RT_RESET = 8'h33,
  parameter logic [7:0] TIME_WIN_RESET = 8'h03
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       miso_oe,
  input  logic       ts_clk,
  input  logic       pre_spike,
  input  logic       post_spike,
  input  logic       reward,
  output logic [7:0] dw,
  output logic       dw_valid,
  output logic       update_ready,
  output logic       ltp,
  output logic       ltd
);
  import neuro_pkg::*;

  localparam logic [7:0] LUT_RESET [8] = '{8'd127, 8'd63, 8'd31, 8'd15,
                                           8'd0,   8'd50, 8'd25, 8'd12};

  reg_bus_if bus ();
  spi_slave u_spi (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe, .bus(bus.master));

  logic [7:0] r_ctrl, r_rate, r_win;
  logic [7:0] lut [8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ctrl <= '0;
      r_rate <= LEARN_RT_RESET;
      r_win  <= TIME_WIN_RESET;
      for (int i = 0; i < 8; i++) lut[i] <= LUT_RESET[i];
    end else if (bus.we && bus.addr[6:4] == 3'b000) begin
      if (bus.addr[3]) lut[bus.addr[2:0]] <= bus.wdata;
      else begin
        unique case (bus.addr[3:0])
          SD_CTRL:     r_ctrl <= bus.wdata;
          SD_LEARN_RT: r_rate <= bus.wdata;
          SD_TIME_WIN: r_win  <= bus.wdata;
          default: ;
        endcase
      end
    end
  end

  logic en, soft_rst, single_shot, anti_hebb, reward_gate, trace_en;
  assign en          = r_ctrl[0];
  assign soft_rst    = r_ctrl[1];
  assign single_shot = r_ctrl[2];
  assign anti_hebb   = r_ctrl[3];
  assign reward_gate = r_ctrl[4];
  assign trace_en    = r_ctrl[5];

  // ---------------- synchronisers and edge detectors ----------------
  logic ts_s, pre_s, post_s, reward_s;
  logic ts_d, pre_d, post_d;
  sync_ff #(.STAGES(2)) u_sync_ts   (.clk, .rst_n, .d(ts_clk),     .q(ts_s));
  sync_ff #(.STAGES(2)) u_sync_pre  (.clk, .rst_n, .d(pre_spike),  .q(pre_s));
  sync_ff #(.STAGES(2)) u_sync_post (.clk, .rst_n, .d(post_spike), .q(post_s));
  sync_ff #(.STAGES(2)) u_sync_rew  (.clk, .rst_n, .d(reward),     .q(reward_s));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {ts_d, pre_d, post_d} <= '0;
    else        {ts_d, pre_d, post_d} <= {ts_s, pre_s, post_s};
  end

  // ---------------- timestamps ----------------
  stdp_state_e state;
  logic [7:0]  ts, pre_ts, post_ts;
  logic        pre_v, post_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ts <= '0;
    else if (ts_s && !ts_d) ts <= ts + 8'd1;
  end

  // ---------------- computation ----------------
  logic [7:0]  dt, mag, dt_q, lut_q, wt_upd, pending;
  logic        neg, neg_q, in_win_q;
  logic [2:0]  k;
  assign dt  = post_ts - pre_ts;
  assign neg = dt[7];
  assign mag = neg ? (~dt + 8'd1) : dt;
  assign k   = {neg, mag[1:0]};

  logic [7:0] base, mag_clip, dw_base;
  logic       full_scale, depress;
  assign base       = lut_q >> (2'd3 - r_rate[1:0]);
  assign full_scale = lut_q >= 8'd127;
  assign mag_clip   = (base > 8'd127) ? 8'd127 : base;
  assign depress    = neg_q ^ anti_hebb;
  assign dw_base    = depress ? (~mag_clip + 8'd1) : mag_clip;

  logic [7:0] trace, trace_step;
  logic       pend, rdy, pot_f, dep_f, ovf_f, commit_pulse;
  assign trace_step = ((trace >> r_rate[6:4]) == 8'd0) ? 8'd1 : (trace >> r_rate[6:4]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= STDP_IDLE;
      pre_ts  <= '0;  post_ts <= '0;
      pre_v   <= 1'b0; post_v <= 1'b0;
      dt_q    <= '0;  lut_q <= '0; neg_q <= 1'b0; in_win_q <= 1'b0;
      wt_upd  <= '0;  pending <= '0; pend <= 1'b0;
      trace   <= '0;
      rdy     <= 1'b0; pot_f <= 1'b0; dep_f <= 1'b0; ovf_f <= 1'b0;
      commit_pulse <= 1'b0;
    end else if (soft_rst) begin
      state   <= STDP_IDLE;
      pre_v   <= 1'b0; post_v <= 1'b0;
      wt_upd  <= '0;  pend <= 1'b0; trace <= '0;
      rdy     <= 1'b0; pot_f <= 1'b0; dep_f <= 1'b0; ovf_f <= 1'b0;
      commit_pulse <= 1'b0;
    end else begin
      commit_pulse <= 1'b0;

      // eligibility trace decay and delayed reward commit
      if (trace != 8'd0) trace <= (trace > trace_step) ? trace - trace_step : 8'd0;
      if (pend) begin
        if (trace == 8'd0) pend <= 1'b0;
        else if (reward_s) begin
          pend <= 1'b0;
          wt_upd <= pending; rdy <= 1'b1; commit_pulse <= 1'b1;
          pot_f <= ~pending[7]; dep_f <= pending[7];
        end
      end

      unique case (state)
        STDP_IDLE: begin
          if (pre_s && !pre_d)   begin pre_ts  <= ts; pre_v  <= 1'b1; end
          if (post_s && !post_d) begin post_ts <= ts; post_v <= 1'b1; end
          if (en && pre_v && post_v) state <= STDP_COMPUTE;
        end
        STDP_COMPUTE: begin
          dt_q     <= dt;
          neg_q    <= neg;
          lut_q    <= lut[k];
          in_win_q <= mag <= r_win;
          rdy      <= 1'b0;
          state    <= STDP_UPDATE;
        end
        STDP_UPDATE: begin
          if (in_win_q) begin
            ovf_f <= full_scale;
            if (trace_en) trace <= 8'hFF;
            if (!reward_gate || (!trace_en && reward_s)) begin
              wt_upd <= dw_base; rdy <= 1'b1; commit_pulse <= 1'b1;
              pot_f <= ~dw_base[7]; dep_f <= dw_base[7];
            end else if (trace_en) begin
              pending <= dw_base; pend <= 1'b1;
            end
          end
          state <= STDP_DONE;
        end
        STDP_DONE: begin
          if (!single_shot) begin
            pre_v  <= 1'b0;
            post_v <= 1'b0;
            state  <= STDP_IDLE;
          end
        end
        default: state <= STDP_IDLE;
      endcase
    end
  end

  assign dw           = wt_upd;
  assign dw_valid     = commit_pulse;
  assign update_ready = rdy;
  assign ltp          = pot_f;
  assign ltd          = dep_f;

  always_comb begin
    bus.rdata = 8'h00;
    if (bus.addr[6:4] == 3'b000) begin
      if (bus.addr[3]) bus.rdata = lut[bus.addr[2:0]];
      else begin
        unique case (bus.addr[3:0])
          SD_CTRL:     bus.rdata = r_ctrl;
          SD_LEARN_RT: bus.rdata = r_rate;
          SD_TIME_WIN: bus.rdata = r_win;
          SD_PRE_TS:   bus.rdata = pre_ts;
          SD_POST_TS:  bus.rdata = post_ts;
          SD_DELTA_T:  bus.rdata = dt_q;
          SD_WT_UPD:   bus.rdata = wt_upd;
          SD_STATUS:   bus.rdata = {2'b00, trace != 8'd0, reward_s, ovf_f, dep_f, pot_f, rdy};
          default:     bus.rdata = 8'h00;
        endcase
      end
    end
  end
endmodule
