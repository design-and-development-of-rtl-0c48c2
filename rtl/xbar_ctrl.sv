`timescale 1ns/1ps
// xbar_ctrl: programming controller for an 8x8 memristive crossbar tile.
//
// A seven-state machine sequences every operation:
//   IDLE   -> start (CTRL[0]) latches the operation and goes to SETUP, or to
//             SWEEP when auto-sweep (CTRL[2]) is set.
//   SETUP  one cycle; row/column addresses and enables are driven from here
//          until REPORT ends. READ goes straight to SENSE, SET/RESET/FORM
//          to PULSE.
//   PULSE  pulse_out high for PULSE_H[0]:PULSE_L cycles (1-511, 0 taken as
//          1). A train of REPEAT[3:0] pulses (0 taken as 1) alternates with
//   GAP    REPEAT[7:4] low cycles (0 taken as 1) between pulses.
//          With compliance enabled (CTRL[3]) during SET or FORM, a sensed
//          current code {adc_data, adc_data} >= COMPL ends the pulse and the
//          train at once and sets the compliance-hit flag.
//   SENSE  waits for the (synchronised) ADC ready; captures the 4-bit reading
//          nibble-replicated into the ADC register. No ready within 256
//          cycles sets the error flag.
//   REPORT one cycle: op_done pulse, done flag; back to IDLE or, in a sweep,
//          to SWEEP.
//   SWEEP  first visit loads SWP_START into the voltage code; later visits add
//          SWP_STEP and stop (done, back to IDLE) once the code would pass
//          SWP_END or 255. A zero step ends the sweep at once, before any
//          pulse, so it can never loop forever.
// Abort (CTRL[1]) returns to IDLE from any state and drops every output. The
// pulse counter PULSE_C counts pulses started since the last start command.
// The voltage code drives dac_code, whose two LSBs also go to dedicated pins;
// VHALF is the half-select bias code for unselected lines.
//
// Registers: 0 CTRL [0] start, [1] abort (both self-clearing), [2] auto-sweep,
// [3] compliance enable; 1 MODE [1:0] 00 read, 01 set, 10 reset, 11 form;
// 2 ROW; 3 COL; 4/5 PULSE_L/H; 6 DAC; 7 STATUS [0] busy, [1] done, [2] error,
// [3] sense input (ADC ready line), [7] compliance hit; 8 ADC; 9 SWP_START;
// A SWP_END; B SWP_STEP; C REPEAT; D COMPL; E PULSE_C; F V/2 bias code.
//
// From the paper: the seven states, the four operations and their encoding,
// 3-bit addresses, 9-bit width, 8-bit code with two LSBs on pins, ADC ready
// handshake with nibble replication, the 256-cycle timeout, sweep with zero-
// step guard, abort, compliance, half-select code, pulse train with a delivered
// count, and the register map. This design's choices: packing repeat count and
// gap into REPEAT, comparing compliance against the ADC code, the sweep state
// ordering, register reset values and the ADC-ready synchroniser.
module xbar_ctrl #(
  parameter logic [8:0] WIDTH_RESET = 9'd10,
  parameter logic [7:0] DAC_RESET   = 8'h80,
  parameter logic [7:0] VHALF_RESET = 8'h40
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       miso_oe,
  // analogue front end
  input  logic       adc_ready,
  input  logic [3:0] adc_data,
  output logic [2:0] row,
  output logic [2:0] col,
  output logic       row_en,
  output logic       col_en,
  output logic       pulse_out,
  output logic [1:0] op,
  output logic [7:0] dac_code,
  output logic [1:0] dac_pins,
  output logic [7:0] vhalf_code,
  output logic       busy,
  output logic       op_done
);
  import neuro_pkg::*;

  reg_bus_if bus ();
  spi_slave u_spi (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe, .bus(bus.master));

  logic [7:0] r_ctrl, r_mode, r_row, r_col, r_dac, r_sw_start, r_sw_end, r_sw_step;
  logic [7:0] r_repeat, r_compl, r_vhalf;
  logic [8:0] r_width;
  logic       cmd_start, cmd_abort;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ctrl     <= '0;
      r_mode     <= '0;
      r_row      <= '0;
      r_col      <= '0;
      r_width    <= WIDTH_RESET;
      r_dac      <= DAC_RESET;
      r_sw_start <= 8'h00;
      r_sw_end   <= 8'hFF;
      r_sw_step  <= 8'h10;
      r_repeat   <= 8'h11;
      r_compl    <= 8'hFF;
      r_vhalf    <= VHALF_RESET;
    end else if (bus.we && bus.addr[6:4] == 3'b000) begin
      unique case (bus.addr[3:0])
        XB_CTRL:      r_ctrl       <= {bus.wdata[7:2], 2'b00};
        XB_MODE:      r_mode       <= bus.wdata;
        XB_ROW:       r_row        <= bus.wdata;
        XB_COL:       r_col        <= bus.wdata;
        XB_PULSE_L:   r_width[7:0] <= bus.wdata;
        XB_PULSE_H:   r_width[8]   <= bus.wdata[0];
        XB_DAC:       r_dac        <= bus.wdata;
        XB_SWP_START: r_sw_start   <= bus.wdata;
        XB_SWP_END:   r_sw_end     <= bus.wdata;
        XB_SWP_STEP:  r_sw_step    <= bus.wdata;
        XB_REPEAT:    r_repeat     <= bus.wdata;
        XB_COMPL:     r_compl      <= bus.wdata;
        XB_VHALF:     r_vhalf      <= bus.wdata;
        default: ;
      endcase
    end
  end

  assign cmd_start = bus.we && bus.addr == 7'(XB_CTRL) && bus.wdata[0];
  assign cmd_abort = bus.we && bus.addr == 7'(XB_CTRL) && bus.wdata[1];

  logic rdy_s;
  sync_ff #(.STAGES(2)) u_sync_rdy (.clk, .rst_n, .d(adc_ready), .q(rdy_s));

  xbar_state_e state;
  xbar_op_e    op_q;
  logic [8:0]  width_cnt;
  logic [8:0]  tmo_cnt;
  logic [3:0]  pulses_left, gap_cnt;
  logic [7:0]  dac_cur, adc_q, pulse_c;
  logic [2:0]  row_q, col_q;
  logic        sweeping, sweep_first, done_f, err_f, compl_f, done_pulse;

  logic [8:0] next_code;
  assign next_code = {1'b0, dac_cur} + {1'b0, r_sw_step};

  logic compliance_trip;
  assign compliance_trip = r_ctrl[3] && (op_q == XOP_SET || op_q == XOP_FORM)
                           && ({adc_data, adc_data} >= r_compl);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= XS_IDLE; op_q <= XOP_READ;
      width_cnt <= '0; tmo_cnt <= '0; pulses_left <= '0; gap_cnt <= '0;
      dac_cur <= '0; adc_q <= '0; pulse_c <= '0; row_q <= '0; col_q <= '0;
      sweeping <= 1'b0; sweep_first <= 1'b0;
      done_f <= 1'b0; err_f <= 1'b0; compl_f <= 1'b0; done_pulse <= 1'b0;
    end else if (cmd_abort) begin
      state <= XS_IDLE; sweeping <= 1'b0; sweep_first <= 1'b0; done_pulse <= 1'b0;
    end else begin
      done_pulse <= 1'b0;
      unique case (state)
        XS_IDLE: begin
          if (cmd_start) begin
            op_q    <= xbar_op_e'(r_mode[1:0]);
            row_q   <= r_row[2:0];
            col_q   <= r_col[2:0];
            pulse_c <= '0;
            done_f  <= 1'b0; err_f <= 1'b0; compl_f <= 1'b0;
            if (bus.wdata[2]) begin   // auto-sweep bit of this same write
              sweeping <= 1'b1; sweep_first <= 1'b1; state <= XS_SWEEP;
            end else begin
              dac_cur <= r_dac; state <= XS_SETUP;
            end
          end
        end
        XS_SETUP: begin
          width_cnt   <= (r_width == 9'd0) ? 9'd1 : r_width;
          pulses_left <= (r_repeat[3:0] == 4'd0) ? 4'd1 : r_repeat[3:0];
          tmo_cnt     <= '0;
          if (op_q == XOP_READ) state <= XS_SENSE;
          else begin
            state   <= XS_PULSE;
            pulse_c <= pulse_c + 8'd1;
          end
        end
        XS_PULSE: begin
          if (compliance_trip) begin
            compl_f <= 1'b1;
            state   <= XS_SENSE;
          end else if (width_cnt == 9'd1) begin
            pulses_left <= pulses_left - 4'd1;
            if (pulses_left > 4'd1) begin
              gap_cnt <= (r_repeat[7:4] == 4'd0) ? 4'd1 : r_repeat[7:4];
              state   <= XS_GAP;
            end else begin
              state   <= XS_SENSE;
            end
          end else begin
            width_cnt <= width_cnt - 9'd1;
          end
        end
        XS_GAP: begin
          if (gap_cnt == 4'd1) begin
            width_cnt <= (r_width == 9'd0) ? 9'd1 : r_width;
            pulse_c   <= pulse_c + 8'd1;
            state     <= XS_PULSE;
          end else begin
            gap_cnt <= gap_cnt - 4'd1;
          end
        end
        XS_SENSE: begin
          if (rdy_s) begin
            adc_q <= {adc_data, adc_data};
            state <= XS_REPORT;
          end else if (tmo_cnt == 9'(XBAR_SENSE_TIMEOUT - 1)) begin
            err_f <= 1'b1;
            state <= XS_REPORT;
          end else begin
            tmo_cnt <= tmo_cnt + 9'd1;
          end
        end
        XS_REPORT: begin
          done_pulse <= 1'b1;
          if (sweeping) state <= XS_SWEEP;
          else begin
            done_f <= 1'b1;
            state  <= XS_IDLE;
          end
        end
        XS_SWEEP: begin
          if (r_sw_step == 8'd0) begin
            sweeping <= 1'b0; done_f <= 1'b1; state <= XS_IDLE;
          end else if (sweep_first) begin
            sweep_first <= 1'b0;
            dac_cur     <= r_sw_start;
            state       <= XS_SETUP;
          end else if (next_code[8] || next_code[7:0] > r_sw_end) begin
            sweeping <= 1'b0; done_f <= 1'b1; state <= XS_IDLE;
          end else begin
            dac_cur <= next_code[7:0];
            state   <= XS_SETUP;
          end
        end
        default: state <= XS_IDLE;
      endcase
    end
  end

  logic active;
  assign active     = state inside {XS_SETUP, XS_PULSE, XS_GAP, XS_SENSE, XS_REPORT};
  assign row_en     = active;
  assign col_en     = active;
  assign row        = active ? row_q : 3'd0;
  assign col        = active ? col_q : 3'd0;
  assign pulse_out  = state == XS_PULSE;
  assign op         = active ? op_q : XOP_READ;
  assign dac_code   = active ? dac_cur : 8'h00;
  assign dac_pins   = dac_code[1:0];
  assign vhalf_code = r_vhalf;
  assign busy       = state != XS_IDLE;
  assign op_done    = done_pulse;

  always_comb begin
    bus.rdata = 8'h00;
    if (bus.addr[6:4] == 3'b000) begin
      unique case (bus.addr[3:0])
        XB_CTRL:      bus.rdata = r_ctrl;
        XB_MODE:      bus.rdata = r_mode;
        XB_ROW:       bus.rdata = r_row;
        XB_COL:       bus.rdata = r_col;
        XB_PULSE_L:   bus.rdata = r_width[7:0];
        XB_PULSE_H:   bus.rdata = {7'd0, r_width[8]};
        XB_DAC:       bus.rdata = r_dac;
        XB_STATUS:    bus.rdata = {compl_f, 3'b000, rdy_s, err_f, done_f, busy};
        XB_ADC:       bus.rdata = adc_q;
        XB_SWP_START: bus.rdata = r_sw_start;
        XB_SWP_END:   bus.rdata = r_sw_end;
        XB_SWP_STEP:  bus.rdata = r_sw_step;
        XB_REPEAT:    bus.rdata = r_repeat;
        XB_COMPL:     bus.rdata = r_compl;
        XB_PULSE_C:   bus.rdata = pulse_c;
        XB_VHALF:     bus.rdata = r_vhalf;
        default:      bus.rdata = 8'h00;
      endcase
    end
  end
endmodule
