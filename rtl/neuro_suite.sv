`timescale 1ns/1ps
// neuro_suite: the four neuromorphic tiles on one shared SPI bus.
//
// The sensor (ro_sensor), the stochastic neuron (stoch_neuron), the STDP
// controller (stdp_ctrl) and the crossbar controller (xbar_ctrl) each keep
// their own SPI slave and 16-register map. SCK and MOSI are common; each tile
// has its own active-low chip select, cs_n[0] sensor, [1] neuron, [2] STDP,
// [3] crossbar. Because an unselected tile releases its MISO output enable,
// the shared MISO pin is the OR of the enabled outputs and miso_oe the OR of
// the enables; at most one chip select may be low at a time.
//
// Dataflow between tiles follows the intended pipeline sensor -> neuron ->
// STDP -> crossbar. Only the spike link is wired in logic: the neuron's output
// spike is the STDP controller's post-synaptic input, and the external
// pre-synaptic spike (`pre_spike`) both drives the neuron's external spike
// input and is the STDP pre-synaptic input. The other two links pass through
// the host: it reads the sensor's frequency code (or TRNG byte) and programs
// the neuron, and it reads the committed weight update (also on the `dw*`
// ports) and programs the crossbar. Everything every tile brings out on its
// pins is a port here, including the analogue-side signals of the crossbar
// controller (array enables, pulse, DAC codes, ADC handshake), whose front
// end is off-chip.
module neuro_suite #(
  parameter int unsigned RO_STAGE_DELAY_PS = 300
) (
  input  logic       clk,
  input  logic       rst_n,
  // shared SPI bus
  input  logic       sclk,
  input  logic       mosi,
  input  logic [3:0] cs_n,
  output logic       miso,
  output logic       miso_oe,
  // sensor parallel interface
  input  logic [2:0] ro_par_sel,
  input  logic       ro_cnt_en,
  input  logic       ro_clr,
  input  logic       ro_byte_sel,
  input  logic       ro_mode_serial,
  output logic [7:0] ro_dout,
  output logic       ro_overflow,
  output logic       ro_done,
  output logic       ro_health_alert,
  output logic       ro_raw_osc,
  output logic       ro_sync_osc,
  // neuron
  input  logic       pre_spike,
  input  logic [3:0] nr_weight,
  output logic       nr_spike,
  output logic [7:0] nr_membrane_hi,
  output logic       nr_refractory,
  // learning controller
  input  logic       ts_clk,
  input  logic       reward,
  output logic [7:0] dw,
  output logic       dw_valid,
  output logic       dw_ready,
  output logic       dw_ltp,
  output logic       dw_ltd,
  // crossbar analogue front end
  input  logic       xb_adc_ready,
  input  logic [3:0] xb_adc_data,
  output logic [2:0] xb_row,
  output logic [2:0] xb_col,
  output logic       xb_row_en,
  output logic       xb_col_en,
  output logic       xb_pulse,
  output logic [1:0] xb_op,
  output logic [7:0] xb_dac_code,
  output logic [1:0] xb_dac_pins,
  output logic [7:0] xb_vhalf_code,
  output logic       xb_busy,
  output logic       xb_op_done
);
  logic [3:0] so, soe;

  ro_sensor #(.RO_STAGE_DELAY_PS(RO_STAGE_DELAY_PS)) u_sensor (
    .clk, .rst_n, .sclk, .cs_n(cs_n[0]), .mosi, .miso(so[0]), .miso_oe(soe[0]),
    .par_sel(ro_par_sel), .cnt_en(ro_cnt_en), .clr(ro_clr), .byte_sel(ro_byte_sel),
    .mode_serial(ro_mode_serial), .dout(ro_dout), .overflow(ro_overflow),
    .meas_done(ro_done), .health_alert(ro_health_alert),
    .raw_osc(ro_raw_osc), .sync_osc(ro_sync_osc));

  stoch_neuron u_neuron (
    .clk, .rst_n, .sclk, .cs_n(cs_n[1]), .mosi, .miso(so[1]), .miso_oe(soe[1]),
    .ext_spike(pre_spike), .weight(nr_weight), .spike(nr_spike),
    .membrane_hi(nr_membrane_hi), .refractory(nr_refractory));

  stdp_ctrl u_stdp (
    .clk, .rst_n, .sclk, .cs_n(cs_n[2]), .mosi, .miso(so[2]), .miso_oe(soe[2]),
    .ts_clk, .pre_spike, .post_spike(nr_spike), .reward,
    .dw, .dw_valid, .update_ready(dw_ready), .ltp(dw_ltp), .ltd(dw_ltd));

  xbar_ctrl u_xbar (
    .clk, .rst_n, .sclk, .cs_n(cs_n[3]), .mosi, .miso(so[3]), .miso_oe(soe[3]),
    .adc_ready(xb_adc_ready), .adc_data(xb_adc_data),
    .row(xb_row), .col(xb_col), .row_en(xb_row_en), .col_en(xb_col_en),
    .pulse_out(xb_pulse), .op(xb_op), .dac_code(xb_dac_code), .dac_pins(xb_dac_pins),
    .vhalf_code(xb_vhalf_code), .busy(xb_busy), .op_done(xb_op_done));

  assign miso    = |(so & soe);
  assign miso_oe = |soe;

  // the host must select at most one tile at a time
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(~cs_n));
endmodule
