`timescale 1ns/1ps
// neuro_pkg: constants and types shared by the four tiles of the neuromorphic
// suite. Every tile exposes a 16-entry, 8-bit register file reached through the
// same SPI slave; the register addresses below follow the published register
// maps. Enumerations for the learning and crossbar state machines live here
// too so that testbenches can name the states.
package neuro_pkg;

  // ---------------- SPI frame ----------------
  localparam int unsigned SPI_FRAME_BITS = 16;  // RW | ADDR[6:0] | DATA[7:0]

  // ---------------- sensor register map ----------------
  localparam logic [3:0] RO_CTRL      = 4'h0;
  localparam logic [3:0] RO_SEL       = 4'h1;
  localparam logic [3:0] RO_EN        = 4'h2;
  localparam logic [3:0] RO_GATE_L    = 4'h3;
  localparam logic [3:0] RO_GATE_H    = 4'h4;
  localparam logic [3:0] RO_PRESCALE  = 4'h5;
  localparam logic [3:0] RO_STATUS    = 4'h6;
  localparam logic [3:0] RO_FREQ_L    = 4'h7;
  localparam logic [3:0] RO_FREQ_H    = 4'h8;
  localparam logic [3:0] RO_TRNG_CTL  = 4'h9;
  localparam logic [3:0] RO_DIFF_SEL  = 4'hA;
  localparam logic [3:0] RO_HEALTH_LO = 4'hB;
  localparam logic [3:0] RO_HEALTH_HI = 4'hC;
  localparam logic [3:0] RO_TRNG_DAT  = 4'hD;
  localparam logic [3:0] RO_HEALTH_ST = 4'hE;

  // ---------------- neuron register map ----------------
  localparam logic [3:0] NR_CTRL   = 4'h0;
  localparam logic [3:0] NR_POLY_L = 4'h1;
  localparam logic [3:0] NR_POLY_H = 4'h2;
  localparam logic [3:0] NR_SEED_L = 4'h3;
  localparam logic [3:0] NR_SEED_H = 4'h4;
  localparam logic [3:0] NR_THRESH = 4'h5;
  localparam logic [3:0] NR_DECAY  = 4'h6;
  localparam logic [3:0] NR_STATUS = 4'h7;

  // ---------------- STDP register map ----------------
  localparam logic [3:0] SD_CTRL     = 4'h0;
  localparam logic [3:0] SD_LEARN_RT = 4'h1;
  localparam logic [3:0] SD_TIME_WIN = 4'h2;
  localparam logic [3:0] SD_PRE_TS   = 4'h3;
  localparam logic [3:0] SD_POST_TS  = 4'h4;
  localparam logic [3:0] SD_DELTA_T  = 4'h5;
  localparam logic [3:0] SD_WT_UPD   = 4'h6;
  localparam logic [3:0] SD_STATUS   = 4'h7;

  // ---------------- crossbar register map ----------------
  localparam logic [3:0] XB_CTRL      = 4'h0;
  localparam logic [3:0] XB_MODE      = 4'h1;
  localparam logic [3:0] XB_ROW       = 4'h2;
  localparam logic [3:0] XB_COL       = 4'h3;
  localparam logic [3:0] XB_PULSE_L   = 4'h4;
  localparam logic [3:0] XB_PULSE_H   = 4'h5;
  localparam logic [3:0] XB_DAC       = 4'h6;
  localparam logic [3:0] XB_STATUS    = 4'h7;
  localparam logic [3:0] XB_ADC       = 4'h8;
  localparam logic [3:0] XB_SWP_START = 4'h9;
  localparam logic [3:0] XB_SWP_END   = 4'hA;
  localparam logic [3:0] XB_SWP_STEP  = 4'hB;
  localparam logic [3:0] XB_REPEAT    = 4'hC;
  localparam logic [3:0] XB_COMPL     = 4'hD;
  localparam logic [3:0] XB_PULSE_C   = 4'hE;
  localparam logic [3:0] XB_VHALF     = 4'hF;


  // ---------------- STDP controller ----------------
  typedef enum logic [1:0] {
    STDP_IDLE    = 2'd0,
    STDP_COMPUTE = 2'd1,
    STDP_UPDATE  = 2'd2,
    STDP_DONE    = 2'd3
  } stdp_state_e;

  // ---------------- crossbar controller ----------------
  typedef enum logic [1:0] {
    XOP_READ  = 2'b00,
    XOP_SET   = 2'b01,
    XOP_RESET = 2'b10,
    XOP_FORM  = 2'b11
  } xbar_op_e;

  typedef enum logic [2:0] {
    XS_IDLE   = 3'd0,
    XS_SETUP  = 3'd1,
    XS_PULSE  = 3'd2,
    XS_GAP    = 3'd3,
    XS_SENSE  = 3'd4,
    XS_REPORT = 3'd5,
    XS_SWEEP  = 3'd6
  } xbar_state_e;

  localparam int unsigned XBAR_SENSE_TIMEOUT = 256;  // cycles

endpackage
