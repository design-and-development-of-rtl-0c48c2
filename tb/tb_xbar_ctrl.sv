`timescale 1ns/1ps
// tb_xbar_ctrl: runs the crossbar controller tile over SPI against a simple
// converter model (ready rises ADC_DELAY cycles after the array is enabled and
// no pulse is being driven) and checks: SET/RESET/FORM/READ sequencing and
// addresses, exact pulse widths (1, 37, 511 cycles), the absent pulse on READ,
// nibble-replicated ADC capture, the 256-cycle sense timeout and error flag,
// pulse trains with gaps and the delivered-pulse count, compliance abort, the
// automated sweep (codes start..end by step) and its zero-step guard, abort,
// and the half-select bias register.
module tb_xbar_ctrl;
  import neuro_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic sclk, mosi, cs_n, miso, miso_oe;
  logic adc_ready = 0;
  logic [3:0] adc_data = 4'h9;
  logic [2:0] row, col;
  logic row_en, col_en, pulse_out, busy, op_done;
  logic [1:0] op, dac_pins;
  logic [7:0] dac_code, vhalf_code;

  xbar_ctrl dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe,
                 .adc_ready, .adc_data, .row, .col, .row_en, .col_en, .pulse_out,
                 .op, .dac_code, .dac_pins, .vhalf_code, .busy, .op_done);
  spi_host_bfm #(.HALF_NS(80)) bfm (.sclk, .mosi, .cs_n, .miso);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- converter model ----------------
  localparam int ADC_DELAY = 20;
  bit adc_alive = 1;
  int quiet = 0;
  always @(posedge clk) begin
    if (!row_en) begin quiet <= 0; adc_ready <= 0; end
    else if (pulse_out) quiet <= 0;
    else begin
      quiet <= quiet + 1;
      if (quiet >= ADC_DELAY && adc_alive) adc_ready <= 1;
    end
  end

  // ---------------- monitors ----------------
  int pulses = 0, cur_w = 0, last_w = 0, min_w = 1 << 20, dones = 0, sense_cycles = 0;
  int gap_cur = 0, gap_last = 0;
  logic [7:0] done_codes[$];   // voltage code at the start of each pulse
  logic [7:0] pulse_code;
  logic [2:0] pulse_row, pulse_col;
  bit en_ok = 1;
  always @(negedge clk) begin
    if (pulse_out) begin
      if (cur_w == 0) begin pulses++; pulse_code = dac_code; done_codes.push_back(dac_code); pulse_row = row; pulse_col = col; end
      if (gap_cur != 0) gap_last = gap_cur;
      gap_cur = 0;
      cur_w++;
      if (!row_en || !col_en) en_ok = 0;
    end else begin
      if (cur_w != 0) begin last_w = cur_w; if (cur_w < min_w) min_w = cur_w; end
      cur_w = 0;
      if (dut.state == XS_GAP) gap_cur++;
    end
    if (dut.state == XS_SENSE) sense_cycles++;
    if (op_done) dones++;
  end

  task automatic clear_mon();
    pulses = 0; dones = 0; sense_cycles = 0; min_w = 1 << 20; last_w = 0; done_codes = {};
  endtask

  task automatic wait_idle(input int max_cycles = 5000);
    int n;
    n = 0;
    do begin @(negedge clk); n++; end while ((busy || dut.state != XS_IDLE) && n < max_cycles);
    repeat (3) @(negedge clk);
  endtask

  logic [7:0] ctrl_cfg = 8'h00;   // CTRL configuration bits sent with start
  task automatic run_op(input logic [1:0] mode, input int width);
    bfm.write(7'h01, {6'd0, mode});
    bfm.write(7'h04, width[7:0]);
    bfm.write(7'h05, {7'd0, width[8]});
    clear_mon();
    bfm.write(7'h00, ctrl_cfg | 8'h01);
    wait_idle();
  endtask

  initial begin
    logic [7:0] rd;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    bfm.read(7'h0F, rd); check(rd == 8'h40, "V/2 reset value");
    bfm.write(7'h0F, 8'h5C); bfm.read(7'h0F, rd);
    check(rd == 8'h5C && vhalf_code == 8'h5C, "half-select bias code written and driven");
    bfm.read(7'h07, rd); check(rd[0] == 0, "idle: not busy");

    // SET, width 37, row 5, column 3, code 0xA5
    bfm.write(7'h02, 8'd5); bfm.write(7'h03, 8'd3); bfm.write(7'h06, 8'hA5);
    bfm.write(7'h0C, 8'h11);
    adc_data = 4'h9;
    run_op(2'b01, 37);
    check(pulses == 1 && last_w == 37, $sformatf("SET: one pulse of 37 cycles (got %0d x %0d)", pulses, last_w));
    check(pulse_row == 5 && pulse_col == 3 && pulse_code == 8'hA5 && en_ok, "SET: address, code and enables during the pulse");
    check(dones == 1, "SET: one op_done");
    bfm.read(7'h08, rd); check(rd == 8'h99, "ADC reading nibble-replicated");
    bfm.read(7'h07, rd); check(rd[1] == 1 && rd[2] == 0 && rd[0] == 0, "SET: done, no error, idle");
    bfm.read(7'h0E, rd); check(rd == 8'd1, "one pulse delivered");

    // widths 1 and 511, RESET and FORM
    run_op(2'b10, 1);
    check(pulses == 1 && last_w == 1, $sformatf("RESET: 1-cycle pulse (got %0d)", last_w));
    run_op(2'b11, 511);
    check(pulses == 1 && last_w == 511, $sformatf("FORM: 511-cycle pulse (got %0d)", last_w));

    // READ: no pulse
    adc_data = 4'h6;
    run_op(2'b00, 37);
    check(pulses == 0 && dones == 1, "READ: no pulse, one op_done");
    bfm.read(7'h08, rd); check(rd == 8'h66, "READ captured 0x66");

    // sense timeout: converter silent
    adc_alive = 0;
    run_op(2'b00, 10);
    check(sense_cycles == 256, $sformatf("sense timeout after 256 cycles (got %0d)", sense_cycles));
    bfm.read(7'h07, rd); check(rd[2] == 1, "timeout sets the error flag");
    adc_alive = 1;

    // pulse train: 4 pulses of 5 cycles, 3-cycle gaps
    bfm.write(7'h0C, 8'h34);
    run_op(2'b01, 5);
    check(pulses == 4 && min_w == 5 && last_w == 5, $sformatf("train: 4 pulses of 5 (got %0d)", pulses));
    check(gap_last == 3, $sformatf("train: 3-cycle gap (got %0d)", gap_last));
    bfm.read(7'h0E, rd); check(rd == 8'd4, "PULSE_C counts 4");
    bfm.write(7'h0C, 8'h11);

    // compliance: sensed 0x99 >= 0x80 ends the pulse at once
    bfm.write(7'h0D, 8'h80);
    ctrl_cfg = 8'h08;                  // compliance enable
    adc_data = 4'h9;
    run_op(2'b01, 100);
    check(pulses == 1 && last_w == 1, $sformatf("compliance cuts the pulse (width %0d)", last_w));
    bfm.read(7'h07, rd); check(rd[7] == 1, "compliance-hit status");
    adc_data = 4'h3;
    run_op(2'b01, 100);
    check(last_w == 100, "below compliance the pulse runs full width");
    bfm.read(7'h07, rd); check(rd[7] == 0, "compliance-hit clear on a new start");
    run_op(2'b10, 20);
    adc_data = 4'hF;
    run_op(2'b10, 20);
    check(last_w == 20, "compliance applies to SET and FORM only");
    ctrl_cfg = 8'h00;

    // automated sweep 0x10..0x40 step 0x10
    bfm.write(7'h09, 8'h10); bfm.write(7'h0A, 8'h40); bfm.write(7'h0B, 8'h10);
    bfm.write(7'h01, 8'h01); bfm.write(7'h04, 8'd4); bfm.write(7'h05, 8'd0);
    clear_mon();
    bfm.write(7'h00, 8'h05);
    wait_idle(20000);
    check(pulses == 4 && dones == 4, $sformatf("sweep: 4 steps (got %0d pulses)", pulses));
    check(done_codes.size() == 4 && done_codes[0] == 8'h10 && done_codes[3] == 8'h40, "sweep codes 0x10..0x40");
    bfm.read(7'h07, rd); check(rd[1] == 1, "sweep done");
    // zero-step guard
    bfm.write(7'h0B, 8'h00);
    clear_mon();
    bfm.write(7'h00, 8'h05);
    wait_idle(2000);
    check(pulses == 0 && busy == 0, "zero step ends the sweep without pulses");
    bfm.write(7'h00, 8'h00);

    // abort during a long pulse
    bfm.write(7'h04, 8'hF4); bfm.write(7'h05, 8'h01);
    clear_mon();
    bfm.write(7'h00, 8'h01);
    repeat (50) @(negedge clk);
    check(pulse_out == 1, "long pulse running");
    bfm.write(7'h00, 8'h02);
    repeat (3) @(negedge clk);
    check(busy == 0 && pulse_out == 0 && row_en == 0 && col_en == 0, "abort returns to idle with outputs off");

    // every cell of the 8x8 array: a one-cycle SET must reach the addressed
    // row and column
    begin
      int bad;
      bad = 0;
      ctrl_cfg = 8'h00;
      bfm.write(7'h0C, 8'h00);
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) begin
          bfm.write(7'h02, 8'(r));
          bfm.write(7'h03, 8'(c));
          run_op(XOP_SET, 1);
          if (!(pulses == 1 && pulse_row == 3'(r) && pulse_col == 3'(c) && last_w == 1 && dones == 1)) bad++;
        end
      check(bad == 0, $sformatf("all 64 cells addressed (%0d wrong)", bad));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
