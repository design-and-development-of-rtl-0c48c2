`timescale 1ns/1ps
// tb_neuro_suite: end-to-end run of the whole suite at its default parameters.
// A host model on the shared SPI bus walks the intended pipeline:
//   1. measures the 31-stage ring through the /8 prescaler and collects a
//      TRNG byte from the sensor;
//   2. seeds the neuron's LFSR with that byte, lowers its threshold and lets it
//      fire in free-running mode, with external pre-synaptic spikes arriving;
//   3. lets the STDP controller (post = neuron spike, pre = external spike)
//      turn spike pairs into weight updates, each checked against the default
//      plasticity curve;
//   4. writes the collected updates to the crossbar as SET (dw > 0) or RESET
//      (dw < 0) pulses of |dw| cycles, then runs a READ, a voltage sweep, a
//      compliance-limited SET and a READ with a silent converter (timeout).
// It counts how often each mechanism happened and fails any that never did,
// and checks that only the selected tile drives MISO.
module tb_neuro_suite;
  import neuro_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic sclk, mosi, cs_bfm, miso, miso_oe;
  logic [3:0] cs_n;
  int unsigned sel = 0;
  assign cs_n = cs_bfm ? 4'hF : ~(4'b0001 << sel);

  logic [2:0] ro_par_sel = 0;
  logic ro_cnt_en = 0, ro_clr = 0, ro_byte_sel = 0, ro_mode_serial = 1;
  logic [7:0] ro_dout;
  logic ro_overflow, ro_done, ro_health_alert, ro_raw_osc, ro_sync_osc;
  logic pre_spike = 0;
  logic [3:0] nr_weight = 4'd0;
  logic nr_spike, nr_refractory;
  logic [7:0] nr_membrane_hi;
  logic ts_clk = 0, reward = 0;
  logic [7:0] dw;
  logic dw_valid, dw_ready, dw_ltp, dw_ltd;
  logic xb_adc_ready = 0;
  logic [3:0] xb_adc_data = 4'h5;
  logic [2:0] xb_row, xb_col;
  logic xb_row_en, xb_col_en, xb_pulse, xb_busy, xb_op_done;
  logic [1:0] xb_op, xb_dac_pins;
  logic [7:0] xb_dac_code, xb_vhalf_code;

  neuro_suite dut (.*);
  spi_host_bfm #(.HALF_NS(80)) bfm (.sclk, .mosi, .cs_n(cs_bfm), .miso);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int unsigned tile, input logic [6:0] a, input logic [7:0] d);
    sel = tile; bfm.write(a, d);
  endtask
  task automatic rd(input int unsigned tile, input logic [6:0] a, output logic [7:0] d);
    sel = tile; bfm.read(a, d);
  endtask

  // ---------------- environment ----------------
  always #200 ts_clk = ~ts_clk;                 // timestamp tick every 400 ns
  bit pre_on = 0;
  initial forever begin
    #($urandom_range(700, 1500));
    if (pre_on) begin pre_spike = 1; #60; pre_spike = 0; end
  end
  bit adc_alive = 1;
  int quiet = 0;
  always @(posedge clk) begin
    if (!xb_row_en) begin quiet <= 0; xb_adc_ready <= 0; end
    else if (xb_pulse) quiet <= 0;
    else begin quiet <= quiet + 1; if (quiet >= 12 && adc_alive) xb_adc_ready <= 1; end
  end

  // ---------------- mechanism counters ----------------
  int m_meas = 0, m_trng = 0, m_spike = 0, m_refr = 0, m_ltp = 0, m_ltd = 0, m_window = 0;
  int m_set = 0, m_reset = 0, m_read = 0, m_sweep = 0, m_compl = 0, m_timeout = 0, m_isolation = 0;
  int dw_errors = 0, oe_errors = 0;
  logic [7:0] dw_q[$];
  logic [7:0] lut[8] = '{127, 63, 31, 15, 0, 50, 25, 12};

  always @(negedge clk) begin
    if (nr_spike) m_spike++;
    if (nr_refractory) m_refr++;
    if (dut.u_stdp.state == STDP_UPDATE && !dut.u_stdp.in_win_q) m_window++;
    if (dw_valid) begin
      logic [7:0] d, e;
      int m;
      d = dut.u_stdp.post_ts - dut.u_stdp.pre_ts;
      m = d[7] ? 256 - int'(d) : int'(d);
      e = lut[d[7] ? 4 + (m % 4) : (m % 4)];
      if (e > 127) e = 127;
      if (d[7]) e = -e;
      if (dw != e) dw_errors++;
      if (dw[7]) m_ltd++; else m_ltp++;
      dw_q.push_back(dw);
    end
    if (xb_op_done) begin
      case (dut.u_xbar.op_q)
        XOP_READ:  m_read++;
        XOP_SET:   m_set++;
        XOP_RESET: m_reset++;
        default: ;
      endcase
    end
    // only the selected tile may drive MISO
    if (!cs_bfm) begin
      if (dut.soe != ~cs_n) oe_errors++;
      else m_isolation++;
    end else if (miso_oe) oe_errors++;
  end

  int pw = 0, pw_last = 0;
  always @(negedge clk) begin
    if (xb_pulse) pw++;
    else if (pw != 0) begin pw_last = pw; pw = 0; end
  end

  task automatic xbar_wait(output logic [7:0] st);
    do rd(3, 7'h07, st); while (st[0]);
  endtask

  initial begin
    logic [7:0] r, lo, hi, st, seed;
    int cnt;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // ---- 1. sensor: 31-stage ring, /8, 1000-cycle gate ----
    wr(0, 7'h01, 8'd4);
    wr(0, 7'h05, 8'd1);
    wr(0, 7'h00, 8'h01);
    do rd(0, 7'h06, st); while (!st[0]);
    rd(0, 7'h07, lo); rd(0, 7'h08, hi);
    cnt = {hi, lo};
    m_meas++;
    begin
      real e;
      e = 1000 * 20.0 / (2.0 * (31 * 0.300 + 0.010)) / 8;
      check(cnt > e * 0.97 - 2 && cnt < e * 1.03 + 2, $sformatf("sensor count %0d, expected %0.1f", cnt, e));
    end
    check(ro_done == 1, "sensor done pin");
    wr(0, 7'h09, 8'h01);                   // TRNG on (rings 0 and 1)
    do rd(0, 7'h06, st); while (!st[4]);
    rd(0, 7'h0D, seed);
    m_trng++;
    wr(0, 7'h09, 8'h00);

    // ---- 2./3. neuron seeded from the TRNG, drives STDP ----
    wr(1, 7'h03, seed);
    wr(1, 7'h04, 8'h5A);
    wr(1, 7'h05, 8'h20);                   // threshold 0x20
    wr(1, 7'h00, 8'h65);                   // enable, free-run, refractory 3
    wr(2, 7'h02, 8'd1);                    // window of one tick: some pairs fall outside
    wr(2, 7'h00, 8'h01);                   // STDP enable, continuous
    pre_on = 1;
    begin
      int guard;
      guard = 0;
      while ((m_ltp < 3 || m_ltd < 3) && guard < 200) begin
        #1us; guard++;
      end
    end
    pre_on = 0;
    #2us;
    check(dw_errors == 0, $sformatf("every committed update follows the plasticity curve (%0d errors)", dw_errors));
    rd(2, 7'h06, r);
    check(r == dw, "WT_UPD over SPI equals the dw port");
    rd(1, 7'h07, r);
    check(r[2] == 1, "neuron spike-latched status");

    // ---- 4. write the updates into the crossbar ----
    wr(3, 7'h06, 8'hC0);
    for (int i = 0; i < 4 && dw_q.size() > 0; i++) begin
      logic [7:0] d;
      int w;
      d = dw_q.pop_front();
      w = d[7] ? 256 - int'(d) : int'(d);
      if (w == 0) w = 1;
      wr(3, 7'h01, d[7] ? 8'h02 : 8'h01);
      wr(3, 7'h02, 8'(i)); wr(3, 7'h03, 8'(7 - i));
      wr(3, 7'h04, 8'(w)); wr(3, 7'h05, 8'(w >> 8));
      wr(3, 7'h00, 8'h01);
      xbar_wait(st);
      check(pw_last == w, $sformatf("crossbar pulse of %0d cycles for dw %0d (got %0d)", w, $signed(d), pw_last));
      check(st[1] && !st[2], "crossbar op done without error");
    end
    // read back a cell
    wr(3, 7'h01, 8'h00);
    wr(3, 7'h00, 8'h01);
    xbar_wait(st);
    rd(3, 7'h08, r);
    check(r == 8'h55, "crossbar read value nibble-replicated");
    // voltage sweep 0x20..0x80 step 0x20 with SET pulses of 3 cycles
    wr(3, 7'h01, 8'h01);
    wr(3, 7'h04, 8'd3); wr(3, 7'h05, 8'd0);
    wr(3, 7'h09, 8'h20); wr(3, 7'h0A, 8'h80); wr(3, 7'h0B, 8'h20);
    begin
      int s0;
      s0 = m_set;
      wr(3, 7'h00, 8'h05);
      xbar_wait(st);
      m_sweep = m_set - s0;
      check(m_sweep == 4, $sformatf("sweep visits 4 codes (got %0d)", m_sweep));
    end
    // compliance-limited SET
    wr(3, 7'h0D, 8'h40);
    wr(3, 7'h04, 8'd50);
    wr(3, 7'h00, 8'h09);
    xbar_wait(st);
    if (st[7]) m_compl++;
    check(pw_last == 1, "compliance ends the pulse at once");
    // silent converter: timeout
    adc_alive = 0;
    wr(3, 7'h01, 8'h00);
    wr(3, 7'h00, 8'h01);
    xbar_wait(st);
    if (st[2]) m_timeout++;
    adc_alive = 1;

    // ---- mechanism coverage ----
    $display("mechanisms: meas=%0d trng=%0d spikes=%0d refractory=%0d ltp=%0d ltd=%0d out_of_window=%0d",
             m_meas, m_trng, m_spike, m_refr, m_ltp, m_ltd, m_window);
    $display("            set=%0d reset=%0d read=%0d sweep_steps=%0d compliance=%0d timeout=%0d isolation=%0d",
             m_set, m_reset, m_read, m_sweep, m_compl, m_timeout, m_isolation);
    check(m_meas > 0, "sensor measurement happened");
    check(m_trng > 0, "TRNG byte collected");
    check(m_spike > 0, "neuron spiked");
    check(m_refr > 0, "neuron refractory interval");
    check(m_ltp > 0, "potentiation update");
    check(m_ltd > 0, "depression update");
    check(m_window > 0, "pair outside the learning window");
    check(m_set > 0, "crossbar SET");
    check(m_reset > 0, "crossbar RESET");
    check(m_read > 0, "crossbar READ");
    check(m_sweep > 0, "crossbar sweep");
    check(m_compl > 0, "crossbar compliance abort");
    check(m_timeout > 0, "crossbar sense timeout");
    check(m_isolation > 0 && oe_errors == 0, $sformatf("MISO bus isolation (%0d errors)", oe_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
