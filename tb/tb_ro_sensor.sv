`timescale 1ns/1ps
// tb_ro_sensor: exercises the PVT sensor tile with slowed ring models (2 ns
// per stage, so the longest ring runs at about 8 MHz) and compares every
// measured count with the count expected from the ring's stage count, the
// gate length and the prescaler: f = 1 / (2 * STAGES * stage delay).
// Covers: serial auto-gate measurement and its exact gate length, all five
// rings (count falls as the ring grows), the four prescaler ratios, parallel
// control with byte-wise readout and the edge-only clear, counter overflow,
// per-ring enables, health bounds and stall alert, the differential beat
// measurement, and the TRNG data register.
module tb_ro_sensor;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DLY_PS = 2000;
  localparam int STG[5] = '{7, 11, 15, 21, 31};

  logic sclk, mosi, cs_n, miso, miso_oe;
  logic [2:0] par_sel = 3'd4;
  logic cnt_en = 0, clr = 0, byte_sel = 0, mode_serial = 1;
  logic [7:0] dout;
  logic overflow, meas_done, health_alert, raw_osc, sync_osc;

  ro_sensor #(.RO_STAGE_DELAY_PS(DLY_PS)) dut (
    .clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe,
    .par_sel, .cnt_en, .clr, .byte_sel, .mode_serial,
    .dout, .overflow, .meas_done, .health_alert, .raw_osc, .sync_osc);
  spi_host_bfm #(.HALF_NS(80)) bfm (.sclk, .mosi, .cs_n, .miso);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // expected rising edges in `cycles` system clocks for ring i, prescaler div
  function automatic real expected(input int i, input int cycles, input int div);
    real half_ns;
    half_ns = STG[i] * DLY_PS / 1000.0 + 0.010;   // + mean model jitter
    return cycles * 20.0 / (2.0 * half_ns) / div;
  endfunction

  function automatic bit near(input int got, input real exp_v);
    return (got >= exp_v * 0.97 - 2.0) && (got <= exp_v * 1.03 + 2.0);
  endfunction

  int busy_cycles = 0;
  always @(negedge clk) if (dut.busy) busy_cycles++;

  task automatic measure(input int gate, output int cnt);
    logic [7:0] lo, hi, st;
    bfm.write(7'h03, gate[7:0]);
    bfm.write(7'h04, gate[15:8]);
    busy_cycles = 0;
    bfm.write(7'h00, 8'h01);
    do bfm.read(7'h06, st); while (!st[0]);
    bfm.read(7'h07, lo);
    bfm.read(7'h08, hi);
    cnt = {hi, lo};
  endtask

  initial begin
    logic [7:0] rd, st;
    int cnt, c[5];
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    bfm.read(7'h02, rd); check(rd == 8'h1F, "all rings enabled at reset");

    // a) serial mode, 31-stage ring, no prescaler
    bfm.write(7'h01, 8'd4);
    measure(1000, cnt);
    check(near(cnt, expected(4, 1000, 1)), $sformatf("31-stage count %0d exp %0.1f", cnt, expected(4, 1000, 1)));
    check(busy_cycles == 1000, $sformatf("gate lasts 1000 cycles (got %0d)", busy_cycles));
    check(meas_done == 1, "done pin");

    // b) all five rings through the /8 prescaler
    bfm.write(7'h05, 8'd1);
    for (int i = 0; i < 5; i++) begin
      bfm.write(7'h01, 8'(i));
      measure(4000, c[i]);
      check(near(c[i], expected(i, 4000, 8)), $sformatf("ring %0d /8 count %0d exp %0.1f", i, c[i], expected(i, 4000, 8)));
    end
    check(c[0] > c[1] && c[1] > c[2] && c[2] > c[3] && c[3] > c[4], "longer rings count fewer edges");

    // c) prescaler ratios on the 31-stage ring
    bfm.write(7'h01, 8'd4);
    for (int p = 2; p <= 4; p++) begin
      bfm.write(7'h05, 8'(p));
      measure(8000, cnt);
      check(near(cnt, expected(4, 8000, 1 << (p + 2))), $sformatf("prescale /%0d count %0d", 1 << (p + 2), cnt));
    end
    bfm.write(7'h05, 8'd0);

    // d) health monitor: bounds and stall
    bfm.write(7'h0B, 8'h10); bfm.write(7'h0C, 8'h20);
    bfm.write(7'h09, 8'h02);
    measure(1000, cnt);                 // about 161 edges: upper byte 0 < 0x10
    repeat (3) @(negedge clk);
    bfm.read(7'h0E, rd); check(rd[0] == 1 && rd[1] == 1 && rd[3] == 0, "count below the lower bound alerts");
    check(health_alert == 1, "health alert pin");
    bfm.write(7'h0B, 8'h00);
    measure(1000, cnt);
    repeat (3) @(negedge clk);
    bfm.read(7'h0E, rd); check(rd == 8'h00, "count inside the bounds: no alert");
    bfm.write(7'h02, 8'h0F);            // disable ring 4: it stalls
    measure(1000, cnt);
    repeat (3) @(negedge clk);
    check(cnt == 0, "disabled ring gives a zero count");
    bfm.read(7'h0E, rd); check(rd[3] == 1 && rd[0] == 1, "stalled ring alerts");
    bfm.write(7'h02, 8'h1F);
    bfm.write(7'h09, 8'h00);
    bfm.write(7'h00, 8'h02);            // clear measurement
    bfm.read(7'h07, rd); check(rd == 0, "clear empties the result");

    // e) differential beat of rings 3 (21 stages) and 4 (31 stages)
    bfm.write(7'h0A, {2'b00, 3'd4, 3'd3});
    bfm.write(7'h09, 8'h04);
    measure(2000, cnt);
    begin
      real fa, fb, eb;
      fa = expected(3, 2000, 1); fb = expected(4, 2000, 1); eb = fa - fb;
      check(cnt >= eb * 0.9 - 3 && cnt <= eb * 1.1 + 3, $sformatf("beat count %0d exp %0.1f", cnt, eb));
    end
    bfm.write(7'h09, 8'h00);

    // f) TRNG bytes from rings 0 and 1
    bfm.write(7'h0A, {2'b00, 3'd1, 3'd0});
    bfm.write(7'h09, 8'h01);
    begin
      logic [7:0] b[8];
      int distinct;
      for (int i = 0; i < 8; i++) begin
        do bfm.read(7'h06, st); while (!st[4]);
        bfm.read(7'h0D, b[i]);
      end
      distinct = 0;
      for (int i = 1; i < 8; i++) if (b[i] != b[i-1]) distinct++;
      check(distinct >= 5, "TRNG bytes vary");
    end
    bfm.write(7'h09, 8'h00);

    // g) parallel control, 31-stage ring, count while cnt_en
    mode_serial = 0; par_sel = 3'd4;
    @(negedge clk); cnt_en = 1;
    repeat (3000) @(negedge clk);
    cnt_en = 0;
    repeat (5) @(negedge clk);
    clr = 1;
    repeat (5) @(negedge clk);
    byte_sel = 0; #1 cnt = dout;
    byte_sel = 1; #1 cnt = cnt | (int'(dout) << 8);
    check(near(cnt, expected(4, 3000, 1)), $sformatf("parallel count %0d exp %0.1f", cnt, expected(4, 3000, 1)));
    // clr still high: counting continues, no further clearing
    cnt_en = 1;
    repeat (2000) @(negedge clk);
    cnt_en = 0;
    repeat (5) @(negedge clk);
    check(dut.count > 250, "holding clear high does not keep the counter reset");
    clr = 0; repeat (5) @(negedge clk); clr = 1; repeat (5) @(negedge clk);
    byte_sel = 0; #1 cnt = dout;
    byte_sel = 1; #1 cnt = cnt | (int'(dout) << 8);
    check(near(cnt, expected(4, 2000, 1)), $sformatf("second parallel count %0d", cnt));
    clr = 0;

    // h) overflow: count for longer than 65535 edges
    bfm.write(7'h02, 8'h10);            // only ring 4 on
    @(negedge clk); cnt_en = 1;
    repeat (420000) @(negedge clk);   // 8.4 ms at about 8 MHz
    cnt_en = 0;
    repeat (5) @(negedge clk);
    clr = 1; repeat (5) @(negedge clk); clr = 0;
    byte_sel = 0; #1 cnt = dout;
    byte_sel = 1; #1 cnt = cnt | (int'(dout) << 8);
    check(cnt == 16'hFFFF && overflow == 1, $sformatf("counter saturates with overflow (%04x)", cnt));

    // i) the longest serial gate, 65535 cycles, on the 31-stage ring at /64
    mode_serial = 1;
    bfm.write(7'h00, 8'h02);            // clear the previous result
    bfm.write(7'h01, 8'd4);
    bfm.write(7'h05, 8'd4);
    measure(65535, cnt);
    check(busy_cycles == 65535, $sformatf("maximum gate lasts 65535 cycles (got %0d)", busy_cycles));
    check(near(cnt, expected(4, 65535, 64)), $sformatf("maximum-gate count %0d, expected %0.1f", cnt, expected(4, 65535, 64)));

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
