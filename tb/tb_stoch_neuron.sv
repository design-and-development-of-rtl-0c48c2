`timescale 1ns/1ps
// tb_stoch_neuron: drives the neuron tile over SPI and checks it cycle by cycle
// against a reference model of the paper's equations:
//   fire = s[7:0] < LUT[s[15:13]];  V <- min(0xFFFF, V+I) on fire|ext,
//   else max(0, V-leak);  spike and V <- 0 when V[15:8] >= THRESH;
//   refractory hold of CTRL[7:5] cycles after a spike.
// The model takes the LFSR state from the block (the LFSR has its own test) and
// keeps its own membrane, refractory counter and input synchroniser.
// Scenarios: register reset values and readback, free-running default
// configuration (about 3-4 spikes per 1200 cycles), threshold sweep (rate
// falls monotonically), refractory interval, host-driven weights, external
// spikes, accumulator reset and status bits, and the per-state fire
// probability LUT/256 over one full maximal-length LFSR period.
module tb_stoch_neuron;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic sclk, mosi, cs_n, miso, miso_oe;
  logic ext_spike = 0;
  logic [3:0] weight = 0;
  logic spike, refractory;
  logic [7:0] membrane_hi;

  stoch_neuron dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe,
                    .ext_spike, .weight, .spike, .membrane_hi, .refractory);
  spi_host_bfm #(.HALF_NS(80)) bfm (.sclk, .mosi, .cs_n, .miso);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- reference model ----------------
  logic [15:0] mv = 0;
  logic [2:0]  mrefr = 0;
  logic        mspike = 0, me1 = 0, me2 = 0;
  logic [3:0]  mw = 0;
  int          model_errors = 0, nspikes = 0, model_cycles = 0;
  bit          model_on = 0;

  always @(negedge clk) begin
    if (model_on) begin
      logic [7:0] ctrl, th, lk, act;
      logic [15:0] s, cur;
      logic ev;
      // compare what the block shows now with what the model predicted
      if (dut.v != mv || spike != mspike || membrane_hi != mv[15:8] || refractory != (mrefr != 0)) begin
        model_errors++;
        if (model_errors < 5)
          $display("mismatch t=%0t v %04x/%04x spike %0d/%0d", $time, dut.v, mv, spike, mspike);
      end
      model_cycles++;
      if (mspike) nspikes++;
      // predict the next cycle
      ctrl = dut.r_ctrl; th = dut.r_thresh; lk = dut.r_decay; s = dut.s;
      act = dut.lut[s[15:13]];
      ev  = (s[7:0] < act) || me2;
      cur = ctrl[2] ? {8'h00, act} : {12'h000, mw};
      if (ctrl[1]) begin
        mv = 0; mspike = 0; mrefr = 0;
      end else if (!ctrl[0]) begin
        mspike = 0;
      end else if (mrefr != 0) begin
        mspike = 0; mrefr--;
      end else if (mv[15:8] >= th) begin
        mspike = 1; mv = 0; mrefr = ctrl[7:5];
      end else begin
        mspike = 0;
        if (ev) mv = (32'(mv) + 32'(cur) > 32'hFFFF) ? 16'hFFFF : mv + cur;
        else    mv = (mv > 16'(lk)) ? mv - 16'(lk) : 16'h0;
      end
    end
    me2 = me1; me1 = ext_spike; mw = weight;
  end

  task automatic run_cycles(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic count_spikes(input int n, output int k);
    int start;
    start = nspikes;
    run_cycles(n);
    k = nspikes - start;
  endtask

  initial begin
    logic [7:0] rd;
    int k, prev_k;
    int rates[4];
    logic [7:0] exp_lut[8] = '{16, 32, 64, 128, 192, 224, 240, 248};
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // reset values
    bfm.read(7'h05, rd); check(rd == 8'h80, "THRESH reset 0x80");
    bfm.read(7'h06, rd); check(rd == 8'h04, "DECAY reset 4");
    bfm.read(7'h01, rd); check(rd == 8'h00, "POLY_L reset");
    bfm.read(7'h02, rd); check(rd == 8'hB4, "POLY_H reset");
    for (int i = 0; i < 8; i++) begin
      bfm.read(7'(8 + i), rd); check(rd == exp_lut[i], $sformatf("LUT%0d reset", i));
    end
    // register write / readback
    bfm.write(7'h06, 8'h07); bfm.read(7'h06, rd); check(rd == 8'h07, "DECAY readback");
    bfm.write(7'h06, 8'h04);
    bfm.write(7'h03, 8'hE1); bfm.write(7'h04, 8'hAC);
    @(negedge clk);
    check(dut.s == 16'hACE1, "seed write reloads the LFSR");

    model_on = 1;
    // 1) free-running default configuration: enable + free-run
    bfm.write(7'h00, 8'h05);
    count_spikes(1200, k);
    $display("default config: %0d spikes in 1200 cycles", k);
    check(k >= 3 && k <= 5, $sformatf("default firing 3-5 spikes per 1200 cycles, got %0d", k));
    bfm.read(7'h07, rd); check(rd[2] == 1'b1, "spike-latched status bit");

    // 2) threshold sweep: rate falls monotonically
    begin
      logic [7:0] ths[4] = '{8'h20, 8'h40, 8'h80, 8'hE0};
      for (int i = 0; i < 4; i++) begin
        bfm.write(7'h05, ths[i]);
        count_spikes(4000, rates[i]);
      end
      $display("rates: %0d %0d %0d %0d", rates[0], rates[1], rates[2], rates[3]);
      check(rates[0] > rates[1] && rates[1] > rates[2] && rates[2] > rates[3], "rate monotonic in threshold");
    end

    // 3) refractory period of 7 cycles with a low threshold
    bfm.write(7'h05, 8'h01);
    bfm.write(7'h00, 8'hE5);
    begin
      int last, gap_min, cyc;
      last = -100; gap_min = 1000; cyc = 0;
      repeat (500) begin
        @(negedge clk); cyc++;
        if (spike) begin
          if (last >= 0 && cyc - last < gap_min) gap_min = cyc - last;
          last = cyc;
        end
      end
      check(gap_min >= 8, $sformatf("spikes at least 8 cycles apart with refractory 7, got %0d", gap_min));
    end
    bfm.read(7'h00, rd); check(rd == 8'hE5, "CTRL readback");

    // 4) host-driven mode: rate grows with weight (threshold 0x06, leak 4)
    bfm.write(7'h05, 8'h06);
    bfm.write(7'h00, 8'h01);
    prev_k = -1;
    foreach (rates[i]) begin
      logic [3:0] ws[4] = '{4'd2, 4'd6, 4'd10, 4'd15};
      weight = ws[i];
      count_spikes(5000, rates[i]);
    end
    $display("host-mode rates: %0d %0d %0d %0d", rates[0], rates[1], rates[2], rates[3]);
    check(rates[0] == 0, "weight 2 does not overcome the leak");
    check(rates[1] < rates[2] && rates[2] < rates[3], "host-mode rate rises with weight");

    // 5) external spikes with the stochastic path silenced
    for (int i = 0; i < 8; i++) bfm.write(7'(8 + i), 8'h00);
    bfm.write(7'h05, 8'h10);
    weight = 4'd8;
    ext_spike = 1;
    count_spikes(2000, k);
    // 0x1000 / 8 = 512 integrating cycles per spike (+1 for the spike cycle)
    check(k >= 3 && k <= 4, $sformatf("external-spike firing count %0d", k));
    ext_spike = 0;
    run_cycles(1200);
    check(dut.v == 0, "membrane leaks to zero without input");

    // 6) accumulator reset
    ext_spike = 1; run_cycles(100); ext_spike = 0;
    bfm.write(7'h00, 8'h03);
    run_cycles(2);
    check(membrane_hi == 0 && dut.v == 0, "accumulator reset clears the membrane");
    bfm.read(7'h07, rd); check(rd[2] == 1'b0, "accumulator reset clears spike latched");
    bfm.write(7'h00, 8'h01);

    // 7) per-state fire probability over one full LFSR period (65535 states,
    //    polynomial 0xB400): every state is visited once, so table state k is
    //    visited 8192 times (8191 for k = 0, which misses the all-zero state)
    //    and, since s[7:0] is then uniform, fires exactly 32 * LUT[k] times
    //    (one fewer for k = 0 with a non-zero entry): probability LUT[k]/256.
    begin
      logic [7:0] tab[8] = '{8'd0, 8'd8, 8'd40, 8'd100, 8'd160, 8'd200, 8'd250, 8'd255};
      int visits[8], fires[8];
      for (int i = 0; i < 8; i++) begin
        bfm.write(7'(8 + i), tab[i]);
        visits[i] = 0; fires[i] = 0;
      end
      @(negedge clk);
      repeat (65535) begin
        visits[dut.s[15:13]]++;
        if (dut.fire_st) fires[dut.s[15:13]]++;
        @(negedge clk);
      end
      for (int i = 0; i < 8; i++) begin
        int ev, ef;
        ev = (i == 0) ? 8191 : 8192;
        ef = 32 * int'(tab[i]) - ((i == 0 && tab[i] != 0) ? 1 : 0);
        check(visits[i] == ev && fires[i] == ef,
              $sformatf("state %0d: %0d fires in %0d visits, expected %0d in %0d", i, fires[i], visits[i], ef, ev));
      end
    end

    check(model_errors == 0, $sformatf("cycle-accurate model mismatches: %0d over %0d cycles", model_errors, model_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
