`timescale 1ns/1ps
// tb_ring_osc: checks the ring-oscillator model. A disabled ring rests high;
// an enabled ring without jitter has a period of exactly 2*STAGES stage
// delays; with jitter the period stays within the jitter bound and varies.
module tb_ring_osc;
  int checks = 0, failures = 0;
  logic en7 = 0, en31 = 0, enj = 0;
  logic o7, o31, oj;

  ring_osc #(.STAGES(7),  .STAGE_DELAY_PS(300), .JITTER_PS(0))  r7  (.en(en7),  .osc(o7));
  ring_osc #(.STAGES(31), .STAGE_DELAY_PS(300), .JITTER_PS(0))  r31 (.en(en31), .osc(o31));
  ring_osc #(.STAGES(11), .STAGE_DELAY_PS(300), .JITTER_PS(50)) rj  (.en(enj),  .osc(oj));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n7 = 0, n31 = 0, nj = 0;
  realtime tj_last = 0, tj_min = 1e9, tj_max = 0;
  always @(posedge o7)  n7++;
  always @(posedge o31) n31++;
  always @(posedge oj) begin
    if (tj_last > 0) begin
      if ($realtime - tj_last < tj_min) tj_min = $realtime - tj_last;
      if ($realtime - tj_last > tj_max) tj_max = $realtime - tj_last;
    end
    tj_last = $realtime;
    nj++;
  end

  initial begin
    #50;
    n7 = 0; n31 = 0;
    #100;
    check(o7 == 1 && o31 == 1 && oj == 1, "disabled rings rest high");
    check(n7 == 0 && n31 == 0, "no edges while disabled");
    en7 = 1; en31 = 1; enj = 1;
    #10000;   // 10 us
    // 7 stages: period 4.2 ns -> 2380 rising edges; 31 stages: 18.6 ns -> 537
    check(n7 >= 2379 && n7 <= 2381, $sformatf("7-stage edges %0d", n7));
    check(n31 >= 536 && n31 <= 538, $sformatf("31-stage edges %0d", n31));
    check(n7 > n31, "shorter ring is faster");
    // 11 stages, 3.3 ns nominal half period + 0..50 ps jitter per half period
    check(tj_min >= 6.6 - 0.001 && tj_max <= 6.7 + 0.001,
          $sformatf("jittered period within bounds %f..%f", tj_min, tj_max));
    check(tj_max > tj_min, "jitter present");
    en7 = 0;
    #50;
    check(o7 == 1, "ring returns high when disabled");
    begin
      int n;
      n = n7;
      #1000;
      check(n7 == n, "no edges after disable");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
