`timescale 1ns/1ps
// tb_stdp_ctrl: drives timestamp ticks and pre/post spike pairs into the STDP
// tile and checks the committed weight update against
//   dw = +/- (LUT[k] >> (3 - r)),  k = |dt| (dt >= 0) or 4 + |dt| (dt < 0)
// for every reachable difference and every learning rate, with the update
// read both from the dw port and over SPI. Also checks: the three-cycle
// compute latency, the time window, anti-Hebbian sign swap, single-shot hold
// and reset, reward gating, the eligibility trace (reward inside the trace
// commits, reward after it has decayed does not), full-scale overflow and the
// status bits.
module tb_stdp_ctrl;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic sclk, mosi, cs_n, miso, miso_oe;
  logic ts_clk = 0, pre = 0, post = 0, reward = 0;
  logic [7:0] dw;
  logic dw_valid, update_ready, ltp, ltd;

  stdp_ctrl dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe,
                 .ts_clk, .pre_spike(pre), .post_spike(post), .reward,
                 .dw, .dw_valid, .update_ready, .ltp, .ltd);
  spi_host_bfm #(.HALF_NS(80)) bfm (.sclk, .mosi, .cs_n, .miso);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_commits = 0;
  always @(posedge clk) if (dw_valid) n_commits++;

  // latency monitor: cycles from both timestamps valid to the committed update
  int lat = -1, lat_cnt = 0;
  bit lat_run = 0;
  always @(negedge clk) begin
    if (lat_run) lat_cnt++;
    if (dut.pre_v && dut.post_v && dut.state == 0 && !lat_run && dut.en) begin lat_run = 1; lat_cnt = 0; end
    if (lat_run && dw_valid) begin lat = lat_cnt; lat_run = 0; end
    if (lat_run && lat_cnt > 20) lat_run = 0;
  end

  task automatic tick();
    ts_clk = 1; repeat (3) @(negedge clk);
    ts_clk = 0; repeat (3) @(negedge clk);
  endtask
  task automatic pulse_pre();
    pre = 1; repeat (3) @(negedge clk); pre = 0; repeat (3) @(negedge clk);
  endtask
  task automatic pulse_post();
    post = 1; repeat (3) @(negedge clk); post = 0; repeat (3) @(negedge clk);
  endtask
  task automatic send_pair(input int dt);
    tick();
    if (dt >= 0) begin pulse_pre(); repeat (dt) tick(); pulse_post(); end
    else begin pulse_post(); repeat (-dt) tick(); pulse_pre(); end
    repeat (10) @(negedge clk);
  endtask

  logic [7:0] lut[8] = '{127, 63, 31, 15, 0, 50, 25, 12};

  function automatic logic [7:0] expect_dw(input int dt, input int r, input bit anti);
    int k, m;
    bit neg;
    neg = dt < 0;
    k = neg ? 4 + (-dt) : dt;
    m = lut[k] >> (3 - r);
    if (m > 127) m = 127;
    if (neg ^ anti) m = -m;
    return 8'(m);
  endfunction

  initial begin
    logic [7:0] rd;
    int c0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      bfm.read(7'(8 + i), rd); check(rd == lut[i], $sformatf("LUT%0d reset value", i));
    end
    // a larger LTP entry so that rate 3 clips to full scale
    lut[1] = 8'd200; bfm.write(7'h09, 8'd200);
    bfm.write(7'h02, 8'h03);           // window 3
    bfm.write(7'h00, 8'h01);           // enable, continuous

    // all differences, all rates
    for (int r = 0; r < 4; r++) begin
      bfm.write(7'h01, 8'(8'h30 | r));
      for (int dt = -3; dt <= 3; dt++) begin
        logic [7:0] e;
        c0 = n_commits;
        send_pair(dt);
        e = expect_dw(dt, r, 0);
        check(n_commits == c0 + 1, $sformatf("one commit for dt=%0d r=%0d", dt, r));
        check(dw == e, $sformatf("dw dt=%0d r=%0d exp %0d got %0d", dt, r, $signed(e), $signed(dw)));
        check(ltp == (dt >= 0) && ltd == (dt < 0), "potentiation/depression flags");
        bfm.read(7'h06, rd); check(rd == e, "WT_UPD over SPI");
        bfm.read(7'h05, rd); check($signed(rd) == dt, $sformatf("DELTA_T over SPI %0d", $signed(rd)));
        bfm.read(7'h07, rd);
        check(rd[3] == (lut[dt < 0 ? 4 - dt : dt] >= 127), "weight overflow flag");
      end
    end
    check(lat == 3, $sformatf("compute latency 3 cycles, got %0d", lat));

    // time window
    bfm.write(7'h01, 8'h33);
    bfm.write(7'h02, 8'h01);
    c0 = n_commits;
    send_pair(2);
    check(n_commits == c0, "pair outside the window commits nothing");
    send_pair(-1);
    check(n_commits == c0 + 1 && dw == expect_dw(-1, 3, 0), "pair inside the window commits");
    bfm.write(7'h02, 8'h03);

    // anti-Hebbian
    bfm.write(7'h00, 8'h09);
    send_pair(1);
    check(dw == expect_dw(1, 3, 1) && ltd == 1, "anti-Hebbian turns potentiation into depression");
    send_pair(-2);
    check(dw == expect_dw(-2, 3, 1) && ltp == 1, "anti-Hebbian turns depression into potentiation");

    // single-shot: the first result is held, further pairs ignored until reset
    bfm.write(7'h00, 8'h05);
    send_pair(0);
    c0 = n_commits;
    send_pair(2);
    check(n_commits == c0 && dw == expect_dw(0, 3, 0), "single-shot holds the first result");
    bfm.write(7'h00, 8'h07);           // reset
    bfm.read(7'h07, rd); check(rd[0] == 0, "reset clears update ready");
    bfm.write(7'h00, 8'h05);
    send_pair(3);
    check(dw == expect_dw(3, 3, 0), "single-shot works again after reset");

    // reward gate without trace: reward must coincide with the update
    bfm.write(7'h00, 8'h11);
    c0 = n_commits;
    send_pair(1);
    check(n_commits == c0, "no reward: no commit");
    reward = 1;
    send_pair(2);
    check(n_commits == c0 + 1 && dw == expect_dw(2, 3, 0), "reward present: commit");
    bfm.read(7'h07, rd); check(rd[4] == 1, "reward status bit");
    reward = 0;

    // eligibility trace + reward gate: delayed reward inside the trace commits
    bfm.write(7'h01, 8'h33);           // decay shift 3
    bfm.write(7'h00, 8'h31);
    c0 = n_commits;
    send_pair(0);
    check(n_commits == c0, "trace mode holds the update until reward");
    check(dut.trace != 0, "trace non-zero after pair");
    repeat (5) @(negedge clk);
    reward = 1; repeat (3) @(negedge clk); reward = 0;
    repeat (3) @(negedge clk);
    check(n_commits == c0 + 1 && dw == expect_dw(0, 3, 0), "reward within the trace commits the base update");
    // reward after the trace has decayed commits nothing
    send_pair(-1);
    repeat (300) @(negedge clk);
    check(dut.trace == 0, "trace decays to zero");
    bfm.read(7'h07, rd); check(rd[5] == 0, "trace non-zero status clears");
    c0 = n_commits;
    reward = 1; repeat (3) @(negedge clk); reward = 0;
    repeat (3) @(negedge clk);
    check(n_commits == c0, "reward after the trace decayed commits nothing");

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
