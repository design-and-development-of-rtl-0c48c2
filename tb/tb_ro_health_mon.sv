`timescale 1ns/1ps
// tb_ro_health_mon: applies random counts and bounds, and checks the below /
// above / stalled / alert flags one clock after each sample against an
// independent comparison; also checks enable, hold between samples and clear.
module tb_ro_health_mon;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic en = 0, clear = 0, sample = 0;
  logic [15:0] count = 0;
  logic [7:0] lo = 0, hi = 8'hFF;
  logic below, above, stalled, alert;

  ro_health_mon dut (.clk, .rst_n, .en, .clear, .sample, .count, .bound_lo(lo),
                     .bound_hi(hi), .below, .above, .stalled, .alert);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_below = 0, n_above = 0, n_stall = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // disabled: sample is ignored
    @(negedge clk); count = 0; sample = 1;
    @(negedge clk); sample = 0;
    check(alert == 0, "disabled monitor never alerts");
    en = 1;
    for (int i = 0; i < 300; i++) begin
      logic eb, ea, es;
      @(negedge clk);
      lo = 8'($urandom_range(0, 120));
      hi = 8'($urandom_range(130, 255));
      case (i % 6)
        4: count = {hi, 8'($urandom)};   // exactly at the upper bound: inside
        5: count = {lo, 8'h01};          // exactly at the lower bound: inside
        0: count = 16'({lo, 8'h00} - 16'd1 + (lo == 0 ? 16'd1 : 16'd0));
        1: count = 16'({hi, 8'hFF} + (hi == 8'hFF ? 16'd0 : 16'd1));
        2: count = (i % 8 == 2) ? 16'd0 : 16'($urandom);
        default: count = 16'($urandom);
      endcase
      sample = 1;
      eb = count[15:8] < lo;
      ea = count[15:8] > hi;
      es = count == 0;
      @(negedge clk);
      sample = 0;
      check(below == eb && above == ea && stalled == es && alert == (eb | ea | es),
            $sformatf("count %04x lo %02x hi %02x -> b%0d a%0d s%0d", count, lo, hi, below, above, stalled));
      n_below += eb; n_above += ea; n_stall += es;
      // flags hold until the next sample
      count = 16'h8000; lo = 0; hi = 8'hFF;
      @(negedge clk);
      check(below == eb && above == ea && stalled == es, "flags hold between samples");
    end
    check(n_below > 10 && n_above > 10 && n_stall > 10, "all three conditions exercised");
    @(negedge clk); count = 0; sample = 1;
    @(negedge clk); sample = 0;
    check(stalled == 1 && alert == 1, "stall alert");
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    check(alert == 0, "clear drops alert");
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
