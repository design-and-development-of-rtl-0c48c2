`timescale 1ns/1ps
// tb_lfsr16: compares the LFSR against the update equation
// s <= {s[14:0], ^(s & p)} for random polynomials, measures the period of the
// maximal-length polynomial 0xB400 (must be 65535), and checks the seed load,
// the hold when disabled and the all-zero lock-up guard.
module tb_lfsr16;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic en = 0, load = 0;
  logic [15:0] seed = 16'h0001, poly = 16'hB400, state;

  lfsr16 dut (.clk, .rst_n, .en, .load, .seed, .poly, .state);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] step(input logic [15:0] s, input logic [15:0] p);
    logic b;
    b = 1'b0;
    for (int i = 0; i < 16; i++) b = b ^ (s[i] & p[i]);
    return {s[14:0], b};
  endfunction

  initial begin
    logic [15:0] m;
    repeat (3) @(posedge clk);
    check(state == 16'hACE1, "reset state");
    rst_n = 1;
    // random polynomials and seeds against the equation
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      seed = 16'($urandom) | 16'h1; poly = 16'($urandom); load = 1; en = 1;
      @(negedge clk);
      load = 0;
      check(state == seed, "seed loaded");
      m = seed;
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        m = (m == 0) ? 16'h0001 : step(m, poly);
        if (state != m) begin check(0, $sformatf("poly %04x step %0d exp %04x got %04x", poly, i, m, state)); break; end
      end
      checks++;
    end
    // period of the maximal-length polynomial
    @(negedge clk);
    seed = 16'h0001; poly = 16'hB400; load = 1;
    @(negedge clk);
    load = 0;
    begin
      int n;
      n = 0;
      do begin @(negedge clk); n++; end while (state != 16'h0001 && n < 70000);
      check(n == 65535, $sformatf("period %0d", n));
    end
    // hold when disabled
    @(negedge clk) en = 0;
    m = state;
    repeat (10) @(negedge clk);
    check(state == m, "hold while disabled");
    // lock-up guard: zero seed recovers on the next clock
    seed = 16'h0000; load = 1;
    @(negedge clk) load = 0;
    check(state == 16'h0000, "zero loaded");
    @(negedge clk);
    check(state == 16'h0001, "guard forces non-zero state");
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
