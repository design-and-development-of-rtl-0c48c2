`timescale 1ns/1ps
// tb_ro_trng: drives the two oscillator inputs with random levels that change
// between clock edges, predicts every extracted byte with an independent model
// (two-cycle sampling delay, bit = a ^ b ^ previous bit, MSB first, a byte per
// eight cycles) and compares it with the generator's output. Also checks the
// valid flag's set/clear behaviour and that a disabled generator stays silent.
module tb_ro_trng;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic en = 0, osc_a = 0, osc_b = 0, rd_ack = 0;
  logic [7:0] data;
  logic valid;

  ro_trng dut (.clk, .rst_n, .en, .osc_a, .osc_b, .rd_ack, .data, .valid);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // stimulus: new random levels at every falling clock edge
  always @(negedge clk) begin
    osc_a <= 1'($urandom);
    osc_b <= 1'($urandom);
  end

  // reference model, 2-cycle delay line and running parity
  logic a1, a2, b1, b2, pbit;
  logic [7:0] acc;
  int nb;
  logic [7:0] exp_q[$];
  always @(posedge clk) begin
    if (!rst_n || !en) begin
      pbit = 0; nb = 0; acc = 0;
    end else begin
      logic bitv;
      bitv = a2 ^ b2 ^ pbit;
      pbit = bitv;
      acc = {acc[6:0], bitv};
      nb++;
      if (nb == 8) begin exp_q.push_back(acc); nb = 0; end
    end
    a2 = a1; b2 = b1; a1 = osc_a; b1 = osc_b;
    if (!rst_n) begin a1 = 0; a2 = 0; b1 = 0; b2 = 0; end
  end

  int ones = 0, bytes_checked = 0;
  logic valid_d = 0;
  always @(posedge clk) begin
    #1;
    if (valid && !valid_d) begin
      logic [7:0] e;
      if (exp_q.size() == 0) check(0, "byte produced without reference");
      else begin
        e = exp_q.pop_front();
        check(data == e, $sformatf("trng byte exp %02x got %02x", e, data));
        ones += $countones(data);
        bytes_checked++;
      end
    end
    valid_d = valid;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    check(valid == 0, "disabled generator never valid");
    @(negedge clk) en = 1;
    // read each byte right after it appears
    repeat (200) begin
      @(posedge clk);
      if (valid) begin
        @(negedge clk) rd_ack = 1;
        @(negedge clk) rd_ack = 0;
        #1 check(valid == 0 || dut.nbits == 0, "read clears valid");
      end
    end
    check(bytes_checked >= 20, $sformatf("bytes checked %0d", bytes_checked));
    check(ones > bytes_checked * 2 && ones < bytes_checked * 6, "bits are balanced");
    @(negedge clk) en = 0;
    @(posedge clk); #1;
    check(valid == 0, "disable clears valid");
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
