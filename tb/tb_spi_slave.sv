`timescale 1ns/1ps
// tb_spi_slave: checks the shared SPI slave against a 16-entry scratch
// register file built in the testbench. Covers write strobes and their
// address/data, read data returned during the second byte, MISO low during the
// address phase, the CS-gated output enable, addresses above 0x0F, and that a
// frame cut short by CS_n rising commits nothing.
module tb_spi_slave;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  logic sclk, mosi, cs_n, miso, miso_oe;
  int checks = 0, failures = 0;

  reg_bus_if bus ();
  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe, .bus(bus.slave));
  spi_host_bfm #(.HALF_NS(80)) bfm (.sclk, .mosi, .cs_n, .miso);

  // scratch register file on the slave side of the bus
  logic [7:0] regs [16];
  int n_we = 0, n_re = 0;
  logic [6:0] last_we_addr;
  always_ff @(posedge clk) begin
    if (bus.we) begin
      n_we <= n_we + 1;
      last_we_addr <= bus.addr;
      if (bus.addr < 16) regs[bus.addr[3:0]] <= bus.wdata;
    end
    if (bus.re) n_re <= n_re + 1;
  end
  assign bus.rdata = (bus.addr < 16) ? regs[bus.addr[3:0]] : 8'hEE;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // MISO must stay low while the address byte is shifted
  int addr_phase_violations = 0;
  always @(posedge sclk) if (!cs_n && dut.bit_cnt < 8 && miso) addr_phase_violations++;

  initial begin
    logic [7:0] rd;
    logic [7:0] model [16];
    for (int i = 0; i < 16; i++) begin regs[i] = 8'h00; model[i] = 8'h00; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    check(miso_oe == 1'b0, "miso_oe low when idle");

    // write every register with a pattern, then read all back
    for (int i = 0; i < 16; i++) begin
      model[i] = 8'(($urandom % 256));
      bfm.write(7'(i), model[i]);
    end
    check(n_we == 16, $sformatf("16 write strobes seen, got %0d", n_we));
    for (int i = 0; i < 16; i++) begin
      check(regs[i] == model[i], $sformatf("reg %0d written %02x got %02x", i, model[i], regs[i]));
      bfm.read(7'(i), rd);
      check(rd == model[i], $sformatf("read reg %0d exp %02x got %02x", i, model[i], rd));
    end
    check(n_re == 16, $sformatf("16 read strobes seen, got %0d", n_re));
    check(n_we == 16, "reads produce no write strobe");

    // address above the implemented space
    bfm.read(7'h55, rd);
    check(rd == 8'hEE, "high address reaches the bus unchanged");
    bfm.write(7'h42, 8'h99);
    check(last_we_addr == 7'h42, "7-bit write address passed");

    // output enable follows chip select
    fork
      begin
        bfm.read(7'h3, rd);
      end
      begin
        #200;
        check(miso_oe == 1'b1, "miso_oe high while selected");
      end
    join
    check(miso_oe == 1'b0, "miso_oe low after frame");

    // aborted frame: only 10 bits then CS_n high -> no write
    begin
      int n_before;
      n_before = n_we;
      cs_n = 1'b0; #80;
      for (int i = 0; i < 10; i++) begin mosi = 1'b0; #80; sclk = 1; #80; sclk = 0; end
      #80; cs_n = 1'b1; #400;
      check(n_we == n_before, "aborted frame commits nothing");
      bfm.write(7'h1, 8'h5A);
      check(regs[1] == 8'h5A, "frame after an aborted one works");
    end

    check(addr_phase_violations == 0, "MISO low in address phase");
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
