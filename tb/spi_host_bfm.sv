`timescale 1ns/1ps
// spi_host_bfm: simulation model of the host side of the shared SPI bus
// (mode 0, MSB first, 16-bit frames RW|ADDR[6:0]|DATA[7:0], RW = 1 for a
// read). Testbenches call its tasks hierarchically:
//   bfm.write(addr, data);   bfm.read(addr, data);
// HALF_NS is half the SCK period; it must cover the slave's synchroniser
// latency (keep it at four or more system-clock periods).
module spi_host_bfm #(
  parameter int unsigned HALF_NS = 80
) (
  output logic sclk,
  output logic mosi,
  output logic cs_n,
  input  logic miso
);
  initial begin
    sclk = 1'b0;
    mosi = 1'b0;
    cs_n = 1'b1;
  end

  task automatic xfer(input logic rw, input logic [6:0] addr, input logic [7:0] wdata,
                      output logic [7:0] rdata);
    logic [15:0] frame;
    frame = {rw, addr, wdata};
    rdata = '0;
    cs_n = 1'b0;
    #(HALF_NS);
    for (int i = 15; i >= 0; i--) begin
      mosi = frame[i];
      #(HALF_NS);
      sclk = 1'b1;                    // both sides sample here
      if (i < 8) rdata = {rdata[6:0], miso};
      #(HALF_NS);
      sclk = 1'b0;
    end
    #(HALF_NS);
    cs_n = 1'b1;
    mosi = 1'b0;
    #(2 * HALF_NS);
  endtask

  task automatic write(input logic [6:0] addr, input logic [7:0] data);
    logic [7:0] dummy;
    xfer(1'b0, addr, data, dummy);
  endtask

  task automatic read(input logic [6:0] addr, output logic [7:0] data);
    xfer(1'b1, addr, 8'h00, data);
  endtask
endmodule
