`timescale 1ns/1ps
// reg_bus_if: the register-access bundle between the shared SPI slave and a
// tile's register file. The slave is the master of this bus.
//   we/addr/wdata : one-cycle write strobe at the end of a write frame
//   re/addr       : one-cycle read strobe once the address byte is in; rdata
//                   must be valid (combinationally) in that same cycle
// All signals are in the system clock domain.
interface reg_bus_if;
  logic       we;
  logic       re;
  logic [6:0] addr;
  logic [7:0] wdata;
  logic [7:0] rdata;

  modport master (output we, re, addr, wdata, input rdata);
  modport slave  (input we, re, addr, wdata, output rdata);
endinterface
