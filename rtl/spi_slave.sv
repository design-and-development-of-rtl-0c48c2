`timescale 1ns/1ps
// spi_slave: the serial register interface shared, unchanged, by all four tiles.
//
// Protocol (SPI mode 0: SCK idles low, both sides sample on the rising edge,
// data change on the falling edge; CS_n active low; MSB first). Every access is
// one 16-bit frame:
//     bit 15      RW      1 = read, 0 = write
//     bits 14:8   ADDR    register address (7 bits; the tiles decode 0x00-0x0F)
//     bits 7:0    DATA    write data from the host, or read data to the host
// During the address byte MISO is driven low. For a read, the register is
// sampled once the eighth bit is in and shifted out MSB first during the data
// byte. A write is committed when the sixteenth bit is in.
//
// SCK, CS_n and MOSI are asynchronous to the system clock. Each passes through
// a SYNC_STAGES-deep synchroniser and SCK edges are found by comparing
// successive synchronised samples, so SCK must be slower than about
// clk/(2*(SYNC_STAGES+2)). The output enable of the shared MISO pin is the
// raw chip select, so the pin is released whenever this tile is not selected.
//
// The frame layout, mode 0, MSB-first order, synchronisers and CS-gated output
// enable follow the paper. The RW polarity, the two-stage synchroniser depth
// and the register-bus strobes (reg_bus_if) are this design's choices.
module spi_slave #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sclk,
  input  logic      cs_n,
  input  logic      mosi,
  output logic      miso,
  output logic      miso_oe,
  reg_bus_if.master bus
);
  import neuro_pkg::*;

  logic sclk_s, cs_n_s, mosi_s;
  logic sclk_d;

  sync_ff #(.STAGES(SYNC_STAGES), .RST_VAL(1'b0)) u_sync_sck  (.clk, .rst_n, .d(sclk), .q(sclk_s));
  sync_ff #(.STAGES(SYNC_STAGES), .RST_VAL(1'b1)) u_sync_cs   (.clk, .rst_n, .d(cs_n), .q(cs_n_s));
  sync_ff #(.STAGES(SYNC_STAGES), .RST_VAL(1'b0)) u_sync_mosi (.clk, .rst_n, .d(mosi), .q(mosi_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sclk_d <= 1'b0;
    else        sclk_d <= sclk_s;
  end

  logic sck_rise, sck_fall;
  assign sck_rise = sclk_s & ~sclk_d & ~cs_n_s;
  assign sck_fall = ~sclk_s & sclk_d & ~cs_n_s;

  logic [4:0]  bit_cnt;     // bits received in this frame
  logic [6:0]  rx_sh;       // last seven bits received
  logic        is_read;
  logic [7:0]  tx_sh;
  logic [6:0]  addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt <= '0;
      rx_sh   <= '0;
      is_read <= 1'b0;
      tx_sh   <= '0;
      addr_q  <= '0;
    end else if (cs_n_s) begin
      bit_cnt <= '0;
      is_read <= 1'b0;
      tx_sh   <= '0;
    end else begin
      if (sck_rise && bit_cnt < 5'(SPI_FRAME_BITS)) begin
        rx_sh   <= {rx_sh[5:0], mosi_s};
        bit_cnt <= bit_cnt + 5'd1;
        if (bit_cnt == 5'd7) begin
          // eighth bit arriving: frame bits 15..8 complete
          is_read <= rx_sh[6];
          addr_q  <= {rx_sh[5:0], mosi_s};
          if (rx_sh[6]) tx_sh <= bus.rdata;
        end
      end
      if (sck_fall && is_read && bit_cnt >= 5'd9)
        tx_sh <= {tx_sh[6:0], 1'b0};
    end
  end

  // read strobe in the cycle the address completes; rdata is sampled then
  always_comb begin
    bus.re    = sck_rise && (bit_cnt == 5'd7) && rx_sh[6];
    bus.we    = sck_rise && (bit_cnt == 5'd15) && !is_read;
    bus.addr  = (bit_cnt == 5'd7) ? {rx_sh[5:0], mosi_s} : addr_q;
    bus.wdata = {rx_sh[6:0], mosi_s};
  end

  assign miso    = is_read ? tx_sh[7] : 1'b0;
  assign miso_oe = ~cs_n;

  // a write and a read strobe can never coincide
  assert property (@(posedge clk) disable iff (!rst_n) !(bus.we && bus.re));
endmodule
