// iot_ram_pkg -- sizes shared by the IoT-enabled RAM.
//
// The external interface is a 32-bit data port, separate 16-bit read and
// write addresses and a 128-bit IPv6 address input. Inside, the synthesised
// netlist this design follows keeps 17 bits of every word: the memory's
// data pins are 17 wide and the 15 upper output bits are tied to ground.
// That stored width is kept as its own constant so that it can be widened to
// the full 32 bits by changing one number. All values are the published
// design's; none is a local choice except the name of each constant.
package iot_ram_pkg;

  // Width of the read and write addresses, raddr(15:0) and waddr(15:0).
  localparam int unsigned ADDR_W = 16;
  // Width of din(31:0) and dout(31:0).
  localparam int unsigned DATA_W = 32;
  // Bits of each word that the memory holds, diA(16:0) and doB(16:0).
  localparam int unsigned STORE_W = 17;
  // Width of the IPv6(127:0) address input.
  localparam int unsigned IPV6_W = 128;

  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [DATA_W-1:0]  data_t;
  typedef logic [STORE_W-1:0] word_t;
  typedef logic [IPV6_W-1:0]  ipv6_t;

endpackage
