// RandomAccessMemory -- IoT-enabled RAM, top level.
//
// A 64K-word RAM with independent read and write ports and a 128-bit IPv6
// address input that names the device on a network. Structure, after the
// published netlist:
//   * raddr_reg (16 flip-flops with clock enable) registers raddr while re
//     is high;
//   * dp_ram writes din at waddr when we is high and reads the word at the
//     registered read address;
//   * dout carries the memory's STORE_W = 17 bits, zero-extended to 32.
//
// Timing, all on the rising edge of clk: a write is done at the edge where
// we = 1. A read is launched at the edge where re = 1; from that edge dout
// shows the word at the sampled raddr, and it keeps showing that address
// (including later writes to it) until the next edge with re = 1. A read and
// a write may happen at the same edge.
//
// Following the netlist, only din[16:0] is stored and dout[31:17] is 0;
// set STORE_W to DATA_W for a full-width memory. The IPv6 input is a port
// only: the published design gives it no logic, so it reaches nothing
// inside, and verilator's unused-signal warnings for IPv6 and din[31:17]
// stand for that reason. There is no reset, as in the netlist.
module RandomAccessMemory #(
  parameter int unsigned ADDR_W  = iot_ram_pkg::ADDR_W,   // 16
  parameter int unsigned DATA_W  = iot_ram_pkg::DATA_W,   // 32
  parameter int unsigned STORE_W = iot_ram_pkg::STORE_W,  // 17
  parameter int unsigned IPV6_W  = iot_ram_pkg::IPV6_W    // 128
) (
  input  logic [DATA_W-1:0] din,
  input  logic [IPV6_W-1:0] IPv6,
  input  logic [ADDR_W-1:0] raddr,
  input  logic [ADDR_W-1:0] waddr,
  input  logic              clk,
  input  logic              re,
  input  logic              we,
  output logic [DATA_W-1:0] dout
);

  if (STORE_W > DATA_W || STORE_W == 0) begin : g_bad_width
    $error("STORE_W must be between 1 and DATA_W");
  end

  logic [ADDR_W-1:0]  raddr_q;
  logic [STORE_W-1:0] dob;

  raddr_reg #(.W(ADDR_W)) u_fde (
    .clk (clk),
    .ce  (re),
    .d   (raddr),
    .q   (raddr_q)
  );

  dp_ram #(.ADDR_W(ADDR_W), .WIDTH(STORE_W)) u_mram_ram1 (
    .clka  (clk),
    .wea   (we),
    .addra (waddr),
    .dia   (din[STORE_W-1:0]),
    .addrb (raddr_q),
    .dob   (dob)
  );

  // Upper output bits are driven by ground in the netlist.
  assign dout = DATA_W'(dob);

endmodule
