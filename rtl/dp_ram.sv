// dp_ram -- the memory array of the IoT-enabled RAM ("Mram_ram1").
//
// A simple dual-port memory of 2**ADDR_W words of WIDTH bits. Port A only
// writes: on a rising edge of clka with wea high, dia is stored at addra.
// Port B only reads, with no clock of its own: dob is the word at addrb.
// In the RAM, addrb comes from the read-address register, so the read as a
// whole is synchronous and maps onto FPGA block RAM; the pin names follow
// the published netlist (addrA, addrB, diA, clkA, weA, doB).
//
// Timing: a write takes effect at the edge; a read of the address being
// written shows the new word from that edge on. The contents are not
// initialised, as nothing in the published design does so.
module dp_ram #(
  parameter int unsigned ADDR_W = iot_ram_pkg::ADDR_W,  // addrA(15:0), addrB(15:0)
  parameter int unsigned WIDTH  = iot_ram_pkg::STORE_W  // diA(16:0), doB(16:0)
) (
  input  logic              clka,
  input  logic              wea,
  input  logic [ADDR_W-1:0] addra,
  input  logic [WIDTH-1:0]  dia,
  input  logic [ADDR_W-1:0] addrb,
  output logic [WIDTH-1:0]  dob
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clka) begin
    if (wea) mem[addra] <= dia;
  end

  assign dob = mem[addrb];

endmodule
