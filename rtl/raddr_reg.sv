// raddr_reg -- read-address register of the IoT-enabled RAM.
//
// A bank of W D flip-flops with a common clock enable, the "fde" cell of the
// published netlist: on each rising edge of clk the register takes d when ce
// is high and keeps its value when ce is low. In the RAM its d input is
// raddr, its enable is the read strobe re, and q addresses the memory's read
// port, so a read is launched by the edge that samples re = 1 and its data
// stays on the output for as long as re stays low.
//
// Interface: clk, ce, d[W-1:0] in; q[W-1:0] out. Timing: q follows d one
// clock edge after ce = 1 is sampled. There is no reset, as in the netlist
// (an FDE cell has none); q is undefined until the first enabled edge.
module raddr_reg #(
  parameter int unsigned W = iot_ram_pkg::ADDR_W  // 16 flip-flops in the netlist
) (
  input  logic         clk,
  input  logic         ce,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  always_ff @(posedge clk) begin
    if (ce) q <= d;
  end

endmodule
