// tb_raddr_reg -- self-checking test of the read-address register.
//
// Drives random d and ce for many cycles and compares q after every edge
// with a reference value that loads d only when ce was 1 at the edge. Also
// checks that q does not move between edges. Ends with a TB_RESULT line.
module tb_raddr_reg;
  localparam int unsigned W = 16;

  logic         clk = 1'b0;
  logic         ce;
  logic [W-1:0] d, q, ref_q;
  int checks = 0, failures = 0;
  int loads = 0, holds = 0;

  raddr_reg #(.W(W)) dut (.clk(clk), .ce(ce), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // First enabled edge gives the register a known value.
    ce = 1'b1; d = 16'hA5C3;
    @(posedge clk); #1;
    ref_q = 16'hA5C3;
    checks++; if (q !== ref_q) begin failures++; $display("init: q=%h want %h", q, ref_q); end
    for (int i = 0; i < 2000; i++) begin
      ce = ($urandom_range(0, 2) == 0);
      d  = W'($urandom);
      @(posedge clk);
      if (ce) begin ref_q = d; loads++; end else holds++;
      #1;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("cycle %0d: ce=%0b d=%h q=%h want %h", i, ce, d, q, ref_q);
      end
      // Change d mid-cycle: q must not follow without a clock edge.
      d = ~d; #2;
      checks++;
      if (q !== ref_q) begin failures++; $display("cycle %0d: q moved between edges", i); end
    end
    checks++; if (loads == 0 || holds == 0) begin failures++; $display("ce coverage missing"); end
    $display("loads=%0d holds=%0d", loads, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
