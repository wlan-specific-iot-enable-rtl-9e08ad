// tb_dp_ram -- self-checking test of the dual-port memory array.
//
// Fills every word of the default 64K x 17 array with a value computed from
// its address, reads all of them back through port B, then runs random
// simultaneous writes and reads against a reference array, including reads
// of the address written at the same edge (the new word must appear from
// that edge on). Writes with wea low must not change anything.
module tb_dp_ram;
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned WIDTH  = 17;
  localparam int unsigned DEPTH  = 1 << ADDR_W;

  logic              clk = 1'b0;
  logic              wea;
  logic [ADDR_W-1:0] addra, addrb;
  logic [WIDTH-1:0]  dia, dob;
  logic [WIDTH-1:0]  model [DEPTH];
  int checks = 0, failures = 0;

  dp_ram #(.ADDR_W(ADDR_W), .WIDTH(WIDTH)) dut (
    .clka(clk), .wea(wea), .addra(addra), .dia(dia), .addrb(addrb), .dob(dob));

  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] pattern(input int unsigned a);
    return WIDTH'((a * 32'h9E37) ^ (a >> 3) ^ 32'h1_5A5A);
  endfunction

  task automatic check_read(input logic [ADDR_W-1:0] a, input string what);
    addrb = a; #1;
    checks++;
    if (dob !== model[a]) begin
      failures++;
      if (failures < 20) $display("%s: addr %h read %h want %h", what, a, dob, model[a]);
    end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wea = 1'b0; addra = '0; addrb = '0; dia = '0;
    // Fill.
    for (int unsigned a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wea = 1'b1; addra = ADDR_W'(a); dia = pattern(a);
      @(posedge clk); model[a] = pattern(a);
    end
    @(negedge clk); wea = 1'b0;
    // Read back every word.
    for (int unsigned a = 0; a < DEPTH; a++) check_read(ADDR_W'(a), "fill");
    // Random traffic.
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      wea   = $urandom_range(0, 1) == 1;
      addra = ADDR_W'($urandom);
      dia   = WIDTH'($urandom);
      addrb = ($urandom_range(0, 3) == 0) ? addra : ADDR_W'($urandom);
      #1;
      // Before the edge the read port shows the old contents.
      checks++;
      if (dob !== model[addrb]) begin failures++; $display("pre-edge read %h wrong", addrb); end
      @(posedge clk);
      if (wea) model[addra] = dia;
      #1;
      checks++;
      if (dob !== model[addrb]) begin
        failures++;
        if (failures < 20) $display("post-edge addr %h read %h want %h", addrb, dob, model[addrb]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
