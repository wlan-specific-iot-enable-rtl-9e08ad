// tb_RandomAccessMemory -- end-to-end test of the IoT-enabled RAM at its
// default size (64K words, 32-bit ports, 17 stored bits, 128-bit IPv6).
//
// 1. Writes every one of the 65,536 words with a 32-bit value computed from
//    its address, with re low.
// 2. Reads every word back: raddr is presented with re = 1, and dout must
//    show the stored low 17 bits (upper 15 bits zero) right after that
//    clock edge, and not before it (one-edge read latency).
// 3. Random mixed traffic against a reference model: reads launched and
//    held (re = 0 while raddr changes), writes at the same edge as reads,
//    writes into the word currently being read (dout must follow from that
//    edge), and edges with nothing enabled.
// The IPv6 input gets a new random value every cycle; it must not change
// what the RAM does. Each of these situations is counted, and one that
// never happens counts as a failure.
module tb_RandomAccessMemory;
  localparam int unsigned AW    = 16;
  localparam int unsigned DW    = 32;
  localparam int unsigned SW    = 17;
  localparam int unsigned WORDS = 1 << AW;

  logic          clk = 1'b0;
  logic [DW-1:0] din, dout;
  logic [127:0]  ipv6;
  logic [AW-1:0] raddr, waddr;
  logic          re, we;

  logic [DW-1:0] model [WORDS];   // full 32-bit words written
  logic [AW-1:0] held;            // read address the RAM should be holding
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_hold = 0, n_rw = 0, n_rdw = 0, n_idle = 0;
  int n_upper = 0, n_latency = 0;

  RandomAccessMemory dut (
    .din(din), .IPv6(ipv6), .raddr(raddr), .waddr(waddr),
    .clk(clk), .re(re), .we(we), .dout(dout));

  always #5 clk = ~clk;
  always @(negedge clk) ipv6 <= {$urandom, $urandom, $urandom, $urandom};

  function automatic logic [DW-1:0] pattern(input int unsigned a);
    return (a * 32'h9E37_79B9) ^ {a[15:0], ~a[15:0]};
  endfunction

  function automatic logic [DW-1:0] expect_of(input logic [AW-1:0] a);
    return {{(DW-SW){1'b0}}, model[a][SW-1:0]};
  endfunction

  task automatic check_dout(input string what);
    checks++;
    if (dout !== expect_of(held)) begin
      failures++;
      if (failures < 20)
        $display("%s: addr %h dout %h want %h", what, held, dout, expect_of(held));
    end
    checks++;
    n_upper++;
    if (dout[DW-1:SW] !== '0) begin failures++; $display("%s: upper bits set", what); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 1'b0; we = 1'b0; din = '0; raddr = '0; waddr = '0;
    ipv6 = '0;

    // 1. Fill every word.
    for (int unsigned a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); din = pattern(a);
      @(posedge clk); model[a] = pattern(a); n_write++;
    end
    @(negedge clk); we = 1'b0;

    // Launch a first read so the address register holds a known value.
    re = 1'b1; raddr = '0;
    @(posedge clk); held = '0; n_read++;
    #1 check_dout("first read");

    // 2. Read every word back, checking the one-edge latency.
    for (int unsigned a = 1; a < WORDS; a++) begin
      @(negedge clk);
      re = 1'b1; raddr = AW'(a);
      #1;
      // Before the edge dout still shows the previous address.
      if (expect_of(held) != expect_of(AW'(a))) begin
        checks++; n_latency++;
        if (dout !== expect_of(held)) begin failures++; $display("read %h: early change", a); end
      end
      @(posedge clk); held = AW'(a); n_read++;
      #1 check_dout("readback");
    end

    // 3. Random mixed traffic.
    for (int i = 0; i < 50000; i++) begin
      logic do_r, do_w, same;
      @(negedge clk);
      do_r  = $urandom_range(0, 2) == 0;
      do_w  = $urandom_range(0, 1) == 1;
      same  = $urandom_range(0, 3) == 0;
      re    = do_r;
      we    = do_w;
      raddr = AW'($urandom);
      waddr = same ? (do_r ? raddr : held) : AW'($urandom);
      din   = $urandom;
      #1 check_dout("pre-edge");
      @(posedge clk);
      if (do_w) begin model[waddr] = din; n_write++; end
      if (do_r) begin held = raddr; n_read++; end
      else n_hold++;
      if (do_r && do_w) n_rw++;
      if (do_w && waddr == held) n_rdw++;
      if (!do_r && !do_w) n_idle++;
      #1 check_dout("post-edge");
    end

    $display("writes=%0d reads=%0d holds=%0d read+write=%0d write-to-read-word=%0d idle=%0d",
             n_write, n_read, n_hold, n_rw, n_rdw, n_idle);
    $display("upper-bit checks=%0d latency checks=%0d", n_upper, n_latency);
    if (n_write == 0)   begin failures++; $display("no write happened"); end
    if (n_read == 0)    begin failures++; $display("no read happened"); end
    if (n_hold == 0)    begin failures++; $display("no read hold happened"); end
    if (n_rw == 0)      begin failures++; $display("no simultaneous read and write"); end
    if (n_rdw == 0)     begin failures++; $display("no write to the word being read"); end
    if (n_idle == 0)    begin failures++; $display("no idle cycle"); end
    if (n_latency == 0) begin failures++; $display("no latency check"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
