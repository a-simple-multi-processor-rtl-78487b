// tb_subleq_dpram -- self-checking testbench of the dual-port RAM.
//
// Drives random reads and writes on both ports against a shadow array and
// checks: one clock of read latency on each port, read-before-write when the
// other port writes the same address in the same clock, and rdata held while
// a port is disabled.
module tb_subleq_dpram;
  localparam int unsigned WORDS = 512, WIDTH = 32, AW = 9;

  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [WIDTH-1:0] a_wdata, b_wdata, a_rdata, b_rdata;

  subleq_dpram #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);

  logic [WIDTH-1:0] shadow [WORDS];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_a, exp_b, held;
    a_en = 0; a_we = 0; b_en = 0; b_we = 0;
    a_addr = '0; b_addr = '0; a_wdata = '0; b_wdata = '0;
    // fill through both ports
    for (int i = 0; i < WORDS; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i);     a_wdata = $urandom;
      b_en = 1; b_we = 1; b_addr = AW'(i + 1); b_wdata = $urandom;
      shadow[i] = a_wdata; shadow[i + 1] = b_wdata;
    end
    @(negedge clk); a_en = 0; b_en = 0; a_we = 0; b_we = 0;
    // random traffic, never both ports writing one address
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 3) != 0; b_en = $urandom_range(0, 3) != 0;
      a_we = $urandom_range(0, 2) == 0; b_we = $urandom_range(0, 2) == 0;
      a_addr = AW'($urandom_range(0, 15)); b_addr = AW'($urandom_range(0, 15));
      if ($urandom_range(0, 3) == 0) b_addr = a_addr;
      if (a_addr == b_addr) a_we = 0;
      a_wdata = $urandom; b_wdata = $urandom;
      exp_a = shadow[a_addr]; exp_b = shadow[b_addr];   // old contents
      held  = a_rdata;
      @(posedge clk);
      if (a_en && a_we) shadow[a_addr] = a_wdata;
      if (b_en && b_we) shadow[b_addr] = b_wdata;
      #1;
      if (a_en) check(a_rdata == exp_a, $sformatf("port A read %0d", a_addr));
      else      check(a_rdata == held, "port A holds while disabled");
      if (b_en) check(b_rdata == exp_b, $sformatf("port B read %0d", b_addr));
    end
    // whole memory through port A
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); a_en = 1; a_we = 0; b_en = 0; a_addr = AW'(i);
      @(posedge clk); #1;
      check(a_rdata == shadow[i], $sformatf("final read %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
