// tb_subleq_array_max -- the array at its largest addressable size, 63 processors.
//
// The 6-bit processor index on the SPI bus leaves room for 63 processors
// (index 0 is the array itself). This testbench builds subleq_array with
// NUM_PROC = 63 and a small memory per processor (16 words) to keep the
// simulation short, and checks over SPI: index 0 reports 63; a distinct short
// program loaded into each of processors 1, 2, 32 and 63 (each adds its own
// index into a result cell, then halts) runs and is read back with the right
// result; processors not loaded stay at 0xA0; the select never reaches a
// processor other than the one addressed.
module tb_subleq_array_max;
  localparam int unsigned NP = 63, N = 16, HALF = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sclk, cs_n, mosi, miso;
  logic [NP-1:0][7:0] status;

  subleq_array #(.NUM_PROC(NP), .MEM_WORDS(N)) dut (
    .clk, .rst_n, .spi_sclk (sclk), .spi_cs_n (cs_n), .spi_mosi (mosi),
    .spi_miso (miso), .status
  );

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic spi_byte(input logic [7:0] tx, output logic [7:0] rx);
    for (int i = 7; i >= 0; i--) begin
      mosi = tx[i];
      repeat (HALF) @(negedge clk);
      sclk = 1;
      rx[i] = miso;
      repeat (HALF) @(negedge clk);
      sclk = 0;
    end
  endtask

  task automatic spi_write(int idx, logic [31:0] m[N]);
    logic [7:0] rx;
    cs_n = 0; repeat (HALF) @(negedge clk);
    spi_byte(8'(idx), rx);
    for (int i = 0; i < 4 * N; i++) spi_byte(m[i / 4][8 * (i % 4) +: 8], rx);
    repeat (HALF) @(negedge clk); cs_n = 1; repeat (4 * HALF) @(negedge clk);
  endtask

  task automatic spi_read(int idx, int n, output logic [7:0] b[$]);
    logic [7:0] rx;
    b = {};
    cs_n = 0; repeat (HALF) @(negedge clk);
    spi_byte(8'h80 | 8'(idx), rx);
    for (int i = 0; i < n; i++) begin spi_byte(8'h00, rx); b.push_back(rx); end
    repeat (HALF) @(negedge clk); cs_n = 1; repeat (4 * HALF) @(negedge clk);
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Program: R -= NEG (R = k, NEG = -k), then Z Z (-1).
  //   0: 9 10 3     R=10, NEG=9
  //   3: 11 11 -1   halt
  function automatic void make_prog(int k, output logic [31:0] m[N]);
    foreach (m[i]) m[i] = '0;
    m[0] = 9;  m[1] = 10; m[2] = 3;
    m[3] = 11; m[4] = 11; m[5] = '1;
    m[9] = -k;
  endfunction

  initial begin
    logic [7:0] b[$];
    logic [31:0] m[N];
    int targets[4] = '{1, 2, 32, 63};

    sclk = 0; cs_n = 1; mosi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    spi_read(0, 1, b);
    check(b[0] == 8'(NP), $sformatf("index 0 reports %0d processors", b[0]));

    foreach (targets[t]) begin
      make_prog(targets[t], m);
      spi_write(targets[t], m);
    end
    repeat (200) @(posedge clk);
    for (int p = 1; p <= NP; p++) begin
      automatic bit loaded = (p == 1 || p == 2 || p == 32 || p == 63);
      check(status[p-1] == (loaded ? 8'hA2 : 8'hA0),
            $sformatf("processor %0d status %h", p, status[p-1]));
    end
    foreach (targets[t]) begin
      spi_read(targets[t], 4 + 4 * 11, b);
      check(b[0] == 8'hA2, $sformatf("processor %0d read status", targets[t]));
      check({b[4+43], b[4+42], b[4+41], b[4+40]} == 32'(targets[t]),
            $sformatf("processor %0d result %0d", targets[t], {b[4+43], b[4+42], b[4+41], b[4+40]}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
