// tb_subleq_spi_slave -- self-checking testbench of the SPI slave.
//
// A mode-0 SPI master task clocks random byte strings through the slave at
// the fastest allowed rate (sclk = clk/16) and at a slower one. A responder
// in the testbench answers every received byte, four clocks after rx_valid,
// with that byte XOR 0x5A, and holds 0x3C for the first byte. Checked: every
// byte the master sends comes out on rx_byte, the master receives 0x3C and
// then each previous byte XOR 0x5A, cs_start / cs_end pulse once per
// transaction, miso is low while the chip select is high.
module tb_subleq_spi_slave;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sclk, cs_n, mosi, miso, cs_start, cs_end, rx_valid;
  logic [7:0] rx_byte, tx_byte;

  subleq_spi_slave dut (.*);

  int checks = 0, failures = 0, n_start = 0, n_end = 0;
  logic [7:0] rx_seen[$];
  int half = 8;   // clk periods per sclk half period

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // responder
  logic [7:0] pend;
  int delay = -1;
  always @(posedge clk) if (rst_n) begin
    if (cs_start) n_start++;
    if (cs_end) begin n_end++; tx_byte <= 8'h3C; end
    if (rx_valid) begin rx_seen.push_back(rx_byte); pend = rx_byte ^ 8'h5A; delay = 4; end
    if (delay == 0) tx_byte <= pend;
    if (delay >= 0) delay--;
  end

  task automatic spi_byte(input logic [7:0] tx, output logic [7:0] rx);
    for (int i = 7; i >= 0; i--) begin
      mosi = tx[i];
      repeat (half) @(negedge clk);
      sclk = 1;
      rx[i] = miso;
      repeat (half) @(negedge clk);
      sclk = 0;
    end
  endtask

  task automatic transaction(int n);
    logic [7:0] tx[$], rx;
    rx_seen = {};
    cs_n = 0;
    repeat (half) @(negedge clk);
    for (int i = 0; i < n; i++) begin
      tx.push_back(8'($urandom));
      spi_byte(tx[i], rx);
      if (i == 0) check(rx == 8'h3C, "first byte out is the byte held at chip select");
      else        check(rx == (tx[i-1] ^ 8'h5A), $sformatf("byte %0d out", i));
    end
    repeat (half) @(negedge clk);
    cs_n = 1;
    repeat (4 * half) @(negedge clk);
    check(rx_seen.size() == n, "one rx_valid per byte");
    foreach (tx[i]) if (i < rx_seen.size()) check(rx_seen[i] == tx[i], $sformatf("byte %0d in", i));
    check(miso == 0, "miso low while deselected");
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sclk = 0; cs_n = 1; mosi = 0; tx_byte = 8'h3C;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    for (int t = 0; t < 10; t++) transaction($urandom_range(1, 12));
    half = 13;
    for (int t = 0; t < 5; t++) transaction($urandom_range(1, 12));
    check(n_start == 15 && n_end == 15, "one start and one end pulse per transaction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
