// tb_subleq_array -- end-to-end testbench of the whole array at full size.
//
// The testbench plays the USB-to-SPI bridge: an SPI master (mode 0, sclk =
// clk/16) runs the host protocol on the pins of a default subleq_array (28
// processors, 512 words each). The job is the modular double factorial
// prod_{n=1}^{130} n! mod 5039, split the way a host splits it: processor p
// (1..26) gets the range (5p-5, 5p] patched into the A and B cells of the
// hand-written program and loaded as a full 2048-byte image. Processor 27
// runs an endless two-instruction loop and processor 28 an input
// instruction. The host then polls Status bytes until all 26 are done, reads
// each partial result X, multiplies them, and compares with the value the
// testbench computes directly. Processor 1's whole memory is read back and
// compared with the reference model. Every mechanism of the design is counted
// and must occur at least once: processor count read, 0xA0 before any run,
// start by write, several processors running at once, status read that leaves
// a processor running, stop by read, halt by jump to -1, halt on a negative
// operand.
module tb_subleq_array;
  import tb_subleq_ref_pkg::*;

  localparam int unsigned NP = 28, N = 512, MD = 5039, HALF = 8;
  localparam int unsigned XADDR = 8, AADDR = 3, BADDR = 4;
  localparam int unsigned SPAN = 5;   // factorials per processor

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sclk, cs_n, mosi, miso;
  logic [NP-1:0][7:0] status;

  subleq_array dut (
    .clk, .rst_n, .spi_sclk (sclk), .spi_cs_n (cs_n), .spi_mosi (mosi),
    .spi_miso (miso), .status
  );

  int checks = 0, failures = 0;
  // mechanism counters
  int m_count_read = 0, m_never_run = 0, m_start_by_write = 0, m_parallel = 0;
  int m_status_only = 0, m_stop_by_read = 0, m_halt_jump = 0, m_halt_operand = 0;
  int max_running = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    automatic int r = 0;
    for (int i = 0; i < NP; i++) if (status[i] == 8'hA1) r++;
    if (r > max_running) max_running = r;
  end

  // ---- SPI master -------------------------------------------------------
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

  task automatic spi_write(int idx, ref ref_mem_t m);
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

  function automatic logic [31:0] word_at(logic [7:0] b[$], int w);
    return {b[4+4*w+3], b[4+4*w+2], b[4+4*w+1], b[4+4*w]};
  endfunction

  // ---- programs ----------------------------------------------------------
  logic [31:0] df [249];
  ref_mem_t prog, loop_prog, io_prog, expect_m;

  initial begin
    repeat (14_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b[$];
    logic [NP-1:0] done;
    longint unsigned product;
    int unsigned steps;
    int polls;

    sclk = 0; cs_n = 1; mosi = 0;
    $readmemh("tb/double_factorial.hex", df);
    foreach (prog[i]) prog[i] = (i < 249) ? df[i] : '0;
    foreach (loop_prog[i]) loop_prog[i] = '0;       // A B C / A:2 B:1 0 / C:B B 0
    loop_prog[0] = 3; loop_prog[1] = 4; loop_prog[2] = 6;
    loop_prog[3] = 2; loop_prog[4] = 1; loop_prog[6] = 4; loop_prog[7] = 4;
    foreach (io_prog[i]) io_prog[i] = '0;           // (-1) 6 ? : read input
    io_prog[0] = '1; io_prog[1] = 6; io_prog[2] = 3;

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    // the array reports its size
    spi_read(0, 2, b);
    check(b[0] == 8'(NP), $sformatf("processor count %0d", b[0]));
    check(b[1] == 0, "processor count followed by zero");
    if (b[0] == 8'(NP)) m_count_read++;

    // nothing has run yet
    for (int p = 1; p <= NP; p++) begin
      spi_read(p, 1, b);
      check(b[0] == 8'hA0, $sformatf("processor %0d status 0xA0 at power-on", p));
      if (b[0] == 8'hA0) m_never_run++;
    end

    // the endless loop first, so that it runs during the whole job
    spi_write(NP - 1, loop_prog);
    // load the job: each load starts its processor
    for (int p = 1; p <= NP - 2; p++) begin
      automatic ref_mem_t m = prog;
      m[AADDR] = SPAN * p; m[BADDR] = SPAN * (p - 1);
      spi_write(p, m);
      spi_read(p, 1, b);
      if (b[0] == 8'hA1 || b[0] == 8'hA2) m_start_by_write++;
      check(b[0] != 8'hA0, $sformatf("processor %0d started by its load", p));
    end
    spi_write(NP, io_prog);
    if (max_running > 2) m_parallel++;

    // the looping processor keeps running while its status is read
    spi_read(NP - 1, 1, b);
    check(b[0] == 8'hA1, "looping processor reads 0xA1");
    spi_read(NP - 1, 1, b);
    check(b[0] == 8'hA1 && status[NP - 2] == 8'hA1, "status-only reads leave it running");
    if (b[0] == 8'hA1 && status[NP - 2] == 8'hA1) m_status_only++;
    // a longer read stops it
    spi_read(NP - 1, 4 + 4 * 8, b);
    check(b[0] == 8'hA1, "read of the looping processor starts with 0xA1");
    check(signed'(word_at(b, 4)) inside {-1, 0, -2}, "loop variable in its range");
    spi_read(NP - 1, 1, b);
    check(b[0] == 8'hA2, "looping processor stopped by the read");
    if (b[0] == 8'hA2) m_stop_by_read++;

    // the input instruction stopped its processor without executing
    spi_read(NP, 4 + 4 * 8, b);
    check(b[0] == 8'hA2, "negative operand stops the processor");
    check(word_at(b, 0) == '1 && word_at(b, 6) == 0, "memory untouched by the input instruction");
    if (b[0] == 8'hA2) m_halt_operand++;

    // poll until the job is done
    done = '0;
    polls = 0;
    while (done[NP-3:0] != '1 && polls < 100_000) begin
      for (int p = 1; p <= NP - 2; p++) if (!done[p-1]) begin
        spi_read(p, 1, b);
        if (b[0] == 8'hA2) done[p-1] = 1;
      end
      polls++;
    end
    check(done[NP-3:0] == '1, "all job processors halted");
    m_halt_jump = $countones(done);

    // collect partial results and combine them
    product = 1;
    for (int p = 1; p <= NP - 2; p++) begin
      spi_read(p, 4 + 4 * (XADDR + 1), b);
      check(b[0] == 8'hA2, "status 0xA2 on result read");
      check(word_at(b, XADDR) == ref_double_factorial(SPAN * p, SPAN * (p - 1), MD),
            $sformatf("processor %0d partial result %0d", p, word_at(b, XADDR)));
      product = (product * word_at(b, XADDR)) % MD;
    end
    check(product == ref_double_factorial(SPAN * (NP - 2), 0, MD),
          $sformatf("combined result %0d, expected %0d", product, ref_double_factorial(SPAN * (NP - 2), 0, MD)));
    $display("prod_{n=1}^{%0d} n! mod %0d = %0d", SPAN * (NP - 2), MD, product);

    // whole memory of processor 1 against the reference model
    expect_m = prog;
    expect_m[AADDR] = SPAN; expect_m[BADDR] = 0;
    void'(ref_run(expect_m, 10_000_000, steps));
    spi_read(1, 4 + 4 * N, b);
    begin
      automatic int bad = 0;
      for (int i = 0; i < N; i++) if (word_at(b, i) != expect_m[i]) bad++;
      check(bad == 0, $sformatf("processor 1 memory matches the reference (%0d words differ)", bad));
    end

    $display("mechanisms: count_read=%0d never_run=%0d start_by_write=%0d parallel=%0d (max %0d running) status_only=%0d stop_by_read=%0d halt_jump=%0d halt_operand=%0d",
             m_count_read, m_never_run, m_start_by_write, m_parallel, max_running,
             m_status_only, m_stop_by_read, m_halt_jump, m_halt_operand);
    check(m_count_read > 0, "mechanism: processor count read");
    check(m_never_run > 0, "mechanism: status 0xA0");
    check(m_start_by_write > 0, "mechanism: start by write");
    check(m_parallel > 0, "mechanism: processors running in parallel");
    check(m_status_only > 0, "mechanism: status read without stop");
    check(m_stop_by_read > 0, "mechanism: stop by read");
    check(m_halt_jump > 0, "mechanism: halt by jump to a negative address");
    check(m_halt_operand > 0, "mechanism: halt on a negative operand");

    $display("finished after %0d clocks", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
