// tb_subleq_serial_if -- self-checking testbench of one processor's serial port.
//
// The processor side is played by the testbench (it watches cpu_start and
// cpu_stop and drives cpu_running / cpu_halted); the memory is a real
// subleq_dpram on the interface's port. Checked: Status byte 0xA0 after reset,
// 0xA1 after a write transaction, 0xA2 after a stop; a write stops the
// processor at once and stores bytes little-endian from address 0; a read
// returns the Status byte, three zero bytes and the memory, each exactly two
// clocks after its request; reading only the Status byte leaves the processor
// running, reading on stops it; bytes past the end read as zero; requests
// without the select are ignored.
module tb_subleq_serial_if;
  import subleq_pkg::*;

  localparam int unsigned W = 32, N = 16, AW = 4, BYTES = N * 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sel, rd_valid, cpu_start, cpu_stop, cpu_running, cpu_halted;
  logic [7:0] rd_byte;
  ser_req_t req;
  status_e status;
  logic m_en, m_we;
  logic [AW-1:0] m_addr;
  logic [W-1:0] m_wdata, m_rdata, b_rdata;

  subleq_serial_if #(.WORD_W(W), .MEM_WORDS(N)) dut (.*);
  subleq_dpram #(.WORDS(N), .WIDTH(W)) mem (
    .clk, .a_en (m_en), .a_we (m_we), .a_addr (m_addr), .a_wdata (m_wdata),
    .a_rdata (m_rdata), .b_en (1'b0), .b_we (1'b0), .b_addr ('0), .b_wdata ('0),
    .b_rdata
  );

  int checks = 0, failures = 0, starts = 0, stops = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // fake processor: runs from a start until a stop
  always_ff @(posedge clk) begin
    if (!rst_n) cpu_running <= 0;
    else if (cpu_start) begin cpu_running <= 1; starts++; end
    else if (cpu_stop) begin cpu_running <= 0; stops++; end
  end

  task automatic strobe(ser_req_t r);
    @(negedge clk); req = r; @(negedge clk); req = '0;
  endtask

  task automatic write_txn(logic [7:0] bytes[$]);
    ser_req_t r;
    r = '0; r.begin_wr = 1; strobe(r);
    foreach (bytes[i]) begin
      r = '0; r.wr_valid = 1; r.wr_byte = bytes[i]; strobe(r);
    end
    r = '0; r.finish = 1; strobe(r);
  endtask

  // read n bytes; checks the two-clock latency of each
  task automatic read_txn(int n, output logic [7:0] bytes[$]);
    ser_req_t r;
    bytes = {};
    r = '0; r.begin_rd = 1; strobe(r);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); req = '0; req.rd_req = 1;
      @(negedge clk); req = '0;
      check(!rd_valid, "no byte one clock after request");
      @(negedge clk);
      check(rd_valid, "byte two clocks after request");
      bytes.push_back(rd_byte);
    end
    r = '0; r.finish = 1; strobe(r);
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] img[$], got[$];
  logic [W-1:0] words[N];

  initial begin
    sel = 1; req = '0; cpu_halted = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(status == ST_NEVER_RUN, "status 0xA0 after reset");

    // read before any run: status A0, stop not requested
    read_txn(1, got);
    check(got[0] == 8'hA0, "first status byte 0xA0");

    // load a full memory image
    img = {};
    for (int i = 0; i < N; i++) begin
      words[i] = $urandom;
      for (int b = 0; b < 4; b++) img.push_back(words[i][8*b +: 8]);
    end
    write_txn(img);
    check(starts == 1 && stops == 1 && cpu_running, "write transaction stopped, then started the processor");
    check(status == ST_RUNNING, "status 0xA1 while running");
    for (int i = 0; i < N; i++) begin
      check(mem.mem[i] == words[i], $sformatf("word %0d stored little-endian", i));
    end

    // read only the status byte: processor keeps running
    read_txn(1, got);
    check(got[0] == 8'hA1, "status byte reads 0xA1");
    check(cpu_running && stops == 1, "status-only read leaves processor running");
    read_txn(2, got);
    check(cpu_running && stops == 1, "reading bytes 0..1 leaves processor running");

    // full read: stops processor, then status word and memory
    read_txn(4 + BYTES + 4, got);
    check(!cpu_running && stops == 2, "reading on stops the processor");
    check(got[0] == 8'hA1, "status byte of that read was 0xA1");
    check(got[1] == 0 && got[2] == 0 && got[3] == 0, "status word padding zero");
    for (int i = 0; i < N; i++)
      check({got[4+4*i+3], got[4+4*i+2], got[4+4*i+1], got[4+4*i]} == words[i],
            $sformatf("memory word %0d read back", i));
    check(got[4+BYTES] == 0 && got[4+BYTES+3] == 0, "past the end reads zero");
    check(status == ST_STOPPED, "status 0xA2 after host stop");

    // write while running stops first; partial write of 5 bytes
    write_txn('{8'h11, 8'h22, 8'h33, 8'h44, 8'h55});
    check(stops == 3 && starts == 2, "second load restarts the processor");
    check(mem.mem[0] == 32'h44332211, "partial write stored word 0");
    check(mem.mem[1] == words[1], "incomplete word 1 not written");

    // processor halts by itself
    @(negedge clk); cpu_halted = 1; @(negedge clk); cpu_halted = 0;
    check(status == ST_STOPPED, "status 0xA2 after halt");

    // without the select nothing happens
    sel = 0;
    write_txn('{8'h00, 8'h00, 8'h00, 8'h00});
    check(mem.mem[0] == 32'h44332211 && starts == 2, "unselected write ignored");
    sel = 1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
