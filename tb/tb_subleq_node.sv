// tb_subleq_node -- self-checking testbench of one processor with its memory.
//
// Talks to the node the way the access controller does, through the request
// bundle. Each program is loaded with a write transaction (which must start
// the processor), the Status byte is polled with one-byte reads (which must
// not stop it) until it reads 0xA2, then the whole memory is read back and
// compared with the reference model run on the same image. A looping program
// checks that a longer read stops a running processor and that the memory
// then holds a state the reference model passes through. Twelve random
// programs that stop by themselves are loaded, run and compared likewise.
module tb_subleq_node;
  import subleq_pkg::*;
  import tb_subleq_ref_pkg::*;

  localparam int unsigned N = 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sel, rd_valid;
  logic [7:0] rd_byte;
  ser_req_t req;
  status_e status;

  subleq_node dut (.*);

  int checks = 0, failures = 0, polls = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic strobe(ser_req_t r);
    @(negedge clk); req = r; @(negedge clk); req = '0;
  endtask

  task automatic load(ref ref_mem_t m);
    ser_req_t r;
    r = '0; r.begin_wr = 1; strobe(r);
    for (int i = 0; i < 4 * N; i++) begin
      r = '0; r.wr_valid = 1; r.wr_byte = m[i / 4][8 * (i % 4) +: 8]; strobe(r);
    end
    r = '0; r.finish = 1; strobe(r);
  endtask

  task automatic read(int n, output logic [7:0] b[$]);
    ser_req_t r;
    b = {};
    r = '0; r.begin_rd = 1; strobe(r);
    for (int i = 0; i < n; i++) begin
      r = '0; r.rd_req = 1; strobe(r);
      @(negedge clk);
      b.push_back(rd_byte);
    end
    r = '0; r.finish = 1; strobe(r);
  endtask

  task automatic read_mem(output ref_mem_t m, output logic [7:0] st);
    logic [7:0] b[$];
    read(4 + 4 * N, b);
    st = b[0];
    for (int i = 0; i < N; i++) m[i] = {b[4+4*i+3], b[4+4*i+2], b[4+4*i+1], b[4+4*i]};
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ref_mem_t prog, expect_m, got;
  logic [31:0] df [249];
  logic [7:0] b[$], st;
  int unsigned steps;

  initial begin
    sel = 1; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    read(1, b);
    check(b[0] == 8'hA0, "status 0xA0 after power-on");

    // modular double factorial for a small range, run to completion
    $readmemh("tb/double_factorial.hex", df);
    foreach (prog[i]) prog[i] = (i < 249) ? df[i] : '0;
    prog[3] = 7; prog[4] = 2;
    expect_m = prog;
    check(ref_run(expect_m, 10_000_000, steps) == REF_HALT_JUMP, "reference halts");
    load(prog);
    check(status == ST_RUNNING, "running after load");
    do begin
      read(1, b);
      polls++;
      repeat (2000) @(posedge clk);
    end while (b[0] == 8'hA1);
    check(b[0] == 8'hA2, "status 0xA2 after the program halted");
    check(polls > 1, "status polled while running without stopping it");
    read_mem(got, st);
    check(st == 8'hA2, "status word of the full read");
    check(got == expect_m, "memory after the run equals the reference");
    check(got[8] == ref_double_factorial(7, 2, 5039), "X holds the double factorial");

    // looping program: B goes 1, -1, 0, -2, 0, -2 ...; stopped by reading
    foreach (prog[i]) prog[i] = '0;
    prog[0] = 3; prog[1] = 4; prog[2] = 6;
    prog[3] = 2; prog[4] = 1;
    prog[6] = 4; prog[7] = 4;
    load(prog);
    repeat (500) @(posedge clk);
    read(1, b);
    check(b[0] == 8'hA1 && status == ST_RUNNING, "looping program still running after status read");
    read_mem(got, st);
    check(st == 8'hA1, "full read reports running in its first byte");
    check(status == ST_STOPPED, "full read stopped the processor");
    check(signed'(got[4]) inside {-1, 0, -2}, "B holds a value the loop passes through");
    got[4] = prog[4];
    check(got == prog, "rest of memory untouched by the loop");
    read(1, b);
    check(b[0] == 8'hA2, "status 0xA2 after stop by read");

    // negative operand stops: "(-1) 3 0" is an input instruction
    foreach (prog[i]) prog[i] = '0;
    prog[0] = 7; prog[1] = 7; prog[2] = 3;   // clear m[7], jump 3
    prog[3] = '1; prog[4] = 7; prog[5] = 0;
    prog[7] = 9;
    load(prog);
    repeat (50) @(posedge clk);
    check(status == ST_STOPPED, "input operand stops the processor");
    read_mem(got, st);
    check(got[7] == 0 && got[3] == '1, "first instruction executed before the stop");

    // random programs that stop by themselves, loaded, run and read back
    for (int t = 0, n = 0; n < 12 && t < 1000; t++) begin
      ref_end_e how;
      foreach (prog[i]) prog[i] = '0;
      for (int i = 0; i < 48; i++)
        prog[i] = ($urandom_range(0, 15) == 0) ? '1 : $urandom_range(0, 47);
      expect_m = prog;
      how = ref_run(expect_m, 400, steps);
      if (how == REF_RUNNING) continue;
      n++;
      load(prog);
      repeat (3 * 400 + 10) @(posedge clk);
      read_mem(got, st);
      check(st == 8'hA2, $sformatf("random program %0d stopped by itself", n));
      check(got == expect_m, $sformatf("random program %0d memory equals the reference", n));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
