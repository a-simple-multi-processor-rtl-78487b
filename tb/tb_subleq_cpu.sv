// tb_subleq_cpu -- self-checking testbench of the Subleq processor.
//
// The processor runs on a subleq_dpram; the testbench owns RAM port A while
// the processor is idle, to load programs and read results. Each program is
// also run on the reference model (tb_subleq_ref_pkg) and the whole memory,
// the way the program stopped and the clock count are compared:
//   - the looping example of the language description (B goes 1,-1,0,-2,...),
//     stopped by the stop input after a chosen number of instructions;
//   - the "hello, world" program, which stops at once on its output operand;
//   - an instruction that overwrites its own jump target (old C is used);
//   - the modular double-factorial program for small ranges;
//   - random programs stopped after a random number of instructions.
// Expected timing: 1 clock of fetch, then 3 clocks per instruction, plus 1
// when a negative A or B is found.
module tb_subleq_cpu;
  import tb_subleq_ref_pkg::*;

  localparam int unsigned W = 32, N = 512, AW = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, stop, running, halted;
  logic c_a_en, c_b_en, c_b_we;
  logic [AW-1:0] c_a_addr, c_b_addr;
  logic [W-1:0]  c_b_wdata, a_rdata, b_rdata;
  logic t_en, t_we;
  logic [AW-1:0] t_addr;
  logic [W-1:0]  t_wdata;

  subleq_cpu #(.WORD_W(W), .MEM_WORDS(N)) dut (
    .clk, .rst_n, .start, .stop, .running, .halted,
    .a_en (c_a_en), .a_addr (c_a_addr), .a_rdata,
    .b_en (c_b_en), .b_we (c_b_we), .b_addr (c_b_addr), .b_wdata (c_b_wdata), .b_rdata
  );

  subleq_dpram #(.WORDS(N), .WIDTH(W)) mem (
    .clk,
    .a_en   (running ? c_a_en    : t_en),
    .a_we   (running ? 1'b0      : t_we),
    .a_addr (running ? c_a_addr  : t_addr),
    .a_wdata(t_wdata),
    .a_rdata,
    .b_en (c_b_en), .b_we (c_b_we), .b_addr (c_b_addr), .b_wdata (c_b_wdata), .b_rdata
  );

  int checks = 0, failures = 0;
  int halts_jump = 0, halts_operand = 0, host_stops = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load(ref ref_mem_t m);
    for (int i = 0; i < N; i++) begin
      t_en <= 1; t_we <= 1; t_addr <= AW'(i); t_wdata <= m[i];
      @(posedge clk);
    end
    t_en <= 0; t_we <= 0;
  endtask

  task automatic compare(ref ref_mem_t m, input string name);
    int bad = 0;
    for (int i = 0; i < N; i++) begin
      t_en <= 1; t_we <= 0; t_addr <= AW'(i);
      @(posedge clk); t_en <= 0;
      @(negedge clk);
      if (a_rdata !== m[i]) begin
        if (bad < 4) $display("  %s: mem[%0d] = %h, expected %h", name, i, a_rdata, m[i]);
        bad++;
      end
    end
    check(bad == 0, {name, ": memory contents"});
  endtask

  // Run the loaded program; stop it with the stop input after stop_after
  // clocks (0: let it halt by itself, with a time limit). Returns the clocks
  // spent running and whether it halted by itself.
  task automatic run(input int stop_after, output int cycles, output bit self_halt);
    int limit = (stop_after > 0) ? stop_after : 5_000_000;
    cycles = 0; self_halt = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (running && cycles < limit) begin
      cycles++;
      if (cycles == limit && stop_after > 0) stop = 1;
      @(negedge clk);
      if (halted) self_halt = 1;
    end
    stop = 0;
    @(negedge clk);
  endtask

  task automatic run_and_check(ref ref_mem_t prog, input int unsigned steps_limit,
                               input string name);
    ref_mem_t m = prog;
    int unsigned steps;
    ref_end_e how;
    int cycles, expect_cycles;
    bit self_halt;
    how = ref_run(m, steps_limit, steps);
    load(prog);
    if (how == REF_RUNNING) begin
      expect_cycles = 1 + 3 * steps;
      run(expect_cycles, cycles, self_halt);
      check(!self_halt, {name, ": stopped by host, not by itself"});
      host_stops++;
    end else begin
      expect_cycles = 1 + 3 * steps + (how == REF_HALT_OPERAND ? 1 : 0);
      run(0, cycles, self_halt);
      check(self_halt, {name, ": halted by itself"});
      if (how == REF_HALT_JUMP) halts_jump++; else halts_operand++;
    end
    check(cycles == expect_cycles,
          $sformatf("%s: %0d clocks, expected %0d", name, cycles, expect_cycles));
    compare(m, name);
  endtask

  ref_mem_t prog;
  logic [31:0] df [249];

  initial begin
    repeat (2_000_000_00) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; stop = 0; t_en = 0; t_we = 0; t_addr = '0; t_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!running, "idle after reset");

    // 1. Example of the language description: two instructions loop forever.
    //    A B C / A:2 B:1 0 / C:B B 0
    foreach (prog[i]) prog[i] = '0;
    prog[0] = 3; prog[1] = 4; prog[2] = 6;
    prog[3] = 2; prog[4] = 1; prog[5] = 0;
    prog[6] = 4; prog[7] = 4; prog[8] = 0;
    for (int k = 1; k <= 6; k++) begin
      run_and_check(prog, k, $sformatf("loop example, %0d instructions", k));
    end
    // values of B after 1..6 instructions are 1-2=-1, 0, -2, 0, -2, 0
    begin
      automatic ref_mem_t m = prog;
      automatic int unsigned s;
      void'(ref_run(m, 3, s));
      check(signed'(m[4]) == -2, "reference: B = -2 after three instructions");
    end

    // 2. "hello, world": output operand (-1) stops the processor at once.
    //    L:H (-1); U L; U ?+2; Z H (-1); Z Z L / . U:-1 H:"hello, world\n" Z:0
    foreach (prog[i]) prog[i] = '0;
    prog[0] = 16; prog[1] = '1; prog[2] = 3;
    prog[3] = 15; prog[4] = 0;  prog[5] = 6;
    prog[6] = 15; prog[7] = 10; prog[8] = 9;
    prog[9] = 30; prog[10] = 16; prog[11] = '1;
    prog[12] = 30; prog[13] = 30; prog[14] = 0;
    prog[15] = '1;
    begin
      automatic string s = "hello, world\n";
      for (int i = 0; i < s.len(); i++) prog[16 + i] = s[i];
    end
    run_and_check(prog, 100, "hello world");

    // 3. An instruction that overwrites its own third operand: the jump
    //    uses the value C had before the write. 0: 6 2 9; m[6]=20 -> m[2]=-11.
    foreach (prog[i]) prog[i] = '0;
    prog[0] = 6; prog[1] = 2; prog[2] = 9; prog[6] = 20;
    prog[9] = 7; prog[10] = 7; prog[11] = '1;   // halt
    run_and_check(prog, 100, "self-modified jump target");

    // 4. Modular double factorial, hand-written program of the appendix.
    $readmemh("tb/double_factorial.hex", df);
    foreach (prog[i]) prog[i] = (i < 249) ? df[i] : '0;
    prog[3] = 6; prog[4] = 1;
    run_and_check(prog, 1_000_000, "double factorial A=6 B=1");
    begin
      automatic ref_mem_t m = prog;
      automatic int unsigned s;
      void'(ref_run(m, 1_000_000, s));
      check(m[8] == ref_double_factorial(6, 1, 5039), "reference: X = (6!)! mod 5039 product");
    end

    // 5. Random programs, stopped after a random number of instructions
    //    or halted by themselves.
    for (int t = 0; t < 40; t++) begin
      foreach (prog[i]) prog[i] = '0;
      for (int i = 0; i < 48; i++) prog[i] = ($urandom_range(0, 15) == 0) ? '1 : $urandom_range(0, 47);
      run_and_check(prog, $urandom_range(1, 300), $sformatf("random program %0d", t));
    end

    check(halts_jump > 0 && halts_operand > 0 && host_stops > 0,
          "all three ways of stopping exercised");
    $display("halts by jump=%0d by operand=%0d by host=%0d", halts_jump, halts_operand, host_stops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
