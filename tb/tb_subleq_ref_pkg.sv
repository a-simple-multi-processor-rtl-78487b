// tb_subleq_ref_pkg -- reference model of the Subleq machine for testbenches.
//
// Runs the instruction set directly on an array of words, one instruction per
// loop iteration, with no notion of clocks or memory ports:
//   A = m[IP], B = m[IP+1], C = m[IP+2]; stop if A < 0 or B < 0;
//   m[B] -= m[A]; IP = (m[B] <= 0) ? C : IP + 3; stop when IP < 0.
// Addresses are taken modulo the memory size, as in the RTL. The results
// (final memory, instructions executed, how it stopped) are what the
// testbenches compare the hardware against.
package tb_subleq_ref_pkg;

  localparam int unsigned REF_WORDS = 512;

  typedef logic [31:0] ref_mem_t [REF_WORDS];

  typedef enum int {
    REF_RUNNING,       // step limit reached
    REF_HALT_JUMP,     // IP became negative
    REF_HALT_OPERAND   // A or B negative
  } ref_end_e;

  // Execute at most max_steps instructions of the program in m.
  function automatic ref_end_e ref_run(ref ref_mem_t m, input int unsigned max_steps,
                                       output int unsigned steps);
    int signed ip, a, b, c, r;
    ip    = 0;
    steps = 0;
    while (steps < max_steps) begin
      a = signed'(m[ip % REF_WORDS]);
      b = signed'(m[(ip + 1) % REF_WORDS]);
      c = signed'(m[(ip + 2) % REF_WORDS]);
      if (a < 0 || b < 0) return REF_HALT_OPERAND;
      r = signed'(m[b % REF_WORDS]) - signed'(m[a % REF_WORDS]);
      m[b % REF_WORDS] = r;
      steps++;
      ip = (r <= 0) ? c : ip + 3;
      if (ip < 0) return REF_HALT_JUMP;
    end
    return REF_RUNNING;
  endfunction

  // (prod_{n=lo+1}^{hi} n!) mod md, the result of the double-factorial program
  // with A = hi and B = lo.
  function automatic int unsigned ref_double_factorial(int unsigned hi, int unsigned lo,
                                                       int unsigned md);
    longint unsigned x = 1;
    for (int unsigned n = lo + 1; n <= hi; n++)
      for (int unsigned j = 1; j <= n; j++)
        x = (x * j) % longint'(md);
    return int'(x);
  endfunction

endpackage
