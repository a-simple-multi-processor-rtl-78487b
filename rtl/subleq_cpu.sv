// subleq_cpu -- the Subleq processor: a state machine around a dual-port RAM.
//
// Executes the one instruction "A B C": memory[B] -= memory[A]; if the result
// is less than or equal to zero jump to C, otherwise continue at IP+3. The
// processor stops when A or B is negative (the halt / input / output forms of
// the language, which this machine does not implement) or when the next IP is
// negative, e.g. a jump to (-1). Arithmetic is 32-bit two's complement and
// wraps on overflow.
//
// Timing, with the registered-read RAM of subleq_dpram (one clock of latency):
//   FETCH   read IP on port A and IP+1 on port B        (only after start)
//   DECODE  latch A, B; stop if either is negative; read memory[A] on port A
//           and memory[B] on port B
//   EXEC    write memory[B]-memory[A] to B on port B; read C = memory[IP+2]
//           on port A (the old value if this very write changes it)
//   BRANCH  IP <= (result <= 0) ? C : IP+3; stop if negative, otherwise read
//           the next A and B at once, so execution continues in DECODE
// An instruction therefore takes 3 clocks, plus 1 for the first after start.
//
// Interface: a start pulse begins execution at IP = 0; a stop pulse ends it at
// once in any state (a write not yet made is dropped, so an instruction is
// either complete or not begun). running is high while executing; halted
// pulses for one clock when the program stops itself. The processor only
// reads through port A; all its writes go through port B.
//
// The algorithm is the paper's pseudocode and the use of both RAM ports to read
// memory[A] and memory[B] together is the paper's; the exact state split and
// the reduction of addresses to the memory size (upper bits ignored, so
// addresses wrap) are this design's choices.
module subleq_cpu #(
  parameter int unsigned WORD_W    = subleq_pkg::WORD_W_DEF,
  parameter int unsigned MEM_WORDS = subleq_pkg::MEM_WORDS_DEF,
  localparam int unsigned AW       = $clog2(MEM_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              stop,
  output logic              running,
  output logic              halted,
  // memory port A (read only)
  output logic              a_en,
  output logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_rdata,
  // memory port B
  output logic              b_en,
  output logic              b_we,
  output logic [AW-1:0]     b_addr,
  output logic [WORD_W-1:0] b_wdata,
  input  logic [WORD_W-1:0] b_rdata
);

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH, S_DECODE, S_EXEC, S_BRANCH
  } state_e;

  state_e                   state, state_n;
  logic signed [WORD_W-1:0] ip, ip_n;
  logic signed [WORD_W-1:0] op_b, op_b_n;    // address B of this instruction
  logic                     leq, leq_n;      // result was <= 0
  logic signed [WORD_W-1:0] opa_w, opb_w, diff, next_ip;
  logic                     halt_n;

  assign opa_w   = signed'(a_rdata);
  assign opb_w   = signed'(b_rdata);
  assign diff    = opb_w - opa_w;
  assign next_ip = leq ? signed'(a_rdata) : ip + 3;
  assign running = (state != S_IDLE);

  always_comb begin
    state_n = state;
    ip_n    = ip;
    op_b_n  = op_b;
    leq_n   = leq;
    halt_n  = 1'b0;
    a_en = 1'b0; a_addr = '0;
    b_en = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    unique case (state)
      S_IDLE: ;
      S_FETCH: begin
        a_en = 1'b1; a_addr = AW'(ip);
        b_en = 1'b1; b_addr = AW'(ip + 1);
        state_n = S_DECODE;
      end
      S_DECODE: begin
        if (opa_w < 0 || opb_w < 0) begin
          ip_n    = '1;              // IP = -1
          halt_n  = 1'b1;
          state_n = S_IDLE;
        end else begin
          a_en = 1'b1; a_addr = AW'(opa_w);
          b_en = 1'b1; b_addr = AW'(opb_w);
          op_b_n  = opb_w;
          state_n = S_EXEC;
        end
      end
      S_EXEC: begin
        b_en = 1'b1; b_we = 1'b1; b_addr = AW'(op_b); b_wdata = diff;
        a_en = 1'b1; a_addr = AW'(ip + 2);
        leq_n   = (diff <= 0);
        state_n = S_BRANCH;
      end
      S_BRANCH: begin
        ip_n = next_ip;
        if (next_ip < 0) begin
          halt_n  = 1'b1;
          state_n = S_IDLE;
        end else begin
          a_en = 1'b1; a_addr = AW'(next_ip);
          b_en = 1'b1; b_addr = AW'(next_ip + 1);
          state_n = S_DECODE;
        end
      end
      default: state_n = S_IDLE;
    endcase
    // A stop request ends execution at once; a pending write is dropped.
    if (stop) begin
      b_we = 1'b0;
      halt_n  = 1'b0;
      state_n = S_IDLE;
    end
    if (start) begin
      ip_n    = '0;
      state_n = S_FETCH;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ip     <= '0;
      op_b   <= '0;
      leq    <= 1'b0;
      halted <= 1'b0;
    end else begin
      state  <= state_n;
      ip     <= ip_n;
      op_b   <= op_b_n;
      leq    <= leq_n;
      halted <= halt_n;
    end
  end

endmodule
