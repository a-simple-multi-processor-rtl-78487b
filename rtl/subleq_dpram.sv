// subleq_dpram -- true dual-port RAM, the private memory of one processor.
//
// Two independent ports (A and B), each able to read or write one word per
// clock. Reads are registered: the word at the address presented in cycle t
// is on rdata during cycle t+1. This is the extra clock of latency the paper
// accepts in exchange for reading memory[A] and memory[B] in the same cycle.
// When one port writes an address in the same cycle the other port reads it,
// the reading port returns the old contents (read-before-write); the processor
// relies on this when an instruction overwrites its own third operand. Writing
// the same address from both ports in one cycle is not allowed; port B wins.
//
// The paper builds this memory from a vendor two-port RAM generator with 512
// words of 32 bits; the behaviour on same-address collisions is this design's
// choice. Contents are not reset: the host loads them before a processor runs.
module subleq_dpram #(
  parameter int unsigned WORDS  = subleq_pkg::MEM_WORDS_DEF,
  parameter int unsigned WIDTH  = subleq_pkg::WORD_W_DEF,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic             clk,
  // port A
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  // Both ports must not write the same word in the same clock.
  a_no_double_write: assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr))
    else $error("both RAM ports write word %0d", a_addr);

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end

endmodule
