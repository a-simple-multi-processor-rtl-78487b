// subleq_node -- one processor of the array with its private memory.
//
// Joins a Subleq processor (subleq_cpu), its 512 x 32-bit dual-port RAM
// (subleq_dpram) and its serial access port (subleq_serial_if). While the
// processor runs it owns both RAM ports; while it is stopped, port A belongs
// to the serial interface, so the host can load or read the memory, and port
// B is idle. The serial interface stops the processor before it touches the
// memory, so the hand-over never cuts an access short.
//
// Interface: the host request bundle and select come from the access
// controller; a read byte appears on rd_byte/rd_valid RD_LATENCY clocks after
// its request. status is the Status byte (0xA0/0xA1/0xA2).
//
// The pairing of one processor with one memory and the bus hand-over while
// stopped follow the paper; the port assignment is this design's choice.
module subleq_node
  import subleq_pkg::*;
#(
  parameter int unsigned WORD_W    = WORD_W_DEF,
  parameter int unsigned MEM_WORDS = MEM_WORDS_DEF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sel,
  input  ser_req_t   req,
  output logic       rd_valid,
  output logic [7:0] rd_byte,
  output status_e    status
);

  localparam int unsigned AW = $clog2(MEM_WORDS);

  logic              cpu_start, cpu_stop, cpu_running, cpu_halted;
  // processor ports
  logic              ca_en, cb_en, cb_we;
  logic [AW-1:0]     ca_addr, cb_addr;
  logic [WORD_W-1:0] cb_wdata;
  // serial interface port
  logic              s_en, s_we;
  logic [AW-1:0]     s_addr;
  logic [WORD_W-1:0] s_wdata;
  // RAM ports
  logic              a_en, a_we;
  logic [AW-1:0]     a_addr;
  logic [WORD_W-1:0] a_wdata, a_rdata, b_rdata;

  subleq_cpu #(.WORD_W(WORD_W), .MEM_WORDS(MEM_WORDS)) u_cpu (
    .clk, .rst_n,
    .start   (cpu_start),
    .stop    (cpu_stop),
    .running (cpu_running),
    .halted  (cpu_halted),
    .a_en    (ca_en),  .a_addr (ca_addr),
    .a_rdata (a_rdata),
    .b_en    (cb_en),  .b_we (cb_we),  .b_addr (cb_addr), .b_wdata (cb_wdata),
    .b_rdata (b_rdata)
  );

  subleq_serial_if #(.WORD_W(WORD_W), .MEM_WORDS(MEM_WORDS)) u_ser (
    .clk, .rst_n, .sel, .req, .rd_valid, .rd_byte,
    .cpu_start, .cpu_stop, .cpu_running, .cpu_halted, .status,
    .m_en    (s_en), .m_we (s_we), .m_addr (s_addr), .m_wdata (s_wdata),
    .m_rdata (a_rdata)
  );

  // Port A: processor while running, serial interface while stopped.
  always_comb begin
    if (cpu_running) begin
      a_en = ca_en; a_we = 1'b0; a_addr = ca_addr; a_wdata = '0;
    end else begin
      a_en = s_en;  a_we = s_we;  a_addr = s_addr;  a_wdata = s_wdata;
    end
  end

  subleq_dpram #(.WORDS(MEM_WORDS), .WIDTH(WORD_W)) u_mem (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en    (cb_en), .b_we (cb_we), .b_addr (cb_addr), .b_wdata (cb_wdata),
    .b_rdata
  );

endmodule
