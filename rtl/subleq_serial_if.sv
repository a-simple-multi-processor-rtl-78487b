// subleq_serial_if -- serial access port and Status byte of one processor.
//
// The host sees each processor as a byte stream with an internal pointer that
// restarts at every transaction:
//   write transaction: the processor stops at once; bytes are stored from
//     byte address 0 upward, little-endian within each 32-bit word (a word is
//     written when its fourth byte arrives; bytes past the end of memory are
//     dropped). When the transaction closes, the processor starts at IP = 0.
//   read transaction: byte 0 is the Status byte, bytes 1..3 are zero, then the
//     memory follows from address 0, little-endian; bytes past the end read as
//     zero. Reading only byte 0 leaves the processor running; reading further
//     stops it. The access controller asks for each byte one byte ahead, as
//     soon as the host has clocked the previous one out, so the request for
//     byte 2 is the first sign that the host has read past the Status byte:
//     that request stops the processor, before any memory byte is fetched.
// Status byte: 0xA0 after reset, 0xA1 from start, 0xA2 after the processor
// stops, whether by the host or by its own program.
//
// Interface: the request bundle (subleq_pkg::ser_req_t) is acted on only while
// sel is high. A rd_req is answered on rd_byte with rd_valid exactly
// RD_LATENCY (2) clocks later. The memory port goes to the RAM's port A, which
// the node hands to this block only while the processor is stopped.
//
// From the paper: the status codes, writing starts and reading stops the
// processor, the status word first then memory, and the first status byte read
// without side effect. This design's choices: byte order, zero padding of the
// status word, the processor starting when the write transaction closes, and
// the behaviour past the end of memory.
module subleq_serial_if
  import subleq_pkg::*;
#(
  parameter int unsigned WORD_W    = WORD_W_DEF,
  parameter int unsigned MEM_WORDS = MEM_WORDS_DEF,
  localparam int unsigned AW       = $clog2(MEM_WORDS),
  localparam int unsigned BYTES    = MEM_WORDS * WORD_W / 8,
  localparam int unsigned PW       = $clog2(BYTES + 4) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              sel,
  input  ser_req_t          req,
  output logic              rd_valid,
  output logic [7:0]        rd_byte,
  // processor control
  output logic              cpu_start,
  output logic              cpu_stop,
  input  logic              cpu_running,
  input  logic              cpu_halted,
  output status_e           status,
  // memory port (RAM port A while the processor is stopped)
  output logic              m_en,
  output logic              m_we,
  output logic [AW-1:0]     m_addr,
  output logic [WORD_W-1:0] m_wdata,
  input  logic [WORD_W-1:0] m_rdata
);

  localparam int unsigned BPW = WORD_W / 8;      // bytes per word
  localparam int unsigned BW  = $clog2(BPW);

  logic              writing;                    // write transaction open
  logic [PW-1:0]     ptr;                        // byte pointer
  logic [WORD_W-9:0] wbuf;                       // first bytes of a word
  logic [PW-1:0]     mptr;                       // ptr - 4 (memory byte)
  // read pipeline
  logic              rd_p1;                      // stage 1 valid
  logic [1:0]        rd_src_p1;                  // 0: zero, 1: status, 2: memory
  logic [BW-1:0]     rd_lane_p1;

  assign mptr = ptr - PW'(4);

  // Requests from the host, gated by the select.
  logic begin_rd, begin_wr, wr_valid, rd_req, finish;
  assign begin_rd = sel & req.begin_rd;
  assign begin_wr = sel & req.begin_wr;
  assign wr_valid = sel & req.wr_valid & writing;
  assign rd_req   = sel & req.rd_req & ~writing;
  assign finish   = sel & req.finish;

  // Memory access: a word write on the last byte of a word, or a read of the
  // word that holds the requested memory byte.
  always_comb begin
    m_en    = 1'b0;
    m_we    = 1'b0;
    m_addr  = '0;
    m_wdata = {req.wr_byte, wbuf};
    if (wr_valid && ptr[BW-1:0] == BW'(BPW - 1) && ptr < PW'(BYTES)) begin
      m_en   = 1'b1;
      m_we   = 1'b1;
      m_addr = AW'(ptr >> BW);
    end else if (rd_req && ptr >= PW'(4) && mptr < PW'(BYTES)) begin
      m_en   = 1'b1;
      m_addr = AW'(mptr >> BW);
    end
  end

  // Stop on a write and on any read past the first status byte; start when a
  // write transaction closes.
  assign cpu_stop  = begin_wr | (rd_req && ptr >= PW'(2) && cpu_running);
  assign cpu_start = finish & writing;

  // Every accepted read request is answered exactly RD_LATENCY clocks later.
  a_rd_latency: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req |-> ##(RD_LATENCY) rd_valid)
    else $error("read byte not returned after %0d clocks", RD_LATENCY);
  // The memory is touched only while the processor is stopped.
  a_mem_when_stopped: assert property (@(posedge clk) disable iff (!rst_n)
    m_en |-> !cpu_running)
    else $error("serial access to memory while the processor runs");

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      writing    <= 1'b0;
      ptr        <= '0;
      wbuf       <= '0;
      status     <= ST_NEVER_RUN;
      rd_p1      <= 1'b0;
      rd_src_p1  <= '0;
      rd_lane_p1 <= '0;
      rd_valid   <= 1'b0;
      rd_byte    <= '0;
    end else begin
      // transaction framing and byte pointer
      if (begin_rd || begin_wr) begin
        writing <= begin_wr;
        ptr     <= '0;
      end else if (finish) begin
        writing <= 1'b0;
      end else if (wr_valid || rd_req) begin
        if (ptr != '1) ptr <= ptr + 1'b1;
      end
      if (wr_valid && ptr[BW-1:0] != BW'(BPW - 1))
        wbuf[ptr[BW-1:0]*8 +: 8] <= req.wr_byte;

      // status byte
      if (cpu_start)                                   status <= ST_RUNNING;
      else if (cpu_halted || (cpu_stop && status == ST_RUNNING))
                                                       status <= ST_STOPPED;

      // read pipeline: stage 1 waits for the RAM, stage 2 drives the byte
      rd_p1      <= rd_req;
      rd_lane_p1 <= mptr[BW-1:0];
      if (ptr == '0)                                   rd_src_p1 <= 2'd1;
      else if (ptr >= PW'(4) && mptr < PW'(BYTES))     rd_src_p1 <= 2'd2;
      else                                             rd_src_p1 <= 2'd0;
      rd_valid <= rd_p1;
      if (rd_p1) begin
        unique case (rd_src_p1)
          2'd1:    rd_byte <= status;
          2'd2:    rd_byte <= m_rdata[rd_lane_p1*8 +: 8];
          default: rd_byte <= 8'h00;
        endcase
      end
    end
  end

endmodule
