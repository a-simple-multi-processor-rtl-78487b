// subleq_pkg -- constants and types shared by the Subleq multi-processor array.
//
// The array is a set of independent one-instruction (Subleq) processors, each
// with a private 512 x 32-bit memory, loaded and read back by a host over SPI.
// This package holds the sizes the design is built around, the three values of
// the per-processor Status byte, the SPI command byte layout and the request
// bundle that the access controller broadcasts to every processor's serial
// interface.
//
// Sizes (28 processors, 32-bit words, 512 words = 2048 bytes of memory each,
// 63 processors at most) and the status codes 0xA0/0xA1/0xA2 follow the paper.
// The command byte layout (bit 7 = read, bits 5:0 = processor index) and the
// request bundle are this design's own choices.
package subleq_pkg;

  // Default array size and per-processor memory.
  localparam int unsigned NUM_PROC_DEF  = 28;
  localparam int unsigned WORD_W_DEF    = 32;
  localparam int unsigned MEM_WORDS_DEF = 512;

  // Processor index on the SPI bus: 6 bits, index 0 is the array itself,
  // so at most 63 processors can be addressed.
  localparam int unsigned IDX_W    = 6;
  localparam int unsigned MAX_PROC = (1 << IDX_W) - 1;

  // Status byte, the first byte of the first word read from a processor.
  typedef enum logic [7:0] {
    ST_NEVER_RUN = 8'hA0,  // stopped and not run since power-on
    ST_RUNNING   = 8'hA1,  // running
    ST_STOPPED   = 8'hA2   // stopped
  } status_e;

  // Command byte: first byte of every SPI transaction.
  localparam int unsigned CMD_READ_BIT = 7;

  // Byte-level request from the access controller to the serial interface of
  // a processor. Each field is a single-cycle strobe except wr_byte, which is
  // valid with wr_valid. A processor acts on it only while selected.
  typedef struct packed {
    logic       begin_rd;  // a read transaction opens: byte pointer to 0
    logic       begin_wr;  // a write transaction opens: processor stops
    logic       wr_valid;  // next byte to store is on wr_byte
    logic [7:0] wr_byte;
    logic       rd_req;    // return the next byte of the read stream
    logic       finish;    // the transaction closes (chip select released)
  } ser_req_t;

  // Fixed latency, in clocks, from rd_req to the byte appearing on rd_byte.
  localparam int unsigned RD_LATENCY = 2;

endpackage
