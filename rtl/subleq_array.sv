// subleq_array -- the multi-processor Subleq computer: everything on the chip.
//
// NUM_PROC independent Subleq processors (28 by default), each with a private
// 512-word x 32-bit memory, share one clock and one SPI port. The host, via a
// USB-to-SPI bridge outside the chip, loads a program and data into any
// processor with a write transaction (which starts it), polls its Status
// byte, and reads its memory back (which stops it). The processors never
// talk to each other: a parallel job is split by the host, one range of work
// per processor, and the partial results are combined on the host.
//
//   SPI pins -> subleq_spi_slave -> subleq_spi_ctrl -> request bundle + select
//            -> subleq_node[0..NUM_PROC-1] (processor + memory + serial port)
//
// Interface: clk is the single system clock (150 MHz in the original, made
// by an FPGA PLL outside this module); rst_n is a synchronous active-low
// reset; spi_* are the SPI pins, mode 0, sclk at most clk/16. status gives
// each processor's Status byte for observation (processor index i+1 is
// element i); with only the three values 0xA0/0xA1/0xA2, six of each
// processor's eight status bits are constant.
//
// The structure follows the paper's board diagram (SPI block fanning out to
// processor/memory pairs). The reset, the status output and the SPI framing
// are this design's choices.
module subleq_array
  import subleq_pkg::*;
#(
  parameter int unsigned NUM_PROC  = NUM_PROC_DEF,
  parameter int unsigned WORD_W    = WORD_W_DEF,
  parameter int unsigned MEM_WORDS = MEM_WORDS_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      spi_sclk,
  input  logic                      spi_cs_n,
  input  logic                      spi_mosi,
  output logic                      spi_miso,
  output logic [NUM_PROC-1:0][7:0]  status
);

  logic                      cs_start, cs_end, rx_valid;
  logic [7:0]                rx_byte, tx_byte;
  ser_req_t                  req;
  logic [NUM_PROC-1:0]       sel, node_rd_valid;
  logic [NUM_PROC-1:0][7:0]  node_rd_byte;

  subleq_spi_slave u_spi (
    .clk, .rst_n,
    .sclk (spi_sclk), .cs_n (spi_cs_n), .mosi (spi_mosi), .miso (spi_miso),
    .cs_start, .cs_end, .rx_valid, .rx_byte, .tx_byte
  );

  subleq_spi_ctrl #(.NUM_PROC(NUM_PROC)) u_ctrl (
    .clk, .rst_n,
    .cs_start, .cs_end, .rx_valid, .rx_byte, .tx_byte,
    .req, .sel, .node_rd_valid, .node_rd_byte
  );

  for (genvar i = 0; i < NUM_PROC; i++) begin : g_node
    status_e st;
    subleq_node #(.WORD_W(WORD_W), .MEM_WORDS(MEM_WORDS)) u_node (
      .clk, .rst_n,
      .sel      (sel[i]),
      .req,
      .rd_valid (node_rd_valid[i]),
      .rd_byte  (node_rd_byte[i]),
      .status   (st)
    );
    assign status[i] = st;
  end

endmodule
