// subleq_spi_ctrl -- access controller: maps SPI transactions onto the table
// (processor index, memory byte address).
//
// Every transaction starts with a command byte: bit 7 set for a read, clear
// for a write; bits 5:0 the processor index. Index 0 is the array itself: a
// read returns the number of processors in its first byte and zeros after;
// writes to it are ignored. Indices 1..NUM_PROC select a processor, whose
// serial interface then sees the byte stream: in a write, each further byte
// received is forwarded with wr_valid; in a read, the controller asks for the
// first byte as soon as the command byte is in, and for byte n+1 as soon as
// the host has clocked byte n out, and hands each returned byte to the SPI
// slave to be shifted out next. Indices above NUM_PROC read as zero. Releasing
// the chip select sends finish to the selected processor.
//
// Timing: requests leave this block one clock after the SPI byte event;
// the answer arrives RD_LATENCY clocks later and is held in tx_byte, well
// before the SPI slave samples it (that takes at least 8 clocks at the
// slowest allowed sclk of clk/16).
//
// From the paper: the two-number address table, index 0 returning the number
// of processors, the 63-processor limit set by the bus addressing. The command
// byte format and the look-ahead of one byte are this design's choices.
module subleq_spi_ctrl
  import subleq_pkg::*;
#(
  parameter int unsigned NUM_PROC = NUM_PROC_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // from / to the SPI slave
  input  logic                    cs_start,
  input  logic                    cs_end,
  input  logic                    rx_valid,
  input  logic [7:0]              rx_byte,
  output logic [7:0]              tx_byte,
  // to / from the processor nodes
  output ser_req_t                req,
  output logic [NUM_PROC-1:0]     sel,
  input  logic [NUM_PROC-1:0]     node_rd_valid,
  input  logic [NUM_PROC-1:0][7:0] node_rd_byte
);

  typedef enum logic [1:0] {P_IDLE, P_CMD, P_READ, P_WRITE} phase_e;

  phase_e           phase;
  logic [IDX_W-1:0] idx;
  logic             rd_pending;    // ask the node for a byte next clock
  logic             rd_ok;         // a valid processor is selected
  logic [7:0]       node_byte;
  logic             node_valid;

  initial assert (NUM_PROC >= 1 && NUM_PROC <= MAX_PROC)
    else $error("NUM_PROC must be 1..%0d", MAX_PROC);

  // Read data from the selected processor.
  always_comb begin
    node_byte  = '0;
    node_valid = 1'b0;
    for (int i = 0; i < NUM_PROC; i++) begin
      if (sel[i]) begin
        node_byte  = node_rd_byte[i];
        node_valid = node_rd_valid[i];
      end
    end
  end

  // At most one processor is selected at any time.
  a_sel_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sel))
    else $error("several processors selected: %b", sel);

  assign rd_ok = (idx != '0) && (idx <= IDX_W'(NUM_PROC));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase      <= P_IDLE;
      idx        <= '0;
      rd_pending <= 1'b0;
      sel        <= '0;
      req        <= '0;
      tx_byte    <= '0;
    end else begin
      req        <= '0;
      rd_pending <= 1'b0;
      // the first read request follows begin_rd by one clock
      if (rd_pending) req.rd_req <= 1'b1;
      if (node_valid) tx_byte <= node_byte;

      if (cs_start) begin
        phase   <= P_CMD;
        tx_byte <= '0;
      end else if (cs_end) begin
        phase      <= P_IDLE;
        req.finish <= (phase == P_READ || phase == P_WRITE) && rd_ok;
        tx_byte    <= '0;
      end else if (rx_valid) begin
        unique case (phase)
          P_CMD: begin
            idx <= rx_byte[IDX_W-1:0];
            for (int i = 0; i < NUM_PROC; i++)
              sel[i] <= (rx_byte[IDX_W-1:0] == IDX_W'(i + 1));
            if (rx_byte[CMD_READ_BIT]) begin
              phase        <= P_READ;
              req.begin_rd <= 1'b1;
              rd_pending   <= 1'b1;
              // index 0 answers with the processor count itself
              tx_byte      <= (rx_byte[IDX_W-1:0] == '0) ? 8'(NUM_PROC) : 8'h00;
            end else begin
              phase        <= P_WRITE;
              req.begin_wr <= 1'b1;
            end
          end
          P_READ: begin
            if (rd_ok) req.rd_req <= 1'b1;
            else       tx_byte    <= '0;
          end
          P_WRITE: begin
            req.wr_valid <= 1'b1;
            req.wr_byte  <= rx_byte;
          end
          default: ;
        endcase
      end
      // release the select once the finish strobe is out
      if (phase == P_IDLE && !req.finish) sel <= '0;
    end
  end

endmodule
