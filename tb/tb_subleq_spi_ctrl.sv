// tb_subleq_spi_ctrl -- self-checking testbench of the access controller.
//
// The SPI slave is replaced by strobes driven from the testbench, and the 28
// processors by responders that answer each rd_req, two clocks later, with
// the byte {index[3:0], count[3:0]}. Checked: a read of index 0 returns 28
// then zeros; a write to index k selects processor k alone, sends begin_wr,
// one wr_valid per byte with that byte, and finish when the chip select is
// released; a read of index k sends begin_rd, then rd_req at once and after
// every byte, and the returned byte reaches tx_byte within 6 clocks of the
// byte event; an index above 28 selects nothing and reads zeros.
module tb_subleq_spi_ctrl;
  import subleq_pkg::*;

  localparam int unsigned NP = 28;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cs_start, cs_end, rx_valid;
  logic [7:0] rx_byte, tx_byte;
  ser_req_t req;
  logic [NP-1:0] sel, node_rd_valid;
  logic [NP-1:0][7:0] node_rd_byte;

  subleq_spi_ctrl dut (.*);

  int checks = 0, failures = 0;
  int n_begin_wr = 0, n_begin_rd = 0, n_wr = 0, n_rd = 0, n_finish = 0;
  logic [7:0] wr_seen[$];
  logic [NP-1:0] sel_seen;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // responders and request monitor
  logic [NP-1:0] p1, p2;
  logic [3:0] cnt [NP];
  always_ff @(posedge clk) begin
    p1 <= '0;
    for (int i = 0; i < NP; i++) begin
      if (sel[i] && req.begin_rd) cnt[i] <= 0;
      if (sel[i] && req.rd_req) begin p1[i] <= 1; cnt[i] <= cnt[i] + 1; end
      if (p1[i]) node_rd_byte[i] <= {4'(i + 1), cnt[i] - 4'd1};
    end
    p2 <= p1;
  end
  assign node_rd_valid = p2;

  always @(posedge clk) if (rst_n) begin
    if (req.begin_wr) begin n_begin_wr++; sel_seen = sel; end
    if (req.begin_rd) begin n_begin_rd++; sel_seen = sel; end
    if (req.wr_valid) begin n_wr++; wr_seen.push_back(req.wr_byte); end
    if (req.rd_req)   n_rd++;
    if (req.finish)   begin n_finish++; check(sel == sel_seen, "select held for finish"); end
  end

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic byte_in(logic [7:0] b);
    @(negedge clk); rx_byte = b; rx_valid = 1; @(negedge clk); rx_valid = 0;
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cs_start = 0; cs_end = 0; rx_valid = 0; rx_byte = 0;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // index 0: number of processors
    pulse(cs_start);
    byte_in(8'h80);
    repeat (6) @(negedge clk);
    check(tx_byte == 8'(NP), "index 0 reads the processor count");
    byte_in(8'h00);
    repeat (6) @(negedge clk);
    check(tx_byte == 8'h00, "index 0 second byte is zero");
    check(sel == '0, "index 0 selects no processor");
    pulse(cs_end);
    repeat (3) @(negedge clk);
    check(n_finish == 0, "no finish for index 0");

    // writes and reads to every processor
    for (int k = 1; k <= NP; k++) begin
      automatic int nb = $urandom_range(1, 9);
      automatic logic [7:0] bytes[$];
      wr_seen = {};
      n_wr = 0; n_rd = 0;
      pulse(cs_start);
      byte_in(8'(k));
      repeat (2) @(negedge clk);
      check(sel_seen == (NP'(1) << (k - 1)), $sformatf("write selects processor %0d only", k));
      for (int i = 0; i < nb; i++) begin bytes.push_back(8'($urandom)); byte_in(bytes[i]); end
      pulse(cs_end);
      repeat (3) @(negedge clk);
      check(wr_seen == bytes, $sformatf("bytes forwarded to processor %0d", k));
      check(n_finish == 2 * k - 1, "finish after write");
      check(sel == '0, "select released after transaction");

      pulse(cs_start);
      byte_in(8'h80 | 8'(k));
      repeat (6) @(negedge clk);
      check(sel_seen == (NP'(1) << (k - 1)), $sformatf("read selects processor %0d only", k));
      check(tx_byte == {4'(k), 4'd0}, $sformatf("processor %0d byte 0 ready", k));
      for (int i = 1; i < 4; i++) begin
        byte_in(8'h00);
        repeat (5) @(negedge clk);
        check(tx_byte == {4'(k), 4'(i)}, $sformatf("processor %0d byte %0d ready", k, i));
      end
      check(n_rd == 4, "one request per byte");
      pulse(cs_end);
      repeat (3) @(negedge clk);
    end
    check(n_begin_wr == NP && n_begin_rd == NP + 1, "begin strobes");

    // index beyond the array
    n_finish = 0;
    pulse(cs_start);
    byte_in(8'h80 | 8'(NP + 1));
    repeat (6) @(negedge clk);
    check(sel == '0 && tx_byte == 0, "index above the array selects nothing");
    byte_in(8'h00);
    repeat (6) @(negedge clk);
    check(tx_byte == 0, "and reads zero");
    pulse(cs_end);
    repeat (3) @(negedge clk);
    check(n_finish == 0, "no finish for an absent processor");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
