// Testbench for udma: the two bus ports are served by a word memory modelled
// here that withholds its grant at random and answers one cycle later. UART:
// the transmit pin is looped back to the receive pin, the TX channel sends
// bytes from an unaligned address while the RX channel stores what comes
// back; the copy must match byte for byte and leave the neighbouring bytes
// alone, with one done pulse per channel. Quad-SPI: a device model collects
// the transmitted bytes and then streams its own bytes in. Register readback
// and the busy bits are checked as well.
module tb_udma;
  import trikarenos_pkg::*;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq, rxq, txq;
  tcdm_rsp_t rr, rxs, txs;
  logic rx_done, tx_done, utx, sck, csn;
  logic [3:0] sdo, sdoe, sdi;
  int checks = 0, failures = 0;
  int n_rx_done = 0, n_tx_done = 0;
  logic [31:0] mem [256];
  always #5 clk = ~clk;

  udma dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr),
            .rx_req_o(rxq), .rx_rsp_i(rxs), .tx_req_o(txq), .tx_rsp_i(txs),
            .rx_done_o(rx_done), .tx_done_o(tx_done), .uart_tx_o(utx), .uart_rx_i(utx),
            .qspi_sck_o(sck), .qspi_csn_o(csn), .qspi_sd_o(sdo), .qspi_sd_oe_o(sdoe),
            .qspi_sd_i(sdi));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // memory model for both ports
  logic g_rx, g_tx, v_rx = 0, v_tx = 0;
  logic [31:0] d_tx;
  always @(negedge clk) begin
    g_rx = ($urandom_range(2) != 0);
    g_tx = ($urandom_range(2) != 0);
  end
  always_comb begin
    rxs = '{gnt: g_rx, rvalid: v_rx, rdata: '0};
    txs = '{gnt: g_tx, rvalid: v_tx, rdata: v_tx ? d_tx : '0};
  end
  always @(posedge clk) begin
    v_rx <= rxq.req && g_rx;
    v_tx <= txq.req && g_tx;
    if (rxq.req && g_rx && rxq.we)
      for (int b = 0; b < 4; b++) if (rxq.be[b]) mem[rxq.addr[9:2]][8*b +: 8] <= rxq.wdata[8*b +: 8];
    if (txq.req && g_tx) d_tx <= mem[txq.addr[9:2]];
    if (rst_n && rx_done) n_rx_done++;
    if (rst_n && tx_done) n_tx_done++;
  end
  function automatic byte unsigned mbyte(input int a);
    return mem[a / 4][8 * (a % 4) +: 8];
  endfunction

  // Quad-SPI device
  byte unsigned seen [$], dev [$];
  logic [3:0] nib [$];
  int dev_pos = 0;
  always @(posedge clk) if (sck && sdoe == 4'hF) begin
    nib.push_back(sdo);
    if (nib.size() == 2) begin
      seen.push_back({nib[0], nib[1]});
      nib.delete();
    end
  end
  always @(negedge sck) if (sdoe == 4'h0) dev_pos++;
  assign sdi = (dev_pos / 2 < dev.size()) ? ((dev_pos % 2 == 0) ? dev[dev_pos / 2][7:4]
                                                               : dev[dev_pos / 2][3:0]) : 4'h0;

  task automatic reg_access(input bit we, input logic [31:0] off, input logic [31:0] d,
                            output logic [31:0] q);
    @(negedge clk);
    rq = '{req: 1'b1, we: we, be: 4'hF, addr: off, wdata: d};
    @(posedge clk); #1;
    rq.req = 0;
    q = rr.rdata;
  endtask
  task automatic wr(input logic [31:0] off, input logic [31:0] d);
    logic [31:0] q;
    reg_access(1, off, d, q);
  endtask
  task automatic rd(input logic [31:0] off, output logic [31:0] q);
    reg_access(0, off, 0, q);
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] q;
    int t;
    rq = '0;
    foreach (mem[i]) mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(32'h20, q); check(q == 15, "UART divider reset value");
    wr(32'h20, 3);
    wr(32'h00, 32'h203); wr(32'h04, 21); wr(32'h08, 32'h1);
    wr(32'h10, 32'h001); wr(32'h14, 21); wr(32'h18, 32'h1);
    rd(32'h00, q); check(q == 32'h203, "RX_ADDR reads back");
    rd(32'h18, q); check(q == 32'h1, "TX busy");
    t = 0;
    while (n_rx_done == 0 && t < 20000) begin @(posedge clk); t++; end
    repeat (2) @(posedge clk);
    check(n_tx_done == 1 && n_rx_done == 1, $sformatf("one done pulse per channel: %0d %0d", n_tx_done, n_rx_done));
    for (int i = 0; i < 21; i++)
      check(mbyte(32'h203 + i) == mbyte(1 + i), $sformatf("UART copy byte %0d", i));
    check(mbyte(32'h202) == mem[32'h200 / 4][23:16], "byte below untouched");
    rd(32'h08, q); check(q == 32'h0, "RX idle again");
    // Quad-SPI transmit
    wr(32'h10, 32'h40); wr(32'h14, 9); wr(32'h18, 32'h3);
    t = 0;
    while (n_tx_done < 2 && t < 5000) begin @(posedge clk); t++; end
    repeat (8) @(posedge clk);
    check(seen.size() == 9, $sformatf("QSPI bytes sent: %0d", seen.size()));
    foreach (seen[i]) check(seen[i] == mbyte(32'h40 + i), $sformatf("QSPI tx byte %0d", i));
    check(csn, "CSn released after the transfer");
    // Quad-SPI receive
    for (int i = 0; i < 13; i++) dev.push_back(8'($urandom));
    dev_pos = 0;
    wr(32'h00, 32'h301); wr(32'h04, 13); wr(32'h08, 32'h3);
    t = 0;
    while (n_rx_done < 2 && t < 5000) begin @(posedge clk); t++; end
    repeat (4) @(posedge clk);
    foreach (dev[i]) check(mbyte(32'h301 + i) == dev[i], $sformatf("QSPI rx byte %0d", i));
    check(n_rx_done == 2 && n_tx_done == 2, "done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
