// Testbench for qspi: a device model on the pins. Transmit: it takes the data
// lines at every rising SCK edge and rebuilds bytes (high nibble first), which
// must equal the bytes handed over, with CSn low throughout and SCK never
// running while CSn is high. Receive: the device puts the next nibble on the
// lines after every falling SCK edge; the bytes delivered must be its byte
// stream in order, while rx_ready_i is pulled low at random to pause SCK.
module tb_qspi;
  logic clk = 0, rst_n = 0;
  logic cs = 0, tx_valid = 0, tx_ready, rx_en = 0, rx_ready = 1, rx_valid;
  logic [7:0] tx_data, rx_data;
  logic sck, csn, sck_d = 0;
  logic [3:0] sd_o, sd_oe, sd_i;
  int checks = 0, failures = 0;
  byte unsigned sent [$], seen [$], dev [$], got [$];
  logic [3:0] nib [$];
  int dev_pos = 0;
  always #5 clk = ~clk;

  qspi dut (.clk_i(clk), .rst_ni(rst_n), .cs_i(cs), .tx_valid_i(tx_valid), .tx_data_i(tx_data),
            .tx_ready_o(tx_ready), .rx_en_i(rx_en), .rx_ready_i(rx_ready), .rx_valid_o(rx_valid),
            .rx_data_o(rx_data), .sck_o(sck), .csn_o(csn), .sd_o(sd_o), .sd_oe_o(sd_oe), .sd_i(sd_i));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // device: sample on rising SCK, shift its own data out on falling SCK
  always @(posedge clk) begin
    sck_d <= sck;
    if (sck) begin
      check(!csn, "SCK only runs while CSn is low");
      if (sd_oe == 4'hF) begin
        nib.push_back(sd_o);
        if (nib.size() == 2) begin
          seen.push_back({nib[0], nib[1]});
          nib.delete();
        end
      end
    end
  end
  always @(negedge sck) dev_pos++;
  assign sd_i = (dev_pos / 2 < dev.size()) ? ((dev_pos % 2 == 0) ? dev[dev_pos / 2][7:4]
                                                                 : dev[dev_pos / 2][3:0]) : 4'h0;
  always @(posedge clk) if (rx_valid) got.push_back(rx_data);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(csn, "CSn high when idle");
    cs = 1;
    for (int n = 0; n < 50; n++) begin
      byte unsigned b;
      b = 8'($urandom);
      @(negedge clk);
      tx_valid = 1; tx_data = b;
      do @(posedge clk); while (!tx_ready);
      sent.push_back(b);
      @(negedge clk); tx_valid = 0;
      if (n % 7 == 0) repeat ($urandom_range(6)) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    check(!csn, "CSn low while selected");
    check(seen.size() == sent.size(), $sformatf("bytes on the lines: %0d of %0d", seen.size(), sent.size()));
    foreach (sent[i]) if (i < seen.size()) check(seen[i] == sent[i], $sformatf("tx byte %0d", i));
    // receive
    for (int n = 0; n < 60; n++) dev.push_back(8'($urandom));
    dev_pos = 0;
    @(negedge clk); rx_en = 1;
    while (got.size() < 60) begin
      @(negedge clk);
      rx_ready = ($urandom_range(3) != 0);
    end
    @(negedge clk); rx_en = 0; rx_ready = 1;
    foreach (dev[i]) check(got[i] == dev[i], $sformatf("rx byte %0d: %h vs %h", i, got[i], dev[i]));
    repeat (6) @(posedge clk);
    @(negedge clk); cs = 0;
    repeat (2) @(posedge clk);
    check(csn, "CSn released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
