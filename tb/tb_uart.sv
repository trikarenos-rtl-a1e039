// Testbench for uart: the transmitter's line is decoded here by sampling the
// middle of each bit time (start bit, eight bits LSB first, stop bit) and
// compared with the bytes handed over; frames driven onto rx_i with the same
// bit time must come out of the receiver unchanged, one rx_valid_o pulse per
// byte; a short low glitch must not produce a byte. Bit time 8 cycles.
module tb_uart;
  localparam int Div = 7;
  logic clk = 0, rst_n = 0;
  logic tx_valid = 0, tx_ready, tx, rx = 1, rx_valid;
  logic [7:0] tx_data, rx_data;
  int checks = 0, failures = 0;
  byte unsigned sent [$], heard [$], got [$], rx_expect [$];
  always #5 clk = ~clk;

  uart dut (.clk_i(clk), .rst_ni(rst_n), .div_i(16'(Div)), .tx_valid_i(tx_valid),
            .tx_data_i(tx_data), .tx_ready_o(tx_ready), .tx_o(tx), .rx_i(rx),
            .rx_valid_o(rx_valid), .rx_data_o(rx_data));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // line decoder for tx
  initial begin
    forever begin
      byte unsigned b;
      @(negedge tx);
      repeat ((Div + 1) / 2) @(posedge clk);
      check(tx == 0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (Div + 1) @(posedge clk);
        b[i] = tx;
      end
      repeat (Div + 1) @(posedge clk);
      check(tx == 1, "stop bit");
      heard.push_back(b);
    end
  end

  always @(posedge clk) if (rx_valid) got.push_back(rx_data);

  task automatic send_frame(input byte unsigned b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (Div + 1) @(posedge clk);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int n = 0; n < 40; n++) begin
        byte unsigned b;
        b = (n == 0) ? 8'h00 : (n == 1) ? 8'hFF : 8'($urandom);
        @(negedge clk);
        tx_valid = 1; tx_data = b;
        do @(posedge clk); while (!tx_ready);
        sent.push_back(b);
        @(negedge clk); tx_valid = 0;
        repeat ($urandom_range(3)) @(posedge clk);
      end
      begin
        // a glitch shorter than half a bit is not a start bit
        rx = 0; repeat (2) @(posedge clk); rx = 1;
        repeat (30) @(posedge clk);
        for (int n = 0; n < 40; n++) begin
          byte unsigned b;
          b = 8'($urandom);
          send_frame(b);
          rx_expect.push_back(b);
          repeat ($urandom_range(4)) @(posedge clk);
        end
      end
    join
    repeat (20 * (Div + 1)) @(posedge clk);
    check(heard.size() == sent.size(), $sformatf("frames on tx: %0d of %0d", heard.size(), sent.size()));
    foreach (sent[i]) if (i < heard.size()) check(heard[i] == sent[i], $sformatf("tx byte %0d", i));
    check(got.size() == rx_expect.size(), $sformatf("bytes received: %0d of %0d", got.size(), rx_expect.size()));
    foreach (rx_expect[i]) if (i < got.size()) check(got[i] == rx_expect[i], $sformatf("rx byte %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
