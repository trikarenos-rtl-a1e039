// Testbench for mem_scrubber on its own. A 32-word memory model here holds a
// "bad" flag per word; the decoder result the scrubber sees is the flag of
// the word it read in the previous cycle. Checks: reads only on free cycles,
// addresses visited in order and wrapping, every bad word repaired by a write
// to the right address, a write-back that meets a busy bank is dropped
// (deferred) and the same address read again, disabling stops it.
module tb_mem_scrubber;
  localparam int Words = 32;
  logic clk = 0, rst_n = 0, en = 0, busy = 0;
  logic req, we, rd_valid, fix, err;
  logic [4:0]  addr;
  logic [38:0] wdata, code;
  logic bad [Words];
  logic [4:0] last_rd;
  int checks = 0, failures = 0, n_fix = 0, n_defer = 0, n_reads = 0;

  mem_scrubber #(.Words(Words)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .busy_i(busy), .err_i(err), .code_i(code),
    .req_o(req), .we_o(we), .addr_o(addr), .wdata_o(wdata), .rd_valid_o(rd_valid), .fix_o(fix));

  always #5 clk = ~clk;

  assign err  = rd_valid && bad[last_rd];
  assign code = {7'h55, 27'd0, last_rd};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [4:0] expect_next = 0;
  always @(posedge clk) if (rst_n) begin
    if (req) check(!busy, "no SRAM access on a busy cycle");
    if (req && !we) begin
      check(addr == expect_next, $sformatf("read address %0d, expected %0d", addr, expect_next));
      last_rd <= addr;
      n_reads++;
    end
    if (rd_valid && bad[last_rd] && busy) n_defer++;
    if (rd_valid && !(bad[last_rd] && busy)) expect_next <= last_rd + 1;
    if (req && we) begin
      check(fix && addr == last_rd && wdata == code, "write-back of the corrected word");
      bad[addr] <= 1'b0;
      n_fix++;
    end
  end

  initial begin
    int n_before;
    for (int i = 0; i < Words; i++) bad[i] = (i % 5 == 2);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;
    for (int t = 0; t < 40 * Words; t++) begin
      @(negedge clk);
      busy = ($urandom_range(3) == 0);
    end
    busy = 0;
    repeat (4 * Words) @(negedge clk);
    check(n_fix == 6, $sformatf("all 6 bad words repaired (%0d)", n_fix));
    check(n_defer >= 1, $sformatf("write-backs deferred (%0d)", n_defer));
    for (int i = 0; i < Words; i++) check(!bad[i], "memory clean");
    en = 0;
    repeat (3) @(negedge clk);
    n_before = n_reads;
    repeat (20) @(negedge clk);
    check(n_reads == n_before, "disabled scrubber is silent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
