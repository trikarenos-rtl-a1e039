// Testbench for sram_bank: random masked writes and reads against a reference
// array kept here; read data must appear exactly one cycle after the read.
module tb_sram_bank;
  localparam int Words = 64;
  logic clk = 0, req = 0, we = 0;
  logic [5:0]  addr = '0;
  logic [38:0] wdata = '0, bmask = '0, rdata;
  logic [38:0] ref_mem [Words];
  int checks = 0, failures = 0;

  sram_bank #(.Words(Words)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
                                 .wdata_i(wdata), .bmask_i(bmask), .rdata_o(rdata));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    // initialise every word with a full write
    for (int i = 0; i < Words; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 6'(i); bmask = '1;
      wdata = {7'($urandom), 32'($urandom)};
      ref_mem[i] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      req = 1; addr = 6'($urandom_range(Words - 1));
      we = $urandom_range(1);
      if (we) begin
        wdata = {7'($urandom), 32'($urandom)};
        bmask = {7'($urandom), 32'($urandom)};
        ref_mem[addr] = (ref_mem[addr] & ~bmask) | (wdata & bmask);
      end else begin
        logic [38:0] expv;
        expv = ref_mem[addr];
        @(negedge clk);
        check(rdata == expv, $sformatf("read %0d: %h vs %h", addr, rdata, expv));
        req = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
