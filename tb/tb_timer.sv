// Testbench for timer: with CMP = c the interrupt pulses every c+1 cycles
// (period measured over several ticks), COUNT reads and writes, disabling
// stops the count.
module tb_timer;
  import trikarenos_pkg::*;
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq;
  tcdm_rsp_t rr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic reg_access(input bit we, input logic [31:0] off, input logic [31:0] d,
                            output logic [31:0] q);
    @(negedge clk);
    rq = '{req: 1'b1, we: we, be: 4'hF, addr: off, wdata: d};
    @(posedge clk); #1;
    rq.req = 0;
    check(rr.rvalid, "register response one cycle after the request");
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic irq;
  timer dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr), .irq_o(irq));
  int last = -1, nirq = 0, cyc = 0;
  int periods [$];
  always @(posedge clk) begin
    cyc++;
    if (irq) begin
      if (last >= 0) periods.push_back(cyc - last);
      last = cyc;
      nirq++;
    end
  end
  initial begin
    logic [31:0] q, q2;
    rq = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(32'h8, 32'd9);
    wr(32'h0, 32'd1);
    repeat (60) @(posedge clk);
    check(nirq >= 5, $sformatf("ticks seen: %0d", nirq));
    foreach (periods[i]) check(periods[i] == 10, $sformatf("period %0d", periods[i]));
    wr(32'h0, 32'd0);
    rd(32'h4, q);
    repeat (5) @(posedge clk);
    rd(32'h4, q2);
    check(q == q2, "disabled timer holds");
    wr(32'h4, 32'd1234);
    rd(32'h4, q);
    check(q == 1234, "COUNT written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
