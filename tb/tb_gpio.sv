// Testbench for gpio: direction and output registers reach the pins, pin
// levels come back through the two-flop synchroniser (two cycles late),
// rising edges on enabled pins set IRQ_STATUS and irq_o, write-1-to-clear.
module tb_gpio;
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
  logic [31:0] gin = '0, gout, goe;
  logic irq;
  gpio dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr),
            .gpio_in_i(gin), .gpio_out_o(gout), .gpio_oe_o(goe), .irq_o(irq));
  initial begin
    logic [31:0] q, v;
    rq = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      v = $urandom;
      wr(32'h0, v); wr(32'h4, ~v);
      check(goe == v && gout == ~v, "DIR and OUT drive the pins");
      rd(32'h0, q); check(q == v, "DIR reads back");
      rd(32'h4, q); check(q == ~v, "OUT reads back");
      @(negedge clk); gin = $urandom; v = gin;
      repeat (2) @(posedge clk);
      rd(32'h8, q); check(q == v, "IN after the synchroniser");
    end
    gin = '0;
    wr(32'hC, 32'h0000_0005);
    repeat (4) @(posedge clk);
    check(!irq, "no interrupt without an edge");
    @(negedge clk); gin = 32'h0000_0006;   // edge on pin 1 (disabled) and 2 (enabled)
    repeat (4) @(posedge clk);
    rd(32'h10, q); check(q == 32'h4 && irq, "enabled rising edge captured");
    wr(32'h10, 32'h4);
    @(posedge clk);
    check(!irq, "write 1 clears the interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
