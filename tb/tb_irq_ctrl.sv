// Testbench for irq_ctrl: events set pending bits, the per-core masks decide
// which core sees the interrupt, CLEAR and SET work, a masked source raises
// nothing.
module tb_irq_ctrl;
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
  logic [7:0] src = '0;
  logic [2:0] irq;
  irq_ctrl #(.NumIrq(8)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr),
                              .irq_i(src), .irq_o(irq));
  initial begin
    logic [31:0] q;
    rq = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); src = 8'h12; @(negedge clk); src = '0;
    rd(32'h4, q); check(q == 32'h12, "events pending");
    check(irq == 3'b000, "masked: no interrupt");
    wr(32'h0, 32'h02);
    check(irq == 3'b111, "common mask enables all cores");
    wr(32'h14, 32'h00);                 // core 1 masks everything
    check(irq == 3'b101, "per-core mask");
    wr(32'h8, 32'h02);
    rd(32'h4, q); check(q == 32'h10 && irq == 3'b000, "CLEAR");
    wr(32'hC, 32'h80);
    rd(32'h4, q); check(q == 32'h90, "SET");
    wr(32'h18, 32'h80);
    check(irq == 3'b100, "core 2 sees the software interrupt");
    rd(32'h18, q); check(q == 32'h80, "mask reads back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
