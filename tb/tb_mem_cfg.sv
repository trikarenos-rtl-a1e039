// Testbench for mem_cfg: per-bank write-disable masks (low and high words)
// appear on the right bank's output and read back, scrubbing is enabled in
// every bank after reset and can be switched per bank.
module tb_mem_cfg;
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
  logic [38:0] dis [8];
  logic [7:0] sen;
  mem_cfg dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr),
               .wr_dis_o(dis), .scrub_en_o(sen));
  initial begin
    logic [31:0] q;
    logic [38:0] refm [8];
    rq = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(sen == 8'hFF, "scrubbing on after reset");
    for (int b = 0; b < 8; b++) check(dis[b] == '0, "no bit disabled after reset");
    for (int b = 0; b < 8; b++) begin
      refm[b] = {7'($urandom), 32'($urandom)};
      wr(32'(8 * b), refm[b][31:0]);
      wr(32'(8 * b + 4), 32'(refm[b][38:32]));
    end
    for (int b = 0; b < 8; b++) begin
      check(dis[b] == refm[b], $sformatf("bank %0d mask", b));
      rd(32'(8 * b), q); check(q == refm[b][31:0], "low word reads back");
      rd(32'(8 * b + 4), q); check(q[6:0] == refm[b][38:32], "high word reads back");
    end
    wr(32'h40, 32'h0000_00A5);
    check(sen == 8'hA5, "scrub enables");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
