// Testbench for err_monitor: random event pulses on 25 sources, each counter
// compared with a count kept here, clear on write, the selectable output
// follows the chosen source.
module tb_err_monitor;
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
  localparam int NS = 25;
  logic [NS-1:0] ev = '0;
  logic err;
  int cnt [NS];
  err_monitor #(.NumSrc(NS)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr),
                                  .event_i(ev), .err_o(err));
  initial begin
    logic [31:0] q;
    rq = '0;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      ev = NS'({$urandom, $urandom});
      for (int i = 0; i < NS; i++) cnt[i] += ev[i];
    end
    @(negedge clk); ev = '0;
    for (int i = 0; i < NS; i++) begin
      rd(32'(4 * i), q);
      check(q == cnt[i], $sformatf("counter %0d: %0d vs %0d", i, q, cnt[i]));
    end
    wr(32'(4 * 3), 0);
    rd(32'(4 * 3), q); check(q == 0, "counter cleared");
    wr(32'h100, 32'd17);
    rd(32'h100, q); check(q == 17, "select reads back");
    @(negedge clk); ev = NS'(1) << 17; #1; check(err, "selected source drives err_o");
    ev = NS'(1) << 16; #1; check(!err, "other sources do not");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
