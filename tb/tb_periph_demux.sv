// Testbench for periph_demux: requests to each register slot reach only that
// slot (slot models here answer with their number), boot ROM addresses reach
// the ROM port, whose grant is passed back, and unmapped addresses are
// answered with zero by the decoder itself.
module tb_periph_demux;
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
  tcdm_req_t sreq [8], romq;
  tcdm_rsp_t srsp [8], roms;
  logic rom_gnt = 1;
  logic rom_rv = 0;
  logic srv [8];
  periph_demux dut (.clk_i(clk), .rst_ni(rst_n), .req_i(rq), .rsp_o(rr),
                    .slot_req_o(sreq), .slot_rsp_i(srsp), .rom_req_o(romq), .rom_rsp_i(roms));
  always @(posedge clk) begin
    for (int s = 0; s < 8; s++) srv[s] <= sreq[s].req;
    rom_rv <= romq.req && rom_gnt;
  end
  always_comb begin
    for (int s = 0; s < 8; s++) srsp[s] = '{gnt: 1'b1, rvalid: srv[s], rdata: srv[s] ? 32'(100 + s) : '0};
    roms = '{gnt: rom_gnt, rvalid: rom_rv, rdata: rom_rv ? 32'hB007 : '0};
  end
  initial begin
    logic [31:0] q;
    rq = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int s;
      s = $urandom_range(7);
      @(negedge clk);
      rq = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: PeriphRegs + 32'(s << 12) + 32'($urandom_range(255) * 4), wdata: 0};
      #1;
      for (int k = 0; k < 8; k++) check(sreq[k].req == (k == s), "only the addressed slot");
      check(!romq.req, "ROM not selected");
      @(posedge clk); #1; rq.req = 0;
      check(rr.rvalid && rr.rdata == 32'(100 + s), "slot response routed back");
    end
    rd(BootRomBase + 32'h80, q);
    check(q == 32'hB007, "boot ROM read");
    @(negedge clk);
    rom_gnt = 0;
    rq = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: BootRomBase, wdata: 0};
    #1; check(!rr.gnt, "ROM grant passed through");
    rom_gnt = 1;
    #1; check(rr.gnt, "ROM grant passed through");
    @(posedge clk); #1; rq.req = 0;
    rd(32'h1A20_0000, q);
    check(q == 0, "unmapped address answered with zero");
    rd(PeriphRegs + 32'h9000, q);
    check(q == 0, "unused slot answered with zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
