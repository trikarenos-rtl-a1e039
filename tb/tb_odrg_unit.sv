// Testbench for odrg_unit. Lockstep (reset mode): identical random requests
// from the three cores must leave on port 0 only, every core must see port
// 0's response and interrupt; a request corrupted in one core must be outvoted,
// flagged in mismatch_o and STATUS (with the core's number) and raise the
// resync interrupt; writing RESYNC must reset all cores for exactly
// ResetCycles cycles and clear the flag. Performance mode: each core's
// traffic, responses and interrupts pass on their own, different requests
// raise no mismatch; switching back to lockstep resets the cores and counts.
module tb_odrg_unit;
  import trikarenos_pkg::*;
  localparam int RC = 4;
  logic clk = 0, rst_n = 0;
  tcdm_req_t ci [3], cd [3], bi [3], bd [3], rq;
  tcdm_rsp_t cir [3], cdr [3], bir [3], bdr [3], rr;
  logic [2:0] cirq, crst, irq;
  logic resync, lock, mm;
  int checks = 0, failures = 0;

  odrg_unit #(.ResetCycles(RC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_instr_req_i(ci), .core_instr_rsp_o(cir), .core_data_req_i(cd), .core_data_rsp_o(cdr),
    .core_irq_o(cirq), .core_resync_irq_o(resync), .core_rst_o(crst),
    .bus_instr_req_o(bi), .bus_instr_rsp_i(bir), .bus_data_req_o(bd), .bus_data_rsp_i(bdr),
    .irq_i(irq), .reg_req_i(rq), .reg_rsp_o(rr), .lockstep_o(lock), .mismatch_o(mm));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic tcdm_req_t rnd_req();
    tcdm_req_t r;
    r.req = 1; r.we = $urandom_range(1); r.be = 4'($urandom); r.addr = $urandom; r.wdata = $urandom;
    return r;
  endfunction

  task automatic reg_access(input bit we, input logic [3:0] off, input logic [31:0] d,
                            output logic [31:0] q);
    @(negedge clk);
    rq = '{req: 1'b1, we: we, be: 4'hF, addr: 32'(off), wdata: d};
    @(posedge clk); #1;
    rq.req = 0;
    check(rr.rvalid, "register response one cycle later");
    q = rr.rdata;
  endtask

  initial begin
    logic [31:0] q;
    tcdm_req_t r, bad;
    int n;
    rq = '0;
    for (int c = 0; c < 3; c++) begin ci[c] = '0; cd[c] = '0; bir[c] = '0; bdr[c] = '0; end
    irq = 3'b000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // lockstep
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      r = rnd_req();
      for (int c = 0; c < 3; c++) begin ci[c] = r; cd[c] = rnd_req(); end
      cd[1] = cd[0]; cd[2] = cd[0];
      for (int c = 0; c < 3; c++) begin
        bir[c] = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom};
        bdr[c] = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom};
      end
      irq = 3'($urandom);
      #1;
      check(lock && bi[0] == r && bd[0] == cd[0] && !bi[1].req && !bi[2].req && !bd[1].req && !bd[2].req,
            "lockstep: voted request on port 0 only");
      for (int c = 0; c < 3; c++)
        check(cir[c] == bir[0] && cdr[c] == bdr[0] && cirq[c] == irq[0], "lockstep: identical inputs");
      check(!mm, "no mismatch for identical cores");
    end
    // fault in core 2's data request
    @(negedge clk);
    r = rnd_req();
    for (int c = 0; c < 3; c++) cd[c] = r;
    bad = r;
    bad.addr[7] = !bad.addr[7];
    cd[2] = bad;
    #1;
    check(bd[0] == r, "faulty core outvoted");
    check(mm, "mismatch flagged");
    @(negedge clk);
    cd[2] = r;
    reg_access(0, 4'h4, 0, q);
    check(q[0] && q[3:1] == 3'b100, $sformatf("STATUS names core 2 (%b)", q[3:0]));
    check(resync, "resync interrupt raised");
    // resync: reset length
    reg_access(1, 4'h8, 1, q);
    n = 0;
    while (crst[0]) begin
      check(crst == 3'b111, "all cores reset together");
      check(!bd[0].req && !bi[0].req, "no bus requests during reset");
      n++;
      @(posedge clk); #1;
    end
    check(n == RC - 1 || n == RC, $sformatf("reset held %0d cycles", n));
    check(!resync, "resync interrupt cleared");
    // performance mode
    reg_access(1, 4'h0, 1, q);
    check(!lock, "performance mode");
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      for (int c = 0; c < 3; c++) begin
        ci[c] = rnd_req(); cd[c] = rnd_req();
        bir[c] = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom};
        bdr[c] = '{gnt: 1'($urandom), rvalid: 1'($urandom), rdata: $urandom};
      end
      irq = 3'($urandom);
      #1;
      for (int c = 0; c < 3; c++)
        check(bi[c] == ci[c] && bd[c] == cd[c] && cir[c] == bir[c] && cdr[c] == bdr[c] &&
              cirq[c] == irq[c], "performance: independent ports");
      check(!mm, "no mismatch in performance mode");
    end
    // back to lockstep
    reg_access(1, 4'h0, 0, q);
    check(crst == 3'b111 && lock, "entering lockstep resets the cores");
    repeat (RC + 1) @(posedge clk);
    reg_access(0, 4'hC, 0, q);
    check(q == 1, "one entry into lockstep counted");
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
