// Testbench for ecc_bank (64 words to keep it short).
//
// A reference copy of the memory is kept here. Phases: fill every row with
// full-word writes; random full and sub-word writes and reads, each response
// checked for data and for arriving exactly one cycle after the grant, and a
// sub-word write checked to cost one refused cycle for the next request
// only; fault injection through the write-disable mask (one flipped bit must
// be corrected with a corr pulse, two must be flagged uncorrectable); then
// scrubbing with and without competing bus traffic: each planted single error
// must be repaired (scrub_fix pulse, later reads clean), and the scrubber must
// have deferred to the bus at least once.
module tb_ecc_bank;
  import trikarenos_pkg::*;
  localparam int Words = 64;

  logic clk = 0, rst_n = 0;
  tcdm_req_t req;
  tcdm_rsp_t rsp;
  logic [38:0] wr_dis = '0;
  logic scrub_en = 0, corr, uncorr, fix;
  int checks = 0, failures = 0;
  int n_corr = 0, n_uncorr = 0, n_fix = 0, n_defer = 0;
  logic [31:0] ref_mem [Words];

  ecc_bank #(.Words(Words)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .wr_dis_i(wr_dis), .scrub_en_i(scrub_en),
    .corr_o(corr), .uncorr_o(uncorr), .scrub_fix_o(fix));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (corr) n_corr++;
    if (uncorr) n_uncorr++;
    if (fix) n_fix++;
    if (dut.i_scrubber.pend_q && dut.i_scrubber.err_i && dut.i_scrubber.busy_i) n_defer++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one bus access; returns read data and the cycles spent waiting for gnt
  task automatic access(input bit we, input logic [3:0] be, input int row,
                        input logic [31:0] wd, output logic [31:0] rd, output int waits);
    @(negedge clk);
    req.req = 1; req.we = we; req.be = be; req.addr = SramBase + 32'(row << 5); req.wdata = wd;
    waits = 0;
    #1;
    while (!rsp.gnt) begin
      @(negedge clk);
      #1;
      waits++;
    end
    @(posedge clk); #1;
    req.req = 0;
    check(rsp.rvalid, "rvalid one cycle after grant");
    rd = rsp.rdata;
  endtask

  task automatic write_ref(input int row, input logic [3:0] be, input logic [31:0] wd);
    for (int b = 0; b < 4; b++) if (be[b]) ref_mem[row][8*b +: 8] = wd[8*b +: 8];
  endtask

  initial begin
    logic [31:0] rd, d;
    int w, row;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < Words; r++) begin
      d = $urandom;
      access(1, 4'hF, r, d, rd, w);
      ref_mem[r] = d;
      check(w == 0, "full write granted at once");
    end
    // random traffic
    for (int t = 0; t < 600; t++) begin
      logic [3:0] be;
      bit we;
      row = $urandom_range(Words - 1);
      we  = $urandom_range(1);
      be  = $urandom_range(1) ? 4'hF : 4'($urandom_range(1, 14));
      d   = $urandom;
      access(we, be, row, d, rd, w);
      if (we) begin
        write_ref(row, be, d);
        if (be != 4'hF) begin
          // the very next request waits exactly one cycle (write-back)
          int r2;
          logic [31:0] rd2;
          r2 = $urandom_range(Words - 1);
          @(negedge clk);
          req.req = 1; req.we = 0; req.be = 4'hF; req.addr = SramBase + 32'(r2 << 5);
          #1;
          check(!rsp.gnt, "bank busy in the sub-word write-back cycle");
          @(negedge clk);
          #1;
          check(rsp.gnt, "bank free after the write-back");
          @(posedge clk); #1;
          req.req = 0;
          check(rsp.rvalid && rsp.rdata == ref_mem[r2], "read after sub-word write");
        end
      end else begin
        check(rd == ref_mem[row], $sformatf("read row %0d: %h vs %h", row, rd, ref_mem[row]));
      end
    end
    check(n_corr == 0 && n_uncorr == 0, "no error events on clean traffic");

    // single-bit injection in rows 3 (data bit 5) and 9 (check bit 35)
    wr_dis = 39'd1 << 5;
    d = ref_mem[3] ^ 32'h20;
    access(1, 4'hF, 3, d, rd, w);
    ref_mem[3] = d;
    wr_dis = 39'd1 << 35;
    d = ref_mem[9] ^ 32'h1234_5678;
    access(1, 4'hF, 9, d, rd, w);   // check bits differ in bit 35 or not
    ref_mem[9] = d;
    wr_dis = '0;
    n_corr = 0;
    access(0, 4'hF, 3, 0, rd, w);
    @(posedge clk); #1;
    check(rd == ref_mem[3] && n_corr == 1, "single injected error corrected and counted");
    access(0, 4'hF, 9, 0, rd, w);
    check(rd == ref_mem[9], "row 9 reads correct data");
    // double-bit injection in row 12
    wr_dis = (39'd1 << 1) | (39'd1 << 30);
    d = ref_mem[12] ^ 32'h4000_0002;
    access(1, 4'hF, 12, d, rd, w);
    wr_dis = '0;
    n_uncorr = 0;
    access(0, 4'hF, 12, 0, rd, w);
    @(posedge clk); #1;
    check(n_uncorr == 1, "double injected error detected");
    // repair row 12 for the scrub phase
    access(1, 4'hF, 12, d, rd, w);
    ref_mem[12] = d;

    // scrubbing, bank otherwise idle
    n_fix = 0;
    n_corr = 0;
    scrub_en = 1;
    repeat (4 * Words) @(posedge clk);
    check(n_fix >= 1, $sformatf("scrubber repaired row 3 (fixes=%0d)", n_fix));
    access(0, 4'hF, 3, 0, rd, w);
    @(posedge clk); #1;
    check(rd == ref_mem[3] && n_corr == 0, "row 3 clean after scrubbing");

    // scrubbing under random bus load: plant errors, keep reading
    for (int k = 0; k < 6; k++) begin
      row = 20 + 4 * k;
      wr_dis = 39'd1 << k;
      d = ref_mem[row] ^ (32'd1 << k);
      access(1, 4'hF, row, d, rd, w);
      ref_mem[row] = d;
    end
    wr_dis = '0;
    n_fix = 0;
    for (int t = 0; t < 30 * Words; t++) begin
      if ($urandom_range(2) == 0) begin
        row = $urandom_range(Words - 1);
        access(0, 4'hF, row, 0, rd, w);
        check(rd == ref_mem[row], "read during scrubbing");
      end else begin
        @(posedge clk);
      end
    end
    check(n_fix >= 6, $sformatf("all planted errors repaired under load (fixes=%0d)", n_fix));
    check(n_defer >= 1, $sformatf("scrubber deferred to the bus (%0d)", n_defer));
    $display("COUNT fixes=%0d defers=%0d", n_fix, n_defer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
