// Testbench for tcdm_interconnect: 9 masters issue random reads and writes
// to a 1 KiB SRAM window and to the peripheral port. The slaves are memory
// models here that refuse a grant at random and answer one cycle later. Each
// master checks its read data against a reference memory, that every granted
// request gets exactly one response one cycle later, that each word went to
// bank addr[4:2], and that contention stalls and is served fairly (every
// master progresses).
module tb_tcdm_interconnect;
  import trikarenos_pkg::*;
  localparam int NM = 9, NB = 8, NS = NB + 1, Words = 256;

  logic clk = 0, rst_n = 0;
  tcdm_req_t mreq [NM], sreq [NS];
  tcdm_rsp_t mrsp [NM], srsp [NS];
  int checks = 0, failures = 0, n_stall = 0;
  int done_cnt [NM];

  tcdm_interconnect #(.NumMasters(NM), .MemSize(4 * Words)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .slv_req_o(sreq), .slv_rsp_i(srsp));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // slave models: shared reference memory, words 0..255 plus periph regs 0..15
  logic [31:0] mem [Words];
  logic [31:0] preg [16];
  logic        sgnt [NS];
  logic        srv [NS];
  logic [31:0] srd [NS];
  always_comb for (int s = 0; s < NS; s++) srsp[s] = '{gnt: sgnt[s], rvalid: srv[s], rdata: srd[s]};
  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      srv[s] <= sreq[s].req && sgnt[s];
      srd[s] <= '0;
      if (sreq[s].req && sgnt[s]) begin
        if (s < NB) begin
          int w;
          w = int'((sreq[s].addr - SramBase) >> 2);
          check(w % NB == s, "word interleaving");
          if (sreq[s].we) mem[w] <= sreq[s].wdata; else srd[s] <= mem[w];
        end else begin
          if (sreq[s].we) preg[sreq[s].addr[5:2]] <= sreq[s].wdata;
          else srd[s] <= preg[sreq[s].addr[5:2]];
        end
      end
    end
  end
  always @(negedge clk) for (int s = 0; s < NS; s++) sgnt[s] = ($urandom_range(4) != 0);

  // masters: each owns the words with index % NM == m, so expected data is known
  logic [31:0] shadow [Words];
  logic [31:0] pshadow [16];
  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      done_cnt[m] = 0;
      mreq[m] = '0;
      @(posedge rst_n);
      for (int t = 0; t < 300; t++) begin
        int w;
        bit we, per;
        logic [31:0] exp_d;
        per = ($urandom_range(7) == 0);
        we  = $urandom_range(1);
        w   = per ? m : ($urandom_range(Words / NM - 1) * NM + m);
        @(negedge clk);
        mreq[m].req = 1; mreq[m].we = we; mreq[m].be = 4'hF;
        mreq[m].addr = per ? (PeriphRegs + 32'(4 * w)) : (SramBase + 32'(4 * w));
        mreq[m].wdata = $urandom;
        exp_d = per ? pshadow[w] : shadow[w];
        #1;
        while (!mrsp[m].gnt) begin
          n_stall++;
          @(negedge clk);
          #1;
        end
        @(posedge clk); #1;
        mreq[m].req = 0;
        check(mrsp[m].rvalid, "response one cycle after grant");
        if (we) begin
          if (per) pshadow[w] = mreq[m].wdata; else shadow[w] = mreq[m].wdata;
        end else check(mrsp[m].rdata == exp_d, $sformatf("m%0d read word %0d", m, w));
        done_cnt[m]++;
      end
    end
  end

  // no response without a request
  int outstanding [NM];
  always @(posedge clk) if (rst_n)
    for (int m = 0; m < NM; m++) begin
      if (mrsp[m].rvalid) check(outstanding[m] == 1, "response matches a grant");
      outstanding[m] <= (mreq[m].req && mrsp[m].gnt) ? 1 : 0;
    end

  initial begin
    for (int i = 0; i < Words; i++) begin mem[i] = i; shadow[i] = i; end
    for (int i = 0; i < 16; i++) begin preg[i] = 0; pshadow[i] = 0; end
    for (int m = 0; m < NM; m++) outstanding[m] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_cnt[0] == 300 && done_cnt[1] == 300 && done_cnt[2] == 300 && done_cnt[3] == 300 &&
          done_cnt[4] == 300 && done_cnt[5] == 300 && done_cnt[6] == 300 && done_cnt[7] == 300 &&
          done_cnt[8] == 300);
    check(n_stall > 0, "contention stalls happened");
    $display("COUNT stalls=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
