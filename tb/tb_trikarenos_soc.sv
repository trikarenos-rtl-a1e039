// End-to-end testbench of the Trikarenos SoC at its default parameters.
//
// Three behavioural core models (core_model) sit on the core ports, a tiny
// boot ROM answers on the ROM port, the JTAG debug port is driven by tasks
// here, and the pads are looped back (UART TX to RX) or connected to a small
// Quad-SPI device model. The run:
//  1. loads two 24x24 matrices over the debug port (the paper's benchmark);
//  2. lockstep mode: the three cores compute C = A*B together; halfway a fault
//     is injected into core 1's output; the vote hides it, the mismatch raises
//     the resync interrupt, the cores save state, reset and resume;
//  3. switches to performance mode and computes the product again with the
//     rows split over the three cores, then compares cycle counts;
//  4. switches back to lockstep (cores reset for re-synchronisation);
//  5. injects single and double bit errors through the write-disable masks,
//     checks correction, detection, the error counters, the selectable error
//     output and the interrupt, and lets the scrubber repair a word;
//  6. sends bytes through the I/O DMA over the looped-back UART and over the
//     Quad-SPI, and receives bytes from the Quad-SPI device;
//  7. exercises GPIO and timer.
// Both products are checked word by word. Every mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_trikarenos_soc;
  import trikarenos_pkg::*;

  localparam int N = 24;
  localparam logic [31:0] ABase  = SramBase + 32'h0000_1000;
  localparam logic [31:0] BBase  = SramBase + 32'h0000_2000;
  localparam logic [31:0] CBase  = SramBase + 32'h0000_3000;
  localparam logic [31:0] C2Base = SramBase + 32'h0000_4000;
  localparam logic [31:0] Stack  = SramBase + 32'h0003_F000;
  localparam logic [31:0] BufTx  = SramBase + 32'h0000_6000;
  localparam logic [31:0] BufRx  = SramBase + 32'h0000_6100;
  localparam logic [31:0] BufQrx = SramBase + 32'h0000_6200;
  localparam logic [31:0] Gpio   = PeriphRegs + 32'h0000;
  localparam logic [31:0] Timer  = PeriphRegs + 32'h1000;
  localparam logic [31:0] Irq    = PeriphRegs + 32'h2000;
  localparam logic [31:0] Odrg   = PeriphRegs + 32'h3000;
  localparam logic [31:0] MemCfg = PeriphRegs + 32'h4000;
  localparam logic [31:0] ErrMon = PeriphRegs + 32'h5000;
  localparam logic [31:0] Udma   = PeriphRegs + 32'h6000;
  localparam logic [31:0] PadMux = PeriphRegs + 32'h7000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t core_ireq [3], core_dreq [3];
  tcdm_rsp_t core_irsp [3], core_drsp [3];
  logic [2:0] core_irq, core_rst;
  logic       resync_irq, lockstep, err_o;
  tcdm_req_t  dbg_req, rom_req;
  tcdm_rsp_t  dbg_rsp, rom_rsp;
  logic [31:0] pad_in, pad_out, pad_oe;

  trikarenos_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_instr_req_i(core_ireq), .core_instr_rsp_o(core_irsp),
    .core_data_req_i(core_dreq),  .core_data_rsp_o(core_drsp),
    .core_irq_o(core_irq), .core_resync_irq_o(resync_irq), .core_rst_o(core_rst),
    .lockstep_o(lockstep),
    .dbg_req_i(dbg_req), .dbg_rsp_o(dbg_rsp),
    .rom_req_o(rom_req), .rom_rsp_i(rom_rsp),
    .pad_in_i(pad_in), .pad_out_o(pad_out), .pad_oe_o(pad_oe), .err_o(err_o));

  // ------------------------------------------------------------ cores
  logic        start = 0;
  int unsigned row_lo [3], row_hi [3];
  logic [31:0] c_base;
  logic [2:0]  inject = '0;
  logic [2:0]  done, idle;

  for (genvar c = 0; c < 3; c++) begin : g_core
    core_model i_core (
      .clk_i(clk), .rst_ni(rst_n), .core_rst_i(core_rst[c]), .start_i(start),
      .n_i(N), .row_lo_i(row_lo[c]), .row_hi_i(row_hi[c]),
      .a_base_i(ABase), .b_base_i(BBase), .c_base_i(c_base), .stack_i(Stack),
      .inject_i(inject[c]), .resync_irq_i(resync_irq),
      .instr_req_o(core_ireq[c]), .instr_rsp_i(core_irsp[c]),
      .data_req_o(core_dreq[c]), .data_rsp_i(core_drsp[c]),
      .done_o(done[c]), .idle_o(idle[c]));
  end

  // ------------------------------------------------------------ boot ROM
  logic rom_rv = 0;
  always_ff @(posedge clk) rom_rv <= rom_req.req;
  assign rom_rsp = '{gnt: 1'b1, rvalid: rom_rv, rdata: 32'h0000_0013};

  // ------------------------------------------------------------ pads
  int unsigned qn = 0;            // nibbles the QSPI device has sent
  logic [7:0]  q_cap [$];         // bytes the QSPI device received
  logic [3:0]  q_hi;
  logic        q_half = 0;
  logic [15:0] gpio_drive = 16'hA5C3;

  function automatic logic [3:0] qpat(int unsigned n);
    return 4'((n * 3 + 1) & 15);
  endfunction

  always_comb begin
    pad_in = '0;
    pad_in[1] = pad_oe[0] ? pad_out[0] : 1'b1;    // UART loopback
    pad_in[7:4] = qpat(qn);
    pad_in[31:16] = gpio_drive;
  end

  always @(posedge pad_out[2]) begin
    if (!pad_out[3] && pad_oe[4]) begin
      if (!q_half) q_hi = pad_out[7:4];
      else q_cap.push_back({q_hi, pad_out[7:4]});
      q_half = !q_half;
    end
  end
  always @(negedge pad_out[2]) if (!pad_out[3] && !pad_oe[4]) qn++;

  // ------------------------------------------------------------ counters
  int checks = 0, failures = 0;
  int n_mismatch = 0, n_resync = 0, n_stall = 0, n_bank_busy = 0, n_rom = 0;
  int n_err_o = 0, n_lock_cycles = 0;
  logic mm_q = 0, rst_q = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.i_odrg.mismatch_o && !mm_q) n_mismatch++;
    mm_q <= dut.i_odrg.mismatch_o;
    if (core_rst[0] && !rst_q) n_resync++;
    rst_q <= core_rst[0];
    for (int c = 0; c < 6; c++) if (dut.mst_req[c].req && !dut.mst_rsp[c].gnt) n_stall++;
    for (int b = 0; b < NumBanks; b++) if (dut.slv_req[b].req && !dut.slv_rsp[b].gnt) n_bank_busy++;
    if (rom_req.req) n_rom++;
    if (err_o) n_err_o++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic dbg_access(input bit we, input logic [31:0] addr, input logic [3:0] be,
                            input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    dbg_req = '{req: 1'b1, we: we, be: be, addr: addr, wdata: wd};
    #1;
    while (!dbg_rsp.gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    dbg_req.req = 0;
    while (!dbg_rsp.rvalid) begin @(posedge clk); #1; end
    rd = dbg_rsp.rdata;
  endtask

  task automatic wr(input logic [31:0] addr, input logic [31:0] d);
    logic [31:0] x;
    dbg_access(1, addr, 4'hF, d, x);
  endtask

  task automatic rd(input logic [31:0] addr, output logic [31:0] d);
    dbg_access(0, addr, 4'hF, 0, d);
  endtask

  // counters: let the events of the last access land first
  task automatic rd_cnt(input logic [31:0] addr, output logic [31:0] d);
    repeat (2) @(posedge clk);
    dbg_access(0, addr, 4'hF, 0, d);
  endtask

  logic [31:0] A [N*N], B [N*N], C [N*N];

  // byte i of the transmit buffer (words 0x44332211 + 0x04040404 * w)
  function automatic logic [7:0] txbyte(int i);
    return 8'(8'h11 * (i % 4 + 1) + 4 * (i / 4));
  endfunction

  task automatic run_matmul(input logic [31:0] base, input bit split, output int cycles);
    int t0;
    c_base = base;
    for (int c = 0; c < 3; c++) begin
      row_lo[c] = split ? c * N / 3 : 0;
      row_hi[c] = split ? (c + 1) * N / 3 : N;
    end
    @(negedge clk);
    start = 1;
    t0 = 0;
    while (!(&done)) begin
      @(posedge clk);
      t0++;
    end
    @(negedge clk);
    start = 0;
    cycles = t0;
  endtask

  task automatic check_product(input logic [31:0] base, input string what);
    logic [31:0] v;
    int bad = 0;
    for (int i = 0; i < N * N; i++) begin
      rd(base + 4 * i, v);
      if (v != C[i]) bad++;
      checks++;
    end
    failures += bad;
    if (bad != 0) $display("FAIL: %s: %0d wrong words", what, bad);
  endtask

  // ------------------------------------------------------------ the run
  int cyc_lock, cyc_par, n_perf_runs = 0, n_lock_runs = 0;
  int n_corr = 0, n_uncorr = 0, n_scrub = 0, n_uart = 0, n_qspi_tx = 0, n_qspi_rx = 0;
  int n_gpio = 0, n_timer = 0, n_rmw = 0;

  initial begin
    logic [31:0] v, v2, cnt0, cnt1;
    dbg_req = '0;
    c_base = CBase;
    for (int c = 0; c < 3; c++) begin row_lo[c] = 0; row_hi[c] = 0; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    // 1. data
    for (int i = 0; i < N * N; i++) begin
      A[i] = $urandom_range(255);
      B[i] = $urandom_range(255);
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        C[i*N+j] = 0;
        for (int k = 0; k < N; k++) C[i*N+j] += A[i*N+k] * B[k*N+j];
      end
    for (int i = 0; i < 16; i++) wr(SramBase + 4 * i, 32'h0000_0013);
    for (int i = 0; i < N * N; i++) begin
      wr(ABase + 4 * i, A[i]);
      wr(BBase + 4 * i, B[i]);
    end
    rd(Odrg, v);
    check(v == 0 && lockstep, "lockstep is the reset mode");

    // 2. lockstep run with a fault in core 1
    fork
      run_matmul(CBase, 0, cyc_lock);
      begin
        repeat (20000) @(posedge clk);
        @(negedge clk);
        inject[1] = 1;
        @(negedge clk);
        inject[1] = 0;
      end
    join
    n_lock_runs++;
    check(n_mismatch >= 1, "fault in core 1 detected by the vote");
    check(n_resync >= 1, "cores re-synchronised after the fault");
    rd(Odrg + 4, v);
    check(v[0] == 0, "mismatch cleared by the resync");
    rd(ErrMon + 4 * 24, v);
    check(v >= 1, $sformatf("ODRG mismatch counter %0d", v));
    check_product(CBase, "lockstep product");

    // 3. performance mode
    wr(Odrg, 1);
    check(!lockstep, "performance mode entered");
    run_matmul(C2Base, 1, cyc_par);
    n_perf_runs++;
    check_product(C2Base, "parallel product");
    $display("COUNT lockstep_cycles=%0d parallel_cycles=%0d speedup=%0.2f",
             cyc_lock, cyc_par, real'(cyc_lock) / real'(cyc_par));

    // 4. back to lockstep: the cores are reset together
    v2 = n_resync;
    wr(Odrg, 0);
    repeat (20) @(posedge clk);
    check(lockstep && n_resync == v2 + 1, "re-entering lockstep resets the cores");
    rd(Odrg + 12, v);
    check(v == 1, "one switch back into lockstep recorded");
    // a lockstep run without faults: compare cycles with the first parallel run
    run_matmul(CBase, 0, cnt0);
    n_lock_runs++;
    check_product(CBase, "second lockstep product");
    check(real'(cnt0) / real'(cyc_par) > 2.5 && real'(cnt0) / real'(cyc_par) < 3.05,
          $sformatf("parallel speedup %0.2f (paper: 2.96)", real'(cnt0) / real'(cyc_par)));

    // 5. ECC: word 0x5008 lies in bank 2
    wr(MemCfg + 4 * 16, 32'h0);                 // scrubbing off for now
    wr(SramBase + 32'h5008, 32'hCAFE_0000);
    wr(MemCfg + 8 * 2, 32'h0000_0010);          // bank 2: do not write bit 4
    wr(SramBase + 32'h5008, 32'hCAFE_0010);
    wr(MemCfg + 8 * 2, 32'h0);
    rd_cnt(ErrMon + 4 * 6, cnt0);
    wr(ErrMon + 32'h100, 32'd6);                // error output: bank 2 corrected
    rd(SramBase + 32'h5008, v);
    check(v == 32'hCAFE_0010, "single error corrected on read");
    rd_cnt(ErrMon + 4 * 6, cnt1);
    check(cnt1 == cnt0 + 1, "corrected-error counter of bank 2");
    n_corr = cnt1 - cnt0;
    // sub-word write merges with the corrected data
    dbg_access(1, SramBase + 32'h5008, 4'b1000, 32'h1100_0000, v);
    rd(SramBase + 32'h5008, v);
    check(v == 32'h11FE_0010, "byte write on a word with an error");
    // double error
    wr(MemCfg + 8 * 2, 32'h0000_0081);
    wr(SramBase + 32'h5008, 32'h11FE_0091);     // bits 0 and 7 stay at old values
    wr(MemCfg + 8 * 2, 32'h0);
    rd_cnt(ErrMon + 4 * 7, cnt0);
    rd(SramBase + 32'h5008, v);
    rd_cnt(ErrMon + 4 * 7, cnt1);
    check(cnt1 == cnt0 + 1, "uncorrectable-error counter of bank 2");
    n_uncorr = cnt1 - cnt0;
    rd(Irq + 4, v);
    check(v[4], "uncorrectable error interrupt pending");
    // scrubber: plant a single error, enable scrubbing, wait a full pass
    wr(SramBase + 32'h5028, 32'h0000_0000);
    wr(MemCfg + 8 * 2, 32'h0000_0100);
    wr(SramBase + 32'h5028, 32'h0000_0100);     // bank 2 as well
    wr(MemCfg + 8 * 2, 32'h0);
    wr(SramBase + 32'h5008, 32'h7777_7777);     // repair the double-error word
    rd_cnt(ErrMon + 4 * 8, cnt0);
    wr(MemCfg + 4 * 16, 32'hFF);
    repeat (3 * BankWords) @(posedge clk);
    rd_cnt(ErrMon + 4 * 8, cnt1);
    check(cnt1 > cnt0, "scrubber repaired words in bank 2");
    n_scrub = cnt1 - cnt0;
    rd_cnt(ErrMon + 4 * 6, cnt0);
    rd(SramBase + 32'h5028, v);
    rd_cnt(ErrMon + 4 * 6, cnt1);
    check(v == 32'h0000_0100 && cnt1 == cnt0, "scrubbed word reads clean");

    // 6. I/O DMA: UART loopback, then Quad-SPI out and in
    wr(PadMux, 32'h8765_4321);                  // pads 0-7: functions 0-7
    wr(PadMux + 4, 32'h0000_0009);              // pad 8: error output
    for (int i = 0; i < 4; i++) wr(BufTx + 4 * i, 32'h4433_2211 + 32'h0404_0404 * i);
    wr(Irq + 8, 32'hFF);
    wr(Udma + 32'h20, 32'd3);                   // bit time 4 cycles
    wr(Udma + 32'h00, BufRx + 1);               // unaligned: byte writes in all lanes
    wr(Udma + 32'h04, 32'd16);
    wr(Udma + 32'h08, 32'd1);                   // RX from UART
    wr(Udma + 32'h10, BufTx);
    wr(Udma + 32'h14, 32'd16);
    wr(Udma + 32'h18, 32'd1);                   // TX to UART
    repeat (16 * 50) @(posedge clk);
    rd(Udma + 32'h08, v);
    rd(Udma + 32'h18, v2);
    check(v[0] == 0 && v2[0] == 0, "UART transfers finished");
    for (int i = 0; i < 16; i++) begin
      logic [31:0] w;
      rd((BufRx + 1 + i) & ~32'h3, w);
      check(w[8 * ((1 + i) % 4) +: 8] == txbyte(i), $sformatf("UART byte %0d", i));
    end
    n_uart = 16;
    rd(Irq + 4, v);
    check(v[2] && v[3], "uDMA done interrupts");
    // QSPI transmit of 8 bytes
    wr(Udma + 32'h10, BufTx);
    wr(Udma + 32'h14, 32'd8);
    wr(Udma + 32'h18, 32'd3);
    repeat (300) @(posedge clk);
    check(q_cap.size() == 8, $sformatf("QSPI device got %0d bytes", q_cap.size()));
    for (int i = 0; i < q_cap.size() && i < 8; i++)
      check(q_cap[i] == txbyte(i), $sformatf("QSPI byte %0d = %h", i, q_cap[i]));
    n_qspi_tx = q_cap.size();
    // QSPI receive of 8 bytes
    qn = 0;
    wr(Udma + 32'h00, BufQrx);
    wr(Udma + 32'h04, 32'd8);
    wr(Udma + 32'h08, 32'd3);
    repeat (200) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      logic [31:0] w;
      rd((BufQrx + i) & ~32'h3, w);
      check(w[8 * (i % 4) +: 8] == {qpat(2 * i), qpat(2 * i + 1)}, $sformatf("QSPI rx byte %0d", i));
      n_qspi_rx++;
    end

    // 7. GPIO and timer
    wr(Gpio + 0, 32'h0000_FF00);
    wr(Gpio + 4, 32'h0000_5A00);
    @(negedge clk);
    check(pad_out[15:9] == 7'h2D && pad_oe[15:9] == 7'h7F && pad_out[8] == err_o,
          "GPIO drives pads 9-15, pad 8 carries the error output");
    wr(PadMux + 4, 32'h0000_9009);              // error output on pad 11 as well
    @(negedge clk);
    check(pad_out[11] == err_o && pad_oe[11] && pad_out[8] == err_o && pad_out[12] == 1'b1,
          "any pad can take any function");
    wr(PadMux + 4, 32'h0000_0009);
    rd(Gpio + 8, v);
    check(v[31:16] == gpio_drive, "GPIO inputs");
    wr(Gpio + 12, 32'h0001_0000);
    gpio_drive[0] = 0;
    repeat (4) @(posedge clk);
    gpio_drive[0] = 1;
    repeat (4) @(posedge clk);
    rd(Irq + 4, v);
    check(v[0], "GPIO edge interrupt");
    n_gpio += v[0];
    wr(Irq + 0, 32'h02);
    wr(Timer + 8, 32'd30);
    wr(Timer + 0, 32'd1);
    repeat (40) @(posedge clk);
    rd(Irq + 4, v);
    check(v[1] && core_irq == 3'b111, "timer interrupt reaches the cores");
    n_timer += v[1];

    // every mechanism must have happened
    n_rmw = n_bank_busy;
    check(n_mismatch > 0, "mechanism: lockstep mismatch");
    check(n_resync > 0, "mechanism: core resync reset");
    check(n_perf_runs > 0 && n_lock_runs > 0, "mechanism: mode switch");
    check(n_stall > 0, "mechanism: interconnect conflict stall");
    check(n_rmw > 0, "mechanism: sub-word write-back stall");
    check(n_rom > 0, "mechanism: boot ROM fetch");
    check(n_corr > 0 && n_uncorr > 0 && n_scrub > 0, "mechanism: ECC correct/detect/scrub");
    check(n_err_o > 0, "mechanism: selectable error output");
    check(n_uart > 0 && n_qspi_tx > 0 && n_qspi_rx > 0, "mechanism: uDMA UART and QSPI");
    check(n_gpio > 0 && n_timer > 0, "mechanism: GPIO and timer interrupts");
    $display("COUNT mismatch=%0d resync=%0d stalls=%0d bank_busy=%0d rom=%0d corr=%0d uncorr=%0d scrub=%0d err_o=%0d uart=%0d qspi_tx=%0d qspi_rx=%0d",
             n_mismatch, n_resync, n_stall, n_bank_busy, n_rom, n_corr, n_uncorr, n_scrub,
             n_err_o, n_uart, n_qspi_tx, n_qspi_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
