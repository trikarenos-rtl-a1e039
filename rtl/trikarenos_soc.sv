// Trikarenos SoC top level: a fault-tolerant RISC-V microcontroller.
//
// Three cores sit inside the ODRG unit, which either locks them together and
// votes their bus requests (soft-error tolerant mode, after reset) or lets
// them run independently (performance mode). Their instruction and data
// ports, the two I/O DMA channels and the JTAG debug port are the masters of
// the TCDM interconnect, which reaches eight word-interleaved ECC-protected
// SRAM banks (256 KiB in total) and the peripheral bus. On the peripheral bus
// sit the GPIOs, the timer, the interrupt controller, the ODRG configuration
// registers, the memory configuration (fault injection, scrubbing), the error
// counters, the I/O DMA with its UART and Quad-SPI, and the pad multiplexer;
// the boot ROM is reached through a port of its own.
//
// Interconnect masters: 0-2 core instruction ports, 3-5 core data ports,
// 6 uDMA RX, 7 uDMA TX, 8 JTAG debug. Slaves: 0-7 banks, 8 peripheral bus.
// Peripheral slots (0x1A10_0000 + 0x1000*slot): 0 GPIO, 1 timer, 2 interrupt
// controller, 3 ODRG, 4 memory configuration, 5 error counters, 6 uDMA, 7 pad
// mux. Interrupt lines: 0 GPIO, 1 timer, 2 uDMA RX done, 3 uDMA TX done,
// 4 uncorrectable memory error in any bank.
// Peripheral functions a pad can be given: 0 UART TX, 1 UART RX, 2 QSPI SCK,
// 3 QSPI CSn, 4-7 QSPI data 0-3, 8 selected error output (pad select value
// = function + 1, any pad).
//
// The cores, the JTAG debug unit and the boot ROM are not part of this RTL:
// their bus ports are ports of this module. Each core port carries the TCDM
// handshake of trikarenos_pkg; core_rst_o requests a core reset (held for the
// ODRG reset time) and core_resync_irq_o asks the cores to re-synchronise.
// The structure follows the paper's block diagram; map, interrupt and pad
// assignments are this design's choices.
module trikarenos_soc
  import trikarenos_pkg::*;
#(
  parameter int unsigned NumPads = 32
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // cores
  input  tcdm_req_t           core_instr_req_i [NumCores],
  output tcdm_rsp_t           core_instr_rsp_o [NumCores],
  input  tcdm_req_t           core_data_req_i  [NumCores],
  output tcdm_rsp_t           core_data_rsp_o  [NumCores],
  output logic [NumCores-1:0] core_irq_o,
  output logic                core_resync_irq_o,
  output logic [NumCores-1:0] core_rst_o,
  output logic                lockstep_o,
  // JTAG debug unit's bus master port
  input  tcdm_req_t           dbg_req_i,
  output tcdm_rsp_t           dbg_rsp_o,
  // boot ROM
  output tcdm_req_t           rom_req_o,
  input  tcdm_rsp_t           rom_rsp_i,
  // pads
  input  logic [NumPads-1:0]  pad_in_i,
  output logic [NumPads-1:0]  pad_out_o,
  output logic [NumPads-1:0]  pad_oe_o,
  output logic                err_o
);

  localparam int unsigned NumMst = 2 * NumCores + 3;
  localparam int unsigned NumSlv = NumBanks + 1;
  localparam int unsigned NumErr = 3 * NumBanks + 1;

  tcdm_req_t mst_req [NumMst];
  tcdm_rsp_t mst_rsp [NumMst];
  tcdm_req_t slv_req [NumSlv];
  tcdm_rsp_t slv_rsp [NumSlv];
  tcdm_req_t bus_instr_req [NumCores], bus_data_req [NumCores];
  tcdm_rsp_t bus_instr_rsp [NumCores], bus_data_rsp [NumCores];
  tcdm_req_t slot_req [NumPeriphSlots];
  tcdm_rsp_t slot_rsp [NumPeriphSlots];

  logic [CodeWidth-1:0] wr_dis [NumBanks];
  logic [NumBanks-1:0]  scrub_en, ev_corr, ev_uncorr, ev_scrub;
  logic [NumErr-1:0]    err_events;
  logic                 mismatch;
  logic [NumCores-1:0]  core_irq_lines;
  logic [7:0]           irq_src;
  logic                 gpio_irq, timer_irq, rx_done, tx_done;

  // ---------------------------------------------------------------- ODRG
  odrg_unit i_odrg (
    .clk_i, .rst_ni,
    .core_instr_req_i,
    .core_instr_rsp_o,
    .core_data_req_i,
    .core_data_rsp_o,
    .core_irq_o,
    .core_resync_irq_o,
    .core_rst_o,
    .bus_instr_req_o(bus_instr_req),
    .bus_instr_rsp_i(bus_instr_rsp),
    .bus_data_req_o (bus_data_req),
    .bus_data_rsp_i (bus_data_rsp),
    .irq_i          (core_irq_lines),
    .reg_req_i      (slot_req[SlotOdrg]),
    .reg_rsp_o      (slot_rsp[SlotOdrg]),
    .lockstep_o,
    .mismatch_o     (mismatch)
  );

  for (genvar c = 0; c < NumCores; c++) begin : g_core_ports
    assign mst_req[c]            = bus_instr_req[c];
    assign bus_instr_rsp[c]      = mst_rsp[c];
    assign mst_req[NumCores + c] = bus_data_req[c];
    assign bus_data_rsp[c]       = mst_rsp[NumCores + c];
  end

  // ---------------------------------------------------------------- interconnect
  tcdm_interconnect #(.NumMasters(NumMst)) i_xbar (
    .clk_i, .rst_ni,
    .mst_req_i(mst_req),
    .mst_rsp_o(mst_rsp),
    .slv_req_o(slv_req),
    .slv_rsp_i(slv_rsp)
  );

  assign mst_req[2*NumCores + 2] = dbg_req_i;
  assign dbg_rsp_o               = mst_rsp[2*NumCores + 2];

  // ---------------------------------------------------------------- memory
  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    ecc_bank #(.RowLsb(2 + $clog2(NumBanks))) i_bank (
      .clk_i, .rst_ni,
      .req_i      (slv_req[b]),
      .rsp_o      (slv_rsp[b]),
      .wr_dis_i   (wr_dis[b]),
      .scrub_en_i (scrub_en[b]),
      .corr_o     (ev_corr[b]),
      .uncorr_o   (ev_uncorr[b]),
      .scrub_fix_o(ev_scrub[b])
    );
    assign err_events[3*b]     = ev_corr[b];
    assign err_events[3*b + 1] = ev_uncorr[b];
    assign err_events[3*b + 2] = ev_scrub[b];
  end
  assign err_events[3*NumBanks] = mismatch;

  // ---------------------------------------------------------------- peripherals
  periph_demux i_periph (
    .clk_i, .rst_ni,
    .req_i     (slv_req[NumBanks]),
    .rsp_o     (slv_rsp[NumBanks]),
    .slot_req_o(slot_req),
    .slot_rsp_i(slot_rsp),
    .rom_req_o,
    .rom_rsp_i
  );

  mem_cfg i_mem_cfg (
    .clk_i, .rst_ni,
    .reg_req_i (slot_req[SlotMemCfg]),
    .reg_rsp_o (slot_rsp[SlotMemCfg]),
    .wr_dis_o  (wr_dis),
    .scrub_en_o(scrub_en)
  );

  err_monitor #(.NumSrc(NumErr)) i_err_mon (
    .clk_i, .rst_ni,
    .reg_req_i(slot_req[SlotErrMon]),
    .reg_rsp_o(slot_rsp[SlotErrMon]),
    .event_i  (err_events),
    .err_o
  );

  // pads: GPIO or one of the peripheral functions
  localparam int unsigned NumFunc = 9;
  logic [NumPads-1:0] gpio_in, gpio_out, gpio_oe;
  logic [NumFunc-1:0] alt_in, alt_out, alt_oe;
  logic       uart_tx, qspi_sck, qspi_csn;
  logic [3:0] qspi_sd_o, qspi_sd_oe;

  always_comb begin
    alt_out    = '0;
    alt_oe     = '0;
    alt_out[0] = uart_tx;    alt_oe[0] = 1'b1;
    alt_out[2] = qspi_sck;   alt_oe[2] = 1'b1;
    alt_out[3] = qspi_csn;   alt_oe[3] = 1'b1;
    alt_out[7:4] = qspi_sd_o;
    alt_oe[7:4]  = qspi_sd_oe;
    alt_out[8] = err_o;      alt_oe[8] = 1'b1;
  end

  gpio #(.Width(NumPads)) i_gpio (
    .clk_i, .rst_ni,
    .reg_req_i (slot_req[SlotGpio]),
    .reg_rsp_o (slot_rsp[SlotGpio]),
    .gpio_in_i (gpio_in),
    .gpio_out_o(gpio_out),
    .gpio_oe_o (gpio_oe),
    .irq_o     (gpio_irq)
  );

  pad_mux #(.NumPads(NumPads), .NumFunc(NumFunc), .FuncInIdle(NumFunc'(2))) i_pad_mux (
    .clk_i, .rst_ni,
    .reg_req_i (slot_req[SlotPadMux]),
    .reg_rsp_o (slot_rsp[SlotPadMux]),
    .gpio_out_i(gpio_out),
    .gpio_oe_i (gpio_oe),
    .gpio_in_o (gpio_in),
    .func_out_i(alt_out),
    .func_oe_i (alt_oe),
    .func_in_o (alt_in),
    .pad_in_i,
    .pad_out_o,
    .pad_oe_o
  );

  udma i_udma (
    .clk_i, .rst_ni,
    .reg_req_i   (slot_req[SlotUdma]),
    .reg_rsp_o   (slot_rsp[SlotUdma]),
    .rx_req_o    (mst_req[2*NumCores]),
    .rx_rsp_i    (mst_rsp[2*NumCores]),
    .tx_req_o    (mst_req[2*NumCores + 1]),
    .tx_rsp_i    (mst_rsp[2*NumCores + 1]),
    .rx_done_o   (rx_done),
    .tx_done_o   (tx_done),
    .uart_tx_o   (uart_tx),
    .uart_rx_i   (alt_in[1]),
    .qspi_sck_o  (qspi_sck),
    .qspi_csn_o  (qspi_csn),
    .qspi_sd_o   (qspi_sd_o),
    .qspi_sd_oe_o(qspi_sd_oe),
    .qspi_sd_i   (alt_in[7:4])
  );

  timer i_timer (
    .clk_i, .rst_ni,
    .reg_req_i(slot_req[SlotTimer]),
    .reg_rsp_o(slot_rsp[SlotTimer]),
    .irq_o    (timer_irq)
  );

  assign irq_src = {3'b000, |ev_uncorr, tx_done, rx_done, timer_irq, gpio_irq};

  irq_ctrl #(.NumIrq(8)) i_irq (
    .clk_i, .rst_ni,
    .reg_req_i(slot_req[SlotIrq]),
    .reg_rsp_o(slot_rsp[SlotIrq]),
    .irq_i    (irq_src),
    .irq_o    (core_irq_lines)
  );

endmodule
