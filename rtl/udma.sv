// I/O DMA (uDMA): moves bytes between the UART or the Quad-SPI and the SRAM
// on its own, through two master ports on the TCDM interconnect.
//
// RX channel (port 0): every byte the selected peripheral receives is written
// to memory at RX_ADDR, RX_ADDR+1, ... as a single-byte write (the ECC bank
// turns it into a read-modify-write). One byte is buffered; the Quad-SPI is
// paused while the buffer is full, the UART is slow enough not to need it.
// TX channel (port 1): reads the word holding the next byte from TX_ADDR on,
// hands the byte to the selected peripheral, and repeats for TX_LEN bytes.
// Each channel raises a one-cycle done event when its length is used up.
//
// Registers (word offsets): 0x00 RX_ADDR, 0x04 RX_LEN (bytes), 0x08 RX_CTRL
// (write: bit 0 start, bit 1 peripheral 0 = UART / 1 = QSPI; read: bit 0
// busy), 0x10 TX_ADDR, 0x14 TX_LEN, 0x18 TX_CTRL (as RX_CTRL), 0x20 UART_DIV
// (bit time - 1 in cycles). Register reads answer one cycle after the request;
// bus ports follow the TCDM handshake of trikarenos_pkg.
//
// The paper says the I/O DMA connects a UART and a Quad-SPI directly to the
// system interconnect, with independent access to the SRAM banks; the two
// channels, one byte per bus access and the register layout are this design's
// choice. The UART and Quad-SPI are instantiated here.
module udma
  import trikarenos_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  tcdm_req_t  reg_req_i,
  output tcdm_rsp_t  reg_rsp_o,
  output tcdm_req_t  rx_req_o,
  input  tcdm_rsp_t  rx_rsp_i,
  output tcdm_req_t  tx_req_o,
  input  tcdm_rsp_t  tx_rsp_i,
  output logic       rx_done_o,
  output logic       tx_done_o,
  // UART pins
  output logic       uart_tx_o,
  input  logic       uart_rx_i,
  // Quad-SPI pins
  output logic       qspi_sck_o,
  output logic       qspi_csn_o,
  output logic [3:0] qspi_sd_o,
  output logic [3:0] qspi_sd_oe_o,
  input  logic [3:0] qspi_sd_i
);

  // ---------------------------------------------------------------- registers
  logic [31:0] rx_addr_q, rx_len_q, tx_addr_q, tx_len_q;
  logic        rx_busy_q, tx_busy_q, rx_sel_q, tx_sel_q;
  logic [15:0] div_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        wr;
  logic [3:0]  idx;

  assign wr  = reg_req_i.req && reg_req_i.we;
  assign idx = reg_req_i.addr[5:2];

  // ---------------------------------------------------------------- peripherals
  logic       u_tx_valid, u_tx_ready, u_rx_valid;
  logic [7:0] u_rx_data;
  logic       q_tx_valid, q_tx_ready, q_rx_valid, q_rx_en, q_cs;
  logic [7:0] q_rx_data;

  // RX byte buffer
  logic       buf_full_q, rx_wait_q;
  logic [7:0] buf_q;
  logic       in_valid;
  logic [7:0] in_data;

  // TX state
  typedef enum logic [1:0] {TxIdle, TxReq, TxWait, TxOut} tx_state_e;
  tx_state_e  tx_state_q;
  logic [7:0] tx_byte_q;
  logic       out_ready;

  assign u_tx_valid = (tx_state_q == TxOut) && !tx_sel_q;
  assign q_tx_valid = (tx_state_q == TxOut) &&  tx_sel_q;
  assign out_ready  = tx_sel_q ? q_tx_ready : u_tx_ready;
  assign q_cs       = (tx_busy_q && tx_sel_q) || (rx_busy_q && rx_sel_q);
  assign q_rx_en    = rx_busy_q && rx_sel_q && !(tx_busy_q && tx_sel_q);

  uart i_uart (
    .clk_i, .rst_ni,
    .div_i     (div_q),
    .tx_valid_i(u_tx_valid),
    .tx_data_i (tx_byte_q),
    .tx_ready_o(u_tx_ready),
    .tx_o      (uart_tx_o),
    .rx_i      (uart_rx_i),
    .rx_valid_o(u_rx_valid),
    .rx_data_o (u_rx_data)
  );

  qspi i_qspi (
    .clk_i, .rst_ni,
    .cs_i      (q_cs),
    .tx_valid_i(q_tx_valid),
    .tx_data_i (tx_byte_q),
    .tx_ready_o(q_tx_ready),
    .rx_en_i   (q_rx_en),
    .rx_ready_i(!buf_full_q),
    .rx_valid_o(q_rx_valid),
    .rx_data_o (q_rx_data),
    .sck_o     (qspi_sck_o),
    .csn_o     (qspi_csn_o),
    .sd_o      (qspi_sd_o),
    .sd_oe_o   (qspi_sd_oe_o),
    .sd_i      (qspi_sd_i)
  );

  assign in_valid = rx_busy_q && (rx_sel_q ? q_rx_valid : u_rx_valid);
  assign in_data  = rx_sel_q ? q_rx_data : u_rx_data;

  // ---------------------------------------------------------------- bus ports
  always_comb begin
    rx_req_o       = '0;
    rx_req_o.req   = buf_full_q && !rx_wait_q;
    rx_req_o.we    = 1'b1;
    rx_req_o.addr  = rx_addr_q;
    rx_req_o.be    = 4'b0001 << rx_addr_q[1:0];
    rx_req_o.wdata = {4{buf_q}};
    tx_req_o       = '0;
    tx_req_o.req   = (tx_state_q == TxReq);
    tx_req_o.addr  = {tx_addr_q[31:2], 2'b00};
    tx_req_o.be    = 4'hF;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_addr_q  <= '0;
      rx_len_q   <= '0;
      tx_addr_q  <= '0;
      tx_len_q   <= '0;
      rx_busy_q  <= 1'b0;
      tx_busy_q  <= 1'b0;
      rx_sel_q   <= 1'b0;
      tx_sel_q   <= 1'b0;
      div_q      <= 16'd15;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
      buf_full_q <= 1'b0;
      rx_wait_q  <= 1'b0;
      buf_q      <= '0;
      tx_state_q <= TxIdle;
      tx_byte_q  <= '0;
      rx_done_o  <= 1'b0;
      tx_done_o  <= 1'b0;
    end else begin
      rvalid_q  <= reg_req_i.req;
      rx_done_o <= 1'b0;
      tx_done_o <= 1'b0;

      // RX channel: buffer -> memory
      if (in_valid && !buf_full_q) begin
        buf_q      <= in_data;
        buf_full_q <= 1'b1;
      end
      if (rx_req_o.req && rx_rsp_i.gnt) rx_wait_q <= 1'b1;
      if (rx_wait_q && rx_rsp_i.rvalid) begin
        rx_wait_q  <= 1'b0;
        buf_full_q <= 1'b0;
        rx_addr_q  <= rx_addr_q + 1'b1;
        rx_len_q   <= rx_len_q - 1'b1;
        if (rx_len_q == 32'd1) begin
          rx_busy_q <= 1'b0;
          rx_done_o <= 1'b1;
        end
      end

      // TX channel: memory -> peripheral
      unique case (tx_state_q)
        TxIdle: if (tx_busy_q) tx_state_q <= (tx_len_q == '0) ? TxIdle : TxReq;
        TxReq:  if (tx_rsp_i.gnt) tx_state_q <= TxWait;
        TxWait: if (tx_rsp_i.rvalid) begin
          tx_byte_q  <= tx_rsp_i.rdata[8*tx_addr_q[1:0] +: 8];
          tx_state_q <= TxOut;
        end
        TxOut: if (out_ready) begin
          tx_addr_q  <= tx_addr_q + 1'b1;
          tx_len_q   <= tx_len_q - 1'b1;
          tx_state_q <= TxIdle;
          if (tx_len_q == 32'd1) begin
            tx_busy_q <= 1'b0;
            tx_done_o <= 1'b1;
          end
        end
        default: tx_state_q <= TxIdle;
      endcase

      // register writes (start bits win over the channel's own updates)
      if (wr) begin
        unique case (idx)
          4'h0: rx_addr_q <= reg_req_i.wdata;
          4'h1: rx_len_q  <= reg_req_i.wdata;
          4'h2: begin
            rx_sel_q  <= reg_req_i.wdata[1];
            rx_busy_q <= reg_req_i.wdata[0] && (rx_len_q != '0);
          end
          4'h4: tx_addr_q <= reg_req_i.wdata;
          4'h5: tx_len_q  <= reg_req_i.wdata;
          4'h6: begin
            tx_sel_q  <= reg_req_i.wdata[1];
            tx_busy_q <= reg_req_i.wdata[0] && (tx_len_q != '0);
          end
          4'h8: div_q <= reg_req_i.wdata[15:0];
          default: ;
        endcase
      end
      rdata_q <= '0;
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (idx)
          4'h0:    rdata_q <= rx_addr_q;
          4'h1:    rdata_q <= rx_len_q;
          4'h2:    rdata_q <= {30'b0, rx_sel_q, rx_busy_q};
          4'h4:    rdata_q <= tx_addr_q;
          4'h5:    rdata_q <= tx_len_q;
          4'h6:    rdata_q <= {30'b0, tx_sel_q, tx_busy_q};
          4'h8:    rdata_q <= {16'b0, div_q};
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
