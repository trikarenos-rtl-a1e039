// UART transmitter and receiver, 8 data bits, no parity, one stop bit.
//
// The bit time is div_i+1 clock cycles. Transmit: a byte offered with
// tx_valid_i is taken when tx_ready_o is high and sent as start bit, eight
// data bits LSB first and stop bit. Receive: rx_i passes a two-flop
// synchroniser; a falling edge starts a frame, each bit is sampled in the
// middle of its bit time, and a byte with a valid stop bit is delivered with a
// one-cycle rx_valid_o pulse.
//
// The paper only names the UART, reached through the I/O DMA; the frame
// format and the sampling scheme are this design's choice.
module uart (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [15:0] div_i,
  input  logic        tx_valid_i,
  input  logic [7:0]  tx_data_i,
  output logic        tx_ready_o,
  output logic        tx_o,
  input  logic        rx_i,
  output logic        rx_valid_o,
  output logic [7:0]  rx_data_o
);

  // ---------------------------------------------------------------- transmit
  logic [9:0]  tx_sh_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;

  assign tx_ready_o = (tx_bits_q == '0);
  assign tx_o       = (tx_bits_q == '0) ? 1'b1 : tx_sh_q[0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tx_sh_q   <= '1;
      tx_bits_q <= '0;
      tx_cnt_q  <= '0;
    end else if (tx_bits_q == '0) begin
      if (tx_valid_i) begin
        tx_sh_q   <= {1'b1, tx_data_i, 1'b0};
        tx_bits_q <= 4'd10;
        tx_cnt_q  <= div_i;
      end
    end else if (tx_cnt_q == '0) begin
      tx_sh_q   <= {1'b1, tx_sh_q[9:1]};
      tx_bits_q <= tx_bits_q - 1'b1;
      tx_cnt_q  <= div_i;
    end else begin
      tx_cnt_q <= tx_cnt_q - 1'b1;
    end
  end

  // ---------------------------------------------------------------- receive
  logic        rx_s1_q, rx_s2_q;
  logic [3:0]  rx_bits_q;   // 0 idle, else bits still to sample (start..stop)
  logic [15:0] rx_cnt_q;
  logic [8:0]  rx_sh_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_s1_q    <= 1'b1;
      rx_s2_q    <= 1'b1;
      rx_bits_q  <= '0;
      rx_cnt_q   <= '0;
      rx_sh_q    <= '0;
      rx_valid_o <= 1'b0;
      rx_data_o  <= '0;
    end else begin
      rx_s1_q    <= rx_i;
      rx_s2_q    <= rx_s1_q;
      rx_valid_o <= 1'b0;
      if (rx_bits_q == '0) begin
        if (!rx_s2_q) begin
          rx_bits_q <= 4'd10;
          rx_cnt_q  <= {1'b0, div_i[15:1]};  // to the middle of the start bit
        end
      end else if (rx_cnt_q == '0) begin
        rx_cnt_q  <= div_i;
        rx_bits_q <= rx_bits_q - 1'b1;
        if (rx_bits_q == 4'd10) begin
          if (rx_s2_q) rx_bits_q <= '0;       // glitch, not a start bit
        end else if (rx_bits_q == 4'd1) begin
          if (rx_s2_q) begin
            rx_valid_o <= 1'b1;
            rx_data_o  <= rx_sh_q[8:1];
          end
        end else begin
          rx_sh_q <= {rx_s2_q, rx_sh_q[8:1]};
        end
      end else begin
        rx_cnt_q <= rx_cnt_q - 1'b1;
      end
    end
  end

endmodule
