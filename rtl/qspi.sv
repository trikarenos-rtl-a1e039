// Quad-SPI master, byte-stream side for the I/O DMA.
//
// While cs_i is high, or a byte is still in flight, the chip select pad is
// driven low. Transmit: a byte taken
// from tx_data_i (tx_valid_i/tx_ready_o handshake) leaves on the four data
// lines as two nibbles, high nibble first; each nibble is set up while SCK is
// low and sampled by the device on the rising SCK edge, so SCK runs at half
// the clock and a byte takes four cycles. Receive: with rx_en_i high and no
// byte to send, the master clocks SCK with its data lines released and takes
// a nibble from sd_i at every rising edge; each second nibble completes a byte
// delivered with a one-cycle rx_valid_o pulse. rx_ready_i low pauses SCK so a
// full receive buffer never loses data.
//
// The paper only names the Quad-SPI peripheral; the SPI mode (0), nibble order
// and the fixed SCK rate are this design's choice. Commands and addresses for a
// flash device are plain transmit bytes.
module qspi (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       cs_i,
  input  logic       tx_valid_i,
  input  logic [7:0] tx_data_i,
  output logic       tx_ready_o,
  input  logic       rx_en_i,
  input  logic       rx_ready_i,
  output logic       rx_valid_o,
  output logic [7:0] rx_data_o,
  output logic       sck_o,
  output logic       csn_o,
  output logic [3:0] sd_o,
  output logic [3:0] sd_oe_o,
  input  logic [3:0] sd_i
);

  typedef enum logic [1:0] {Idle, Tx, Rx} state_e;

  state_e     state_q;
  logic [1:0] phase_q;     // 0: hi nibble low SCK, 1: high SCK, 2: lo nibble, 3: high
  logic [7:0] sh_q;

  assign csn_o      = !(cs_i || state_q != Idle);
  assign tx_ready_o = (state_q == Idle) && cs_i;
  assign sck_o      = (state_q != Idle) && phase_q[0];
  assign sd_oe_o    = (state_q == Tx) ? 4'hF : 4'h0;
  assign sd_o       = (state_q == Tx) ? (phase_q[1] ? sh_q[3:0] : sh_q[7:4]) : 4'h0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Idle;
      phase_q    <= '0;
      sh_q       <= '0;
      rx_valid_o <= 1'b0;
      rx_data_o  <= '0;
    end else begin
      rx_valid_o <= 1'b0;
      unique case (state_q)
        Idle: begin
          phase_q <= '0;
          if (cs_i && tx_valid_i) begin
            state_q <= Tx;
            sh_q    <= tx_data_i;
          end else if (cs_i && rx_en_i && rx_ready_i) begin
            state_q <= Rx;
          end
        end
        Tx: begin
          phase_q <= phase_q + 1'b1;
          if (phase_q == 2'd3) state_q <= Idle;
        end
        Rx: begin
          phase_q <= phase_q + 1'b1;
          if (phase_q[0]) sh_q <= {sh_q[3:0], sd_i};
          if (phase_q == 2'd3) begin
            state_q    <= Idle;
            rx_valid_o <= 1'b1;
            rx_data_o  <= {sh_q[3:0], sd_i};
          end
        end
        default: state_q <= Idle;
      endcase
    end
  end

endmodule
