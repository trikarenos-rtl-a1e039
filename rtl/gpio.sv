// General purpose I/O block with 32 pins.
//
// Registers (word offsets): 0x0 DIR (1 = pin drives), 0x4 OUT, 0x8 IN (pin
// levels after a two-flop synchroniser, read-only), 0xC IRQ_EN (interrupt on a
// rising edge of the pin), 0x10 IRQ_STATUS (edges seen; write 1 to clear).
// irq_o is high while any enabled edge is pending. Writes take effect at the
// clock edge; read data follows one cycle after the request.
//
// The paper only names the GPIOs (they share the pads with the peripherals);
// the register set is this design's choice.
module gpio
  import trikarenos_pkg::*;
#(
  parameter int unsigned Width = 32
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  tcdm_req_t        reg_req_i,
  output tcdm_rsp_t        reg_rsp_o,
  input  logic [Width-1:0] gpio_in_i,
  output logic [Width-1:0] gpio_out_o,
  output logic [Width-1:0] gpio_oe_o,
  output logic             irq_o
);

  logic [Width-1:0] dir_q, out_q, sync1_q, sync2_q, prev_q, irq_en_q, irq_st_q;
  logic             rvalid_q;
  logic [31:0]      rdata_q;
  logic             wr;

  assign wr = reg_req_i.req && reg_req_i.we;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dir_q    <= '0;
      out_q    <= '0;
      sync1_q  <= '0;
      sync2_q  <= '0;
      prev_q   <= '0;
      irq_en_q <= '0;
      irq_st_q <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      sync1_q  <= gpio_in_i;
      sync2_q  <= sync1_q;
      prev_q   <= sync2_q;
      rvalid_q <= reg_req_i.req;
      irq_st_q <= irq_st_q | (irq_en_q & sync2_q & ~prev_q);
      if (wr) begin
        unique case (reg_req_i.addr[4:2])
          3'd0: dir_q    <= reg_req_i.wdata[Width-1:0];
          3'd1: out_q    <= reg_req_i.wdata[Width-1:0];
          3'd3: irq_en_q <= reg_req_i.wdata[Width-1:0];
          3'd4: irq_st_q <= (irq_st_q & ~reg_req_i.wdata[Width-1:0])
                            | (irq_en_q & sync2_q & ~prev_q);
          default: ;
        endcase
      end
      rdata_q <= '0;
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (reg_req_i.addr[4:2])
          3'd0:    rdata_q <= 32'(dir_q);
          3'd1:    rdata_q <= 32'(out_q);
          3'd2:    rdata_q <= 32'(sync2_q);
          3'd3:    rdata_q <= 32'(irq_en_q);
          3'd4:    rdata_q <= 32'(irq_st_q);
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign gpio_out_o       = out_q;
  assign gpio_oe_o        = dir_q;
  assign irq_o            = |irq_st_q;
  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
