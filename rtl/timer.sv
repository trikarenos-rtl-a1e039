// 32-bit timer with compare interrupt.
//
// Registers (word offsets): 0x0 CTRL (bit 0 enable), 0x4 COUNT, 0x8 CMP. While
// enabled COUNT increments every cycle; when it equals CMP the timer pulses
// irq_o for one cycle and restarts from zero, giving a periodic tick of CMP+1
// cycles. Writing COUNT sets it. Read data follows one cycle after the request.
//
// The paper only names the timer; its registers are this design's choice.
module timer
  import trikarenos_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t reg_req_i,
  output tcdm_rsp_t reg_rsp_o,
  output logic      irq_o
);

  logic        en_q, rvalid_q;
  logic [31:0] cnt_q, cmp_q, rdata_q;
  logic        hit, wr;

  assign wr  = reg_req_i.req && reg_req_i.we;
  assign hit = en_q && (cnt_q == cmp_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q     <= 1'b0;
      cnt_q    <= '0;
      cmp_q    <= '1;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      irq_o    <= 1'b0;
    end else begin
      rvalid_q <= reg_req_i.req;
      irq_o    <= hit;
      if (en_q) cnt_q <= hit ? '0 : cnt_q + 1'b1;
      if (wr) begin
        unique case (reg_req_i.addr[3:2])
          2'd0: en_q  <= reg_req_i.wdata[0];
          2'd1: cnt_q <= reg_req_i.wdata;
          2'd2: cmp_q <= reg_req_i.wdata;
          default: ;
        endcase
      end
      rdata_q <= '0;
      if (reg_req_i.req && !reg_req_i.we) begin
        unique case (reg_req_i.addr[3:2])
          2'd0:    rdata_q <= {31'b0, en_q};
          2'd1:    rdata_q <= cnt_q;
          2'd2:    rdata_q <= cmp_q;
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
