// Interrupt controller.
//
// Collects NumIrq event lines. A high event sets its PENDING bit; the core
// interrupt is raised while any pending bit is also enabled in MASK.
// Registers (word offsets): 0x0 MASK, 0x4 PENDING (read-only), 0x8 CLEAR
// (write 1 to clear pending bits), 0xC SET (write 1 to raise pending bits
// from software). One interrupt output per core: all three see the same
// pending set, each with its own mask (offset 0x10 + 4*core) so that in the
// ODRG performance mode work can be steered to one core. Read data follows
// one cycle after the request.
//
// The paper only names the interrupt controller; the register set and the
// per-core masks are this design's choice.
module irq_ctrl
  import trikarenos_pkg::*;
#(
  parameter int unsigned NumIrq = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  tcdm_req_t           reg_req_i,
  output tcdm_rsp_t           reg_rsp_o,
  input  logic [NumIrq-1:0]   irq_i,
  output logic [NumCores-1:0] irq_o
);

  logic [NumIrq-1:0] pend_q;
  logic [NumIrq-1:0] mask_q [NumCores];
  logic              rvalid_q;
  logic [31:0]       rdata_q;
  logic              wr;
  logic [2:0]        idx;

  assign wr  = reg_req_i.req && reg_req_i.we;
  assign idx = reg_req_i.addr[4:2];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q   <= '0;
      for (int c = 0; c < NumCores; c++) mask_q[c] <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      pend_q   <= pend_q | irq_i;
      if (wr) begin
        if (idx == 3'd0) begin
          for (int c = 0; c < NumCores; c++) mask_q[c] <= reg_req_i.wdata[NumIrq-1:0];
        end else if (idx == 3'd2) begin
          pend_q <= (pend_q & ~reg_req_i.wdata[NumIrq-1:0]) | irq_i;
        end else if (idx == 3'd3) begin
          pend_q <= pend_q | irq_i | reg_req_i.wdata[NumIrq-1:0];
        end else if (idx >= 3'd4 && idx < 3'd4 + 3'(NumCores)) begin
          mask_q[2'(idx - 3'd4)] <= reg_req_i.wdata[NumIrq-1:0];
        end
      end
      rdata_q <= '0;
      if (reg_req_i.req && !reg_req_i.we) begin
        if (idx == 3'd0)      rdata_q <= 32'(mask_q[0]);
        else if (idx == 3'd1) rdata_q <= 32'(pend_q);
        else if (idx >= 3'd4 && idx < 3'd4 + 3'(NumCores)) rdata_q <= 32'(mask_q[2'(idx - 3'd4)]);
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NumCores; c++) irq_o[c] = |(pend_q & mask_q[c]);
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
