// Memory configuration registers: per-bank write-disable masks and scrubber
// enables.
//
// For bank b, the register at word offset 8*b holds the write-disable bits
// for code bits 31:0 and the one at 8*b+4 those for code bits 38:32 (the
// check bits). A set bit is never written into that bank, which lets software
// inject errors: write a word with the mask set and the stored code word
// disagrees with its data in exactly the masked bits. Offset 0x40 holds one
// scrubber enable bit per bank (all set after reset, so scrubbing runs
// continually). Read data follows one cycle after the request.
//
// The paper describes configuration registers that disable the writing of
// individual bits for software error injection into select banks; the layout
// and the scrubber enable are this design's choice.
module mem_cfg
  import trikarenos_pkg::*;
#(
  parameter int unsigned NBanks = NumBanks
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  tcdm_req_t            reg_req_i,
  output tcdm_rsp_t            reg_rsp_o,
  output logic [CodeWidth-1:0] wr_dis_o [NBanks],
  output logic [NBanks-1:0]    scrub_en_o
);

  logic [CodeWidth-1:0] dis_q [NBanks];
  logic [NBanks-1:0]    scrub_q;
  logic                 rvalid_q;
  logic [31:0]          rdata_q;
  logic [3:0]           bank;
  logic [$clog2(NBanks)-1:0] bi;
  logic                 hi, is_scrub;

  assign bank     = reg_req_i.addr[6:3];
  assign bi       = bank[$clog2(NBanks)-1:0];
  assign hi       = reg_req_i.addr[2];
  assign is_scrub = (reg_req_i.addr[6:2] == 5'h10);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NBanks; b++) dis_q[b] <= '0;
      scrub_q  <= '1;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      rdata_q  <= '0;
      if (reg_req_i.req && reg_req_i.we) begin
        if (is_scrub) scrub_q <= reg_req_i.wdata[NBanks-1:0];
        else if (32'(bank) < NBanks) begin
          if (hi) dis_q[bi][CodeWidth-1:32] <= reg_req_i.wdata[CodeWidth-33:0];
          else    dis_q[bi][31:0]           <= reg_req_i.wdata;
        end
      end
      if (reg_req_i.req && !reg_req_i.we) begin
        if (is_scrub) rdata_q <= 32'(scrub_q);
        else if (32'(bank) < NBanks) begin
          rdata_q <= hi ? 32'(dis_q[bi][CodeWidth-1:32]) : dis_q[bi][31:0];
        end
      end
    end
  end

  assign wr_dis_o         = dis_q;
  assign scrub_en_o       = scrub_q;
  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
