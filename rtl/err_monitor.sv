// Error counters and selectable error output.
//
// Every error detector of the SoC delivers a one-cycle event pulse here; each
// of the NumSrc sources has its own saturating 32-bit counter, readable at
// word offset 4*i and cleared by any write to it. The register at 0x100
// selects which source drives err_o, an output that can be routed to a pad so
// that a tester sees errors as they happen. Read data follows one cycle after
// the request.
//
// Source order used by the SoC: for bank b, 3*b = corrected error, 3*b+1 =
// uncorrectable error, 3*b+2 = scrubber repair; then 3*NumBanks = ODRG core
// mismatch. The paper states that all error detectors have dedicated counters
// and selectable output signals; the layout is this design's choice.
module err_monitor
  import trikarenos_pkg::*;
#(
  parameter int unsigned NumSrc = 3 * NumBanks + 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  tcdm_req_t         reg_req_i,
  output tcdm_rsp_t         reg_rsp_o,
  input  logic [NumSrc-1:0] event_i,
  output logic              err_o
);

  localparam int unsigned SelW = $clog2(NumSrc);

  logic [31:0]     cnt_q [NumSrc];
  logic [SelW-1:0] sel_q;
  logic            rvalid_q;
  logic [31:0]     rdata_q;
  logic [6:0]      idx;
  logic            is_sel;

  assign idx    = reg_req_i.addr[8:2];
  assign is_sel = reg_req_i.addr[8];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NumSrc; i++) cnt_q[i] <= '0;
      sel_q    <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      for (int i = 0; i < NumSrc; i++) begin
        if (reg_req_i.req && reg_req_i.we && !is_sel && idx == 7'(i))
          cnt_q[i] <= '0;
        else if (event_i[i] && cnt_q[i] != '1)
          cnt_q[i] <= cnt_q[i] + 1'b1;
      end
      if (reg_req_i.req && reg_req_i.we && is_sel) sel_q <= reg_req_i.wdata[SelW-1:0];
      rdata_q <= '0;
      if (reg_req_i.req && !reg_req_i.we) begin
        if (is_sel)                    rdata_q <= 32'(sel_q);
        else if (32'(idx) < NumSrc)    rdata_q <= cnt_q[idx[SelW-1:0]];
      end
    end
  end

  assign err_o            = (32'(sel_q) < NumSrc) ? event_i[sel_q] : 1'b0;
  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
