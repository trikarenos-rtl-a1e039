// TCDM interconnect: a single-cycle crossbar from the SoC's bus masters to the
// eight word-interleaved SRAM banks and the peripheral port.
//
// Address decode: a request inside the SRAM window goes to bank
// addr[2 +: log2(NumBanks)], so consecutive 32-bit words fall into consecutive
// banks and masters streaming through memory spread over all banks. Anything
// else goes to the peripheral port (the last slave), whose decoder answers
// unmapped addresses itself. Each slave has its own round-robin arbiter: among
// the masters requesting it, the first at or after a rotating pointer wins,
// and the pointer moves past the winner whenever the slave grants. A master
// that loses, or whose slave refuses (an ECC bank in its sub-word write-back
// cycle), sees gnt low and must hold its request. The response of a granted
// request arrives exactly one cycle later; the interconnect remembers which
// master each slave served and routes rvalid/rdata back.
//
// The paper states that cores, uDMA and JTAG reach eight word-interleaved
// banks through this interconnect; the arbitration policy and latency are the
// design's own choice (the usual TCDM behaviour).
module tcdm_interconnect
  import trikarenos_pkg::*;
#(
  parameter int unsigned NumMasters = 9,
  parameter int unsigned NBanks     = NumBanks,
  parameter int unsigned MemSize    = MemBytes,
  localparam int unsigned NumSlaves = NBanks + 1,
  localparam int unsigned MstW      = $clog2(NumMasters),
  localparam int unsigned SlvW      = $clog2(NumSlaves)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t mst_req_i [NumMasters],
  output tcdm_rsp_t mst_rsp_o [NumMasters],
  output tcdm_req_t slv_req_o [NumSlaves],
  input  tcdm_rsp_t slv_rsp_i [NumSlaves]
);

  logic [SlvW-1:0] tgt     [NumMasters];
  logic [MstW-1:0] sel     [NumSlaves];
  logic            any_req [NumSlaves];
  logic [MstW-1:0] ptr_q   [NumSlaves];
  logic [MstW-1:0] rsel_q  [NumSlaves];

  // address decode
  always_comb begin
    for (int m = 0; m < NumMasters; m++) begin
      if (mst_req_i[m].addr >= SramBase && mst_req_i[m].addr < SramBase + MemSize)
        tgt[m] = SlvW'(mst_req_i[m].addr[2 +: $clog2(NBanks)]);
      else
        tgt[m] = SlvW'(NBanks);
    end
  end

  // round-robin selection per slave: the lowest requesting master at or above
  // the pointer wins; if there is none, the lowest requesting master at all
  always_comb begin
    for (int s = 0; s < NumSlaves; s++) begin
      logic [NumMasters-1:0] rv;
      logic                  hi_found;
      logic [MstW-1:0]       hi_sel, lo_sel;
      rv       = '0;
      hi_found = 1'b0;
      hi_sel   = '0;
      lo_sel   = '0;
      for (int m = 0; m < NumMasters; m++) begin
        rv[m] = mst_req_i[m].req && tgt[m] == SlvW'(s);
      end
      for (int m = NumMasters - 1; m >= 0; m--) begin
        if (rv[m]) lo_sel = MstW'(m);
        if (rv[m] && MstW'(m) >= ptr_q[s]) begin
          hi_found = 1'b1;
          hi_sel   = MstW'(m);
        end
      end
      any_req[s]       = |rv;
      sel[s]           = hi_found ? hi_sel : lo_sel;
      slv_req_o[s]     = mst_req_i[sel[s]];
      slv_req_o[s].req = any_req[s];
    end
  end

  // grants and responses back to the masters
  always_comb begin
    for (int m = 0; m < NumMasters; m++) begin
      mst_rsp_o[m] = '0;
      for (int s = 0; s < NumSlaves; s++) begin
        if (any_req[s] && sel[s] == MstW'(m) && slv_rsp_i[s].gnt)
          mst_rsp_o[m].gnt = 1'b1;
        if (slv_rsp_i[s].rvalid && rsel_q[s] == MstW'(m)) begin
          mst_rsp_o[m].rvalid = 1'b1;
          mst_rsp_o[m].rdata  = mst_rsp_o[m].rdata | slv_rsp_i[s].rdata;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < NumSlaves; s++) begin
        ptr_q[s]  <= '0;
        rsel_q[s] <= '0;
      end
    end else begin
      for (int s = 0; s < NumSlaves; s++) begin
        if (any_req[s] && slv_rsp_i[s].gnt) begin
          rsel_q[s] <= sel[s];
          ptr_q[s]  <= (int'(sel[s]) == NumMasters - 1) ? '0 : sel[s] + 1'b1;
        end
      end
    end
  end

  // handshake rule: a request that was not granted and is still raised in the
  // next cycle keeps its address (a master may withdraw it only when reset)
  for (genvar m = 0; m < NumMasters; m++) begin : g_hs
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_req_i[m].req && !mst_rsp_o[m].gnt ##1 mst_req_i[m].req |->
        $stable(mst_req_i[m].addr) && $stable(mst_req_i[m].we))
      else $error("master %0d changed an ungranted request", m);
  end

endmodule
