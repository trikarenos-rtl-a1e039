// ECC-protected memory bank: one SRAM bank with its own Hsiao encoder and
// decoder, sub-word write support and a scrubber.
//
// Bus side (trikarenos_pkg TCDM port): a request is granted in the cycle it is
// presented unless the bank is finishing a sub-word write; the response
// (rvalid, corrected rdata) follows one cycle after the grant. The word row is
// addr[RowLsb +: log2(Words)]; the bits below select bank and byte.
//
// Reads: the SRAM output is decoded and corrected in the response cycle, so
// ECC adds no latency. Full-word writes are encoded and written at once.
// Sub-word writes need the rest of the word to form the check bits: the bank
// reads the old word in the grant cycle, then merges, re-encodes and writes it
// in the next cycle. The requester gets its response at the normal time; the
// bank only refuses a new request during that one write-back cycle.
//
// Fault injection: bits set in wr_dis_i are never written, so software can
// plant errors by writing a word whose stored bits then disagree. Error
// events: corr_o (a read or sub-word merge corrected a single error), uncorr_o
// (uncorrectable error seen by a read, merge or scrub), scrub_fix_o (scrubber
// repaired a word). Each is a one-cycle pulse for the error counters.
//
// From the paper: per-bank Hsiao encoder/decoder, same-cycle correction, the
// extra cycle for sub-word writes with an immediate response, a scrubber that
// defers to external accesses, write-disable bits for error injection. This
// design's own: the exact cycle sequence and which access has priority when.
module ecc_bank
  import trikarenos_pkg::*;
#(
  parameter int unsigned Words  = BankWords,
  parameter int unsigned RowLsb = 5,
  localparam int unsigned AddrW = $clog2(Words)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  tcdm_req_t            req_i,
  output tcdm_rsp_t            rsp_o,
  input  logic [CodeWidth-1:0] wr_dis_i,
  input  logic                 scrub_en_i,
  output logic                 corr_o,
  output logic                 uncorr_o,
  output logic                 scrub_fix_o
);

  typedef enum logic [1:0] {RdNone, RdBus, RdRmw, RdScrub} rd_kind_e;

  // state of the access issued in the previous cycle
  rd_kind_e         kind_q;
  logic             resp_q;
  logic [AddrW-1:0] row_q;
  logic [3:0]       be_q;
  logic [31:0]      wdata_q;

  logic             sram_req, sram_we;
  logic [AddrW-1:0] sram_addr;
  logic [CodeWidth-1:0] sram_wdata, sram_rdata;

  logic [DataWidth-1:0] dec_data;
  logic [CodeWidth-1:0] dec_code, enc_full, enc_merge;
  logic                 dec_single, dec_double;
  logic [DataWidth-1:0] merged;

  logic             scr_req, scr_we, scr_rd_valid;
  logic [AddrW-1:0] scr_addr;
  logic [CodeWidth-1:0] scr_wdata;

  logic rmw_now, ext_now;
  logic [AddrW-1:0] row;

  assign row     = req_i.addr[RowLsb +: AddrW];
  assign rmw_now = (kind_q == RdRmw);
  assign ext_now = req_i.req && !rmw_now;

  hsiao_enc i_enc_full  (.data_i(req_i.wdata), .code_o(enc_full));
  hsiao_enc i_enc_merge (.data_i(merged),      .code_o(enc_merge));
  hsiao_dec i_dec (
    .code_i      (sram_rdata),
    .data_o      (dec_data),
    .code_o      (dec_code),
    .single_err_o(dec_single),
    .double_err_o(dec_double)
  );

  always_comb begin
    for (int b = 0; b < 4; b++) begin
      merged[8*b +: 8] = be_q[b] ? wdata_q[8*b +: 8] : dec_data[8*b +: 8];
    end
  end

  mem_scrubber #(.Words(Words), .Width(CodeWidth)) i_scrubber (
    .clk_i,
    .rst_ni,
    .en_i      (scrub_en_i),
    .busy_i    (req_i.req || rmw_now),
    .err_i     (dec_single),
    .code_i    (dec_code),
    .req_o     (scr_req),
    .we_o      (scr_we),
    .addr_o    (scr_addr),
    .wdata_o   (scr_wdata),
    .rd_valid_o(scr_rd_valid),
    .fix_o     (scrub_fix_o)
  );

  // SRAM port: sub-word write-back first, then the bus, then the scrubber
  always_comb begin
    sram_req   = 1'b0;
    sram_we    = 1'b0;
    sram_addr  = row;
    sram_wdata = enc_full;
    if (rmw_now) begin
      sram_req   = 1'b1;
      sram_we    = 1'b1;
      sram_addr  = row_q;
      sram_wdata = enc_merge;
    end else if (req_i.req) begin
      sram_req   = 1'b1;
      sram_we    = req_i.we && (req_i.be == 4'hF);
    end else if (scr_req) begin
      sram_req   = 1'b1;
      sram_we    = scr_we;
      sram_addr  = scr_addr;
      sram_wdata = scr_wdata;
    end
  end

  sram_bank #(.Words(Words), .Width(CodeWidth)) i_sram (
    .clk_i,
    .req_i  (sram_req),
    .we_i   (sram_we),
    .addr_i (sram_addr),
    .wdata_i(sram_wdata),
    .bmask_i(~wr_dis_i),
    .rdata_o(sram_rdata)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      kind_q  <= RdNone;
      resp_q  <= 1'b0;
      row_q   <= '0;
      be_q    <= '0;
      wdata_q <= '0;
    end else begin
      resp_q <= ext_now;
      if (ext_now) begin
        kind_q  <= !req_i.we ? RdBus : (req_i.be == 4'hF) ? RdNone : RdRmw;
        row_q   <= row;
        be_q    <= req_i.be;
        wdata_q <= req_i.wdata;
      end else if (!rmw_now && scr_req && !scr_we) begin
        kind_q <= RdScrub;
      end else begin
        kind_q <= RdNone;
      end
    end
  end

  assign rsp_o.gnt    = !rmw_now;
  assign rsp_o.rvalid = resp_q;
  assign rsp_o.rdata  = (kind_q == RdBus) ? dec_data : '0;

  assign corr_o   = ((kind_q == RdBus) || (kind_q == RdRmw)) && dec_single;
  assign uncorr_o = (kind_q != RdNone) && dec_double;

  // the scrubber's view of whose read is on the decoder must agree with ours
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   scr_rd_valid == (kind_q == RdScrub));

endmodule
