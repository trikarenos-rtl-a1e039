// Memory scrubber for one ECC-protected bank.
//
// Walks the bank's word addresses in order, one read at a time, on cycles the
// bank has no other access. The read word comes back decoded in the next
// cycle: if it holds a correctable error, the scrubber writes the corrected
// code word back in that cycle and moves on. External accesses always win: a
// busy bank makes the scrubber wait before reading, and one that turns busy
// just as a correction is due makes it drop the write-back and read the same
// address again later (no correction is ever written from stale data). Clean
// and uncorrectable words are skipped.
//
// Interface: en_i starts it; busy_i is high when the bank serves a bus access
// or a sub-word write this cycle; req_o/we_o/addr_o/wdata_o go to the SRAM;
// rd_valid_o marks the cycle whose decoder outputs (err_i, code_i) belong to
// the scrubber's read; fix_o pulses for each word repaired.
//
// The paper says the scrubber continually reads each address, corrects any
// correctable error and defers to external accesses; the read-then-write
// sequence and the idle-cycle policy are this design's choices.
module mem_scrubber #(
  parameter int unsigned Words = 8192,
  parameter int unsigned Width = 39,
  localparam int unsigned AddrW = $clog2(Words)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             en_i,
  input  logic             busy_i,
  input  logic             err_i,
  input  logic [Width-1:0] code_i,
  output logic             req_o,
  output logic             we_o,
  output logic [AddrW-1:0] addr_o,
  output logic [Width-1:0] wdata_o,
  output logic             rd_valid_o,
  output logic             fix_o
);

  logic [AddrW-1:0] addr_q;
  logic             pend_q;   // a scrub read was issued in the previous cycle
  logic             advance;

  always_comb begin
    req_o   = 1'b0;
    we_o    = 1'b0;
    fix_o   = 1'b0;
    advance = 1'b0;
    wdata_o = code_i;
    if (pend_q) begin
      if (err_i) begin
        if (!busy_i) begin
          req_o   = 1'b1;
          we_o    = 1'b1;
          fix_o   = 1'b1;
          advance = 1'b1;
        end
      end else begin
        advance = 1'b1;
      end
    end else if (en_i && !busy_i) begin
      req_o = 1'b1;
    end
  end

  assign addr_o     = addr_q;
  assign rd_valid_o = pend_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      addr_q <= '0;
      pend_q <= 1'b0;
    end else begin
      pend_q <= req_o && !we_o;
      if (advance) addr_q <= (addr_q == AddrW'(Words - 1)) ? '0 : addr_q + 1'b1;
    end
  end

endmodule
