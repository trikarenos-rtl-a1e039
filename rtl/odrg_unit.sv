// On-demand redundancy grouping (ODRG) unit wrapping the three cores.
//
// Two modes, set by the MODE register:
//  * lockstep (soft-error tolerant, the reset default): the instruction and
//    data requests of the three cores are majority-voted and leave through bus
//    port 0 only; the response on port 0 and the interrupt line of core 0 are
//    given to all three cores, so they keep seeing identical inputs. A core
//    whose output differs from the vote is outvoted at once (the error never
//    reaches the bus), its number is latched in STATUS, mismatch_o pulses for
//    the error counters and the resync interrupt is raised to all cores.
//  * performance: every core uses its own instruction and data bus ports and
//    its own interrupt line, and runs independently.
//
// Registers (reg port, word offsets): 0x0 MODE (bit 0: 1 = performance),
// 0x4 STATUS (bit 0: mismatch pending, bits 3:1: cores that disagreed;
// read-only), 0x8 RESYNC (write bit 0: reset the cores), 0xC EVENTS (bit 0:
// number of mode switches into lockstep, low byte; read-only, for testing).
//
// Re-synchronisation: the software handler stores the core state on the stack
// and writes RESYNC; the unit then holds all three cores in reset for
// ResetCycles cycles and clears the pending mismatch, and the cores restart
// from the boot ROM's recovery code that reloads the state. Writing MODE from
// performance back to lockstep does the same, so the cores enter lockstep from
// one common state. Register writes take effect at the end of the cycle; the
// response follows one cycle after the request.
//
// From the paper: voting of the outputs, identical inputs, immediate
// correction, resync by store/reset/reload, performance mode with dedicated
// inputs and memory ports, control registers in the unit. This design's own:
// register layout, reset length, that a mode switch into lockstep resets.
module odrg_unit
  import trikarenos_pkg::*;
#(
  parameter int unsigned ResetCycles = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // core side
  input  tcdm_req_t core_instr_req_i [NumCores],
  output tcdm_rsp_t core_instr_rsp_o [NumCores],
  input  tcdm_req_t core_data_req_i  [NumCores],
  output tcdm_rsp_t core_data_rsp_o  [NumCores],
  output logic [NumCores-1:0] core_irq_o,
  output logic                core_resync_irq_o,
  output logic [NumCores-1:0] core_rst_o,
  // interconnect side
  output tcdm_req_t bus_instr_req_o  [NumCores],
  input  tcdm_rsp_t bus_instr_rsp_i  [NumCores],
  output tcdm_req_t bus_data_req_o   [NumCores],
  input  tcdm_rsp_t bus_data_rsp_i   [NumCores],
  input  logic [NumCores-1:0] irq_i,
  // configuration registers
  input  tcdm_req_t reg_req_i,
  output tcdm_rsp_t reg_rsp_o,
  // status
  output logic      lockstep_o,
  output logic      mismatch_o
);

  localparam int unsigned ReqW = $bits(tcdm_req_t);
  localparam int unsigned CntW = $clog2(ResetCycles + 1);

  logic            perf_q;
  logic            pending_q;
  logic [2:0]      faulty_q;
  logic [CntW-1:0] rst_cnt_q;
  logic [7:0]      lock_entries_q;
  logic            rvalid_q;
  logic [31:0]     rdata_q;

  logic [ReqW-1:0] instr_in [3], data_in [3];
  logic [ReqW-1:0] instr_vote, data_vote;
  logic [2:0]      instr_mm, data_mm, mm;
  logic            in_reset;

  for (genvar c = 0; c < 3; c++) begin : g_in
    assign instr_in[c] = core_instr_req_i[c];
    assign data_in[c]  = core_data_req_i[c];
  end

  tmr_voter #(.Width(ReqW)) i_vote_instr (
    .in_i(instr_in), .out_o(instr_vote), .mismatch_o(instr_mm));
  tmr_voter #(.Width(ReqW)) i_vote_data (
    .in_i(data_in), .out_o(data_vote), .mismatch_o(data_mm));

  assign in_reset   = (rst_cnt_q != '0);
  assign mm         = (instr_mm | data_mm) & {3{!perf_q && !in_reset}};
  assign mismatch_o = |mm;
  assign lockstep_o = !perf_q;

  // routing
  always_comb begin
    for (int c = 0; c < NumCores; c++) begin
      if (perf_q) begin
        bus_instr_req_o[c]  = core_instr_req_i[c];
        bus_data_req_o[c]   = core_data_req_i[c];
        core_instr_rsp_o[c] = bus_instr_rsp_i[c];
        core_data_rsp_o[c]  = bus_data_rsp_i[c];
        core_irq_o[c]       = irq_i[c];
      end else begin
        bus_instr_req_o[c]  = (c == 0) ? tcdm_req_t'(instr_vote) : '0;
        bus_data_req_o[c]   = (c == 0) ? tcdm_req_t'(data_vote)  : '0;
        core_instr_rsp_o[c] = bus_instr_rsp_i[0];
        core_data_rsp_o[c]  = bus_data_rsp_i[0];
        core_irq_o[c]       = irq_i[0];
      end
      if (in_reset) begin
        bus_instr_req_o[c].req = 1'b0;
        bus_data_req_o[c].req  = 1'b0;
      end
    end
  end

  assign core_resync_irq_o = pending_q;
  assign core_rst_o        = {NumCores{in_reset}};

  // registers
  logic wr, rd;
  assign wr = reg_req_i.req &&  reg_req_i.we;
  assign rd = reg_req_i.req && !reg_req_i.we;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      perf_q         <= 1'b0;
      pending_q      <= 1'b0;
      faulty_q       <= '0;
      rst_cnt_q      <= '0;
      lock_entries_q <= '0;
      rvalid_q       <= 1'b0;
      rdata_q        <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      if (in_reset) rst_cnt_q <= rst_cnt_q - 1'b1;
      if (|mm) begin
        pending_q <= 1'b1;
        faulty_q  <= faulty_q | mm;
      end
      if (wr) begin
        unique case (reg_req_i.addr[3:2])
          2'd0: begin
            if (perf_q && !reg_req_i.wdata[0]) begin
              rst_cnt_q      <= CntW'(ResetCycles);
              lock_entries_q <= lock_entries_q + 1'b1;
            end
            perf_q <= reg_req_i.wdata[0];
          end
          2'd2: begin
            if (reg_req_i.wdata[0]) begin
              rst_cnt_q <= CntW'(ResetCycles);
              pending_q <= 1'b0;
              faulty_q  <= '0;
            end
          end
          default: ;
        endcase
      end
      if (rd) begin
        unique case (reg_req_i.addr[3:2])
          2'd0:    rdata_q <= {31'b0, perf_q};
          2'd1:    rdata_q <= {28'b0, faulty_q, pending_q};
          2'd3:    rdata_q <= {24'b0, lock_entries_q};
          default: rdata_q <= '0;
        endcase
      end else begin
        rdata_q <= '0;
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
