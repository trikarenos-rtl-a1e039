// Shared types and constants of the Trikarenos fault-tolerant microcontroller.
//
// The SoC is built around one bus protocol, a TCDM-style request/grant port:
// a master raises req with the address, write enable, byte enables and write
// data, and holds them until gnt is high in the same cycle. Exactly one cycle
// after the grant the slave returns rvalid with rdata (for writes as an
// acknowledge). Every master, every memory bank and every peripheral register
// file in the design uses this pair of structs.
//
// From the paper: three cores with separate instruction and data ports, eight
// word-interleaved SRAM banks with 256 KiB in total, 32-bit words extended to
// 39 bits by a Hsiao SEC-DED code. This design's own choices: the address map
// (modelled on the PULPissimo family the SoC derives from), the one-cycle
// response latency and the exact Hsiao check matrix (built by the rule below).
package trikarenos_pkg;

  // ---------------------------------------------------------------- bus
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } tcdm_rsp_t;

  // ---------------------------------------------------------------- memory
  localparam int unsigned NumCores     = 3;        // paper: three Ibex cores
  localparam int unsigned NumBanks     = 8;        // paper: eight banks
  localparam int unsigned MemBytes     = 256*1024; // paper: 256 KiB
  localparam int unsigned BankWords    = MemBytes / (4 * NumBanks); // 8192
  localparam int unsigned DataWidth    = 32;       // paper: 32-bit word
  localparam int unsigned EccWidth     = 7;        // paper: seven check bits
  localparam int unsigned CodeWidth    = DataWidth + EccWidth; // 39

  // ---------------------------------------------------------------- address map
  // SRAM at 0x1C00_0000; peripherals at 0x1A10_0000 in 4 KiB slots; boot ROM
  // at 0x1A00_0000. Chosen after PULPissimo, not given in the paper.
  localparam logic [31:0] SramBase    = 32'h1C00_0000;
  localparam logic [31:0] PeriphBase  = 32'h1A00_0000; // 16 MiB window
  localparam logic [31:0] BootRomBase = 32'h1A00_0000;
  localparam logic [31:0] PeriphRegs  = 32'h1A10_0000;

  typedef enum logic [2:0] {
    SlotGpio   = 3'd0,
    SlotTimer  = 3'd1,
    SlotIrq    = 3'd2,
    SlotOdrg   = 3'd3,
    SlotMemCfg = 3'd4,
    SlotErrMon = 3'd5,
    SlotUdma   = 3'd6,
    SlotPadMux = 3'd7
  } periph_slot_e;
  localparam int unsigned NumPeriphSlots = 8;

  // Boot address the cores are released to after a reset by the ODRG unit.
  localparam logic [31:0] BootAddr = BootRomBase + 32'h80;

  // ---------------------------------------------------------------- Hsiao code
  // HsiaoH[i] is column i (i < 32) of the check matrix, for data bit i. Hsiao's rule: all
  // columns distinct and of odd weight, as few ones as possible, rows balanced.
  // The 35 weight-3 columns of 7 bits, in increasing numeric order, minus three
  // (0x07, 0x38, 0x43) so that the rows carry 13 or 14 ones each. The check
  // bits use the seven weight-1 columns.
  typedef logic [DataWidth-1:0][EccWidth-1:0] hsiao_matrix_t;

  function automatic hsiao_matrix_t hsiao_matrix();
    int unsigned   n;
    hsiao_matrix_t m;
    n = 0;
    m = '0;
    for (int unsigned v = 0; v < 128; v++) begin
      if ($countones(v[6:0]) == 3 && v != 'h07 && v != 'h38 && v != 'h43) begin
        if (n < DataWidth) m[n] = v[6:0];
        n++;
      end
    end
    return m;
  endfunction

  localparam hsiao_matrix_t HsiaoH = hsiao_matrix();

endpackage
