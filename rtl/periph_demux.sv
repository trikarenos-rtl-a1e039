// Peripheral bus decoder behind the interconnect's peripheral port.
//
// Splits the peripheral window into the boot ROM (0x1A00_0000 - 0x1A0F_FFFF,
// forwarded to an external port) and NumSlots register slots of 4 KiB each at
// 0x1A10_0000 (slot = addr[15:12]). Every other address is answered by the
// decoder itself: granted at once, read data zero. Register slots grant in
// the request cycle and answer one cycle later; the boot ROM port passes its
// own grant through. Only the selected slave sees req, so at most one
// response comes back per cycle and the responses are simply ORed.
//
// The paper shows this bus (Fig. 1: the line from the interconnect to the
// uDMA, GPIO, Timer, bootROM, interrupt controller and ODRG unit) without
// details; the map and the decoding are this design's choice.
module periph_demux
  import trikarenos_pkg::*;
#(
  parameter int unsigned NumSlots = NumPeriphSlots
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t req_i,
  output tcdm_rsp_t rsp_o,
  output tcdm_req_t slot_req_o [NumSlots],
  input  tcdm_rsp_t slot_rsp_i [NumSlots],
  output tcdm_req_t rom_req_o,
  input  tcdm_rsp_t rom_rsp_i
);

  logic is_rom, is_regs, is_err;
  logic [3:0] slot;
  logic err_q;

  assign slot    = req_i.addr[15:12];
  assign is_rom  = (req_i.addr[31:20] == BootRomBase[31:20]);
  assign is_regs = (req_i.addr[31:16] == PeriphRegs[31:16]) && (32'(slot) < NumSlots);
  assign is_err  = !is_rom && !is_regs;

  always_comb begin
    rom_req_o     = req_i;
    rom_req_o.req = req_i.req && is_rom;
    for (int s = 0; s < NumSlots; s++) begin
      slot_req_o[s]     = req_i;
      slot_req_o[s].req = req_i.req && is_regs && (slot == 4'(s));
    end
    rsp_o.gnt    = is_rom ? rom_rsp_i.gnt : 1'b1;
    rsp_o.rvalid = rom_rsp_i.rvalid | err_q;
    rsp_o.rdata  = rom_rsp_i.rvalid ? rom_rsp_i.rdata : '0;
    for (int s = 0; s < NumSlots; s++) begin
      rsp_o.rvalid = rsp_o.rvalid | slot_rsp_i[s].rvalid;
      if (slot_rsp_i[s].rvalid) rsp_o.rdata = rsp_o.rdata | slot_rsp_i[s].rdata;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) err_q <= 1'b0;
    else         err_q <= req_i.req && is_err;
  end

endmodule
