// Single-port synchronous SRAM bank, 39 bits wide, with a per-bit write mask.
//
// One access per cycle: with req_i high and we_i high, the bits of wdata_i
// whose mask bit is set are written to addr_i; with we_i low the word at
// addr_i appears on rdata_o in the next cycle. The per-bit mask lets the ECC
// wrapper suppress the writing of chosen bits for fault injection.
//
// The paper's banks are SRAM macros (eight of them, 32 KiB each, 256 KiB in
// total); here the macro is written as an array, which synthesis maps to a
// memory. The content starts undefined, as in silicon.
module sram_bank #(
  parameter int unsigned Words = 8192,
  parameter int unsigned Width = 39,
  localparam int unsigned AddrW = $clog2(Words)
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AddrW-1:0] addr_i,
  input  logic [Width-1:0] wdata_i,
  input  logic [Width-1:0] bmask_i,
  output logic [Width-1:0] rdata_o
);

  logic [Width-1:0] mem [Words];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int i = 0; i < Width; i++) begin
          if (bmask_i[i]) mem[addr_i][i] <= wdata_i[i];
        end
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
