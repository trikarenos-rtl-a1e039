// Hsiao (39,32) SEC-DED encoder.
//
// Appends seven check bits to a 32-bit word: check bit r is the parity of the
// data bits whose check-matrix column (trikarenos_pkg::HsiaoH) has bit r set.
// Purely combinational, so a memory bank can encode in the cycle it writes.
// Code word layout: [31:0] data, [38:32] check bits.
//
// The paper gives the code (Hsiao, 32 data bits to 39 bits, single error
// correction and double error detection, no added latency); the particular
// odd-weight column set is this design's choice, documented in the package.
module hsiao_enc
  import trikarenos_pkg::*;
(
  input  logic [DataWidth-1:0] data_i,
  output logic [CodeWidth-1:0] code_o
);

  logic [EccWidth-1:0] chk;

  always_comb begin
    chk = '0;
    for (int i = 0; i < DataWidth; i++) begin
      if (data_i[i]) chk = chk ^ HsiaoH[i];
    end
  end

  assign code_o = {chk, data_i};

endmodule
