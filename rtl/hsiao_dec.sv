// Hsiao (39,32) SEC-DED decoder with same-cycle correction.
//
// Recomputes the seven check bits from the received data and XORs them with
// the stored ones to form the syndrome. A zero syndrome means no error. A
// syndrome equal to a data column flips that data bit; one of weight one is a
// flipped check bit (data already correct). Any other nonzero syndrome (even
// weight: two errors; odd weight matching no column: three or more) is flagged
// uncorrectable. Combinational: corrected data is valid in the same cycle.
//
// Outputs: data_o (corrected), single_err_o (a correctable error was fixed),
// double_err_o (uncorrectable), code_o (the corrected 39-bit code word, used by
// the scrubber to write it back). Follows the paper's Hsiao SEC-DED code;
// the column set is this design's own (see trikarenos_pkg).
module hsiao_dec
  import trikarenos_pkg::*;
(
  input  logic [CodeWidth-1:0] code_i,
  output logic [DataWidth-1:0] data_o,
  output logic [CodeWidth-1:0] code_o,
  output logic                 single_err_o,
  output logic                 double_err_o
);

  logic [EccWidth-1:0]  syn;
  logic [DataWidth-1:0] flip;
  logic                 chk_err;

  always_comb begin
    syn = code_i[CodeWidth-1:DataWidth];
    for (int i = 0; i < DataWidth; i++) begin
      if (code_i[i]) syn = syn ^ HsiaoH[i];
    end
    flip = '0;
    for (int i = 0; i < DataWidth; i++) begin
      flip[i] = (syn == HsiaoH[i]);
    end
    chk_err = ($countones(syn) == 1);
  end

  assign data_o       = code_i[DataWidth-1:0] ^ flip;
  assign code_o       = {chk_err ? (code_i[CodeWidth-1:DataWidth] ^ syn)
                                 : code_i[CodeWidth-1:DataWidth],
                         data_o};
  assign single_err_o = (|flip) | chk_err;
  assign double_err_o = (syn != '0) & ~single_err_o;

endmodule
