// Bitwise two-out-of-three majority voter.
//
// Each output bit is the value held by at least two of the three inputs, so a
// single faulty input never reaches the output. mismatch_o[i] is high when
// input i differs from the voted value, which identifies the faulty copy.
// Combinational. The paper's ODRG unit votes the three cores' outputs this way.
module tmr_voter #(
  parameter int unsigned Width = 32
) (
  input  logic [Width-1:0] in_i [3],
  output logic [Width-1:0] out_o,
  output logic [2:0]       mismatch_o
);

  assign out_o = (in_i[0] & in_i[1]) | (in_i[0] & in_i[2]) | (in_i[1] & in_i[2]);

  always_comb begin
    for (int i = 0; i < 3; i++) mismatch_o[i] = (in_i[i] != out_o);
  end

endmodule
