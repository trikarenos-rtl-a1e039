// Testbench for hsiao_enc: random and corner data words, each code word
// compared with check bits worked out here from the written-down rule (odd
// weight-3 columns in numeric order, minus 0x07, 0x38 and 0x43), and the
// column set checked for the Hsiao properties (distinct, odd weight, rows with
// 13 or 14 ones).
module tb_hsiao_enc;
  logic [31:0] data;
  logic [38:0] code;
  int checks = 0, failures = 0;

  hsiao_enc dut (.data_i(data), .code_o(code));

  logic [6:0] col [32];

  function automatic logic [6:0] ref_chk(input logic [31:0] d);
    logic [6:0] c = '0;
    for (int i = 0; i < 32; i++) if (d[i]) c ^= col[i];
    return c;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int n = 0;
    for (int v = 0; v < 128; v++) begin
      if ($countones(v) == 3 && !(v inside {7, 'h38, 'h43})) begin
        col[n] = 7'(v);
        n++;
      end
    end
    for (int r = 0; r < 7; r++) begin
      int w;
      w = 0;
      for (int i = 0; i < 32; i++) w += col[i][r];
      check(w == 13 || w == 14, $sformatf("row %0d weight %0d", r, w));
    end
    for (int i = 0; i < 40; i++) begin
      case (i)
        0: data = 32'h0;
        1: data = 32'hFFFF_FFFF;
        2: data = 32'h0000_0001;
        3: data = 32'h8000_0000;
        default: data = $urandom;
      endcase
      #1;
      check(code[31:0] == data, "data bits pass through");
      check(code[38:32] == ref_chk(data),
            $sformatf("check bits %h for %h, expected %h", code[38:32], data, ref_chk(data)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
