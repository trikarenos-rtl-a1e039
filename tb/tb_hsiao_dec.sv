// Testbench for hsiao_dec: code words built here from an independent encoder,
// then hit with no error, every single-bit error (data and check bits), random
// double errors. Checks: data corrected for zero and one error, the corrected
// code word equals the clean one, single_err/double_err flags as expected
// (double errors always detected, never miscorrected as single).
module tb_hsiao_dec;
  logic [38:0] code_in, code_out;
  logic [31:0] data;
  logic        se, de;
  int checks = 0, failures = 0;

  hsiao_dec dut (.code_i(code_in), .data_o(data), .code_o(code_out),
                 .single_err_o(se), .double_err_o(de));

  logic [6:0] col [32];

  function automatic logic [38:0] enc(input logic [31:0] d);
    logic [6:0] c = '0;
    for (int i = 0; i < 32; i++) if (d[i]) c ^= col[i];
    return {c, d};
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
    logic [31:0] d;
    logic [38:0] clean;
    for (int v = 0; v < 128; v++) begin
      if ($countones(v) == 3 && !(v inside {7, 'h38, 'h43})) begin
        col[n] = 7'(v);
        n++;
      end
    end
    for (int t = 0; t < 20; t++) begin
      d = $urandom;
      clean = enc(d);
      code_in = clean; #1;
      check(data == d && !se && !de && code_out == clean, "clean word");
      for (int b = 0; b < 39; b++) begin
        code_in = clean ^ (39'd1 << b); #1;
        check(data == d && se && !de, $sformatf("single error bit %0d", b));
        check(code_out == clean, $sformatf("corrected code word bit %0d", b));
      end
      for (int k = 0; k < 20; k++) begin
        int b1, b2;
        b1 = $urandom_range(38);
        b2 = $urandom_range(38);
        if (b1 == b2) b2 = (b1 + 1) % 39;
        code_in = clean ^ (39'd1 << b1) ^ (39'd1 << b2); #1;
        check(de && !se, $sformatf("double error %0d %0d", b1, b2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
