// Testbench for tmr_voter: all equal inputs, one corrupted input at each
// position, and fully random triples compared with a per-bit majority count
// worked out here.
module tb_tmr_voter;
  logic [31:0] in [3];
  logic [31:0] out;
  logic [2:0]  mm;
  int checks = 0, failures = 0;

  tmr_voter #(.Width(32)) dut (.in_i(in), .out_o(out), .mismatch_o(mm));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int t = 0; t < 50; t++) begin
      logic [31:0] v;
      v = $urandom;
      for (int f = 0; f < 4; f++) begin
        in[0] = v; in[1] = v; in[2] = v;
        if (f < 3) in[f] = v ^ (32'd1 << $urandom_range(31));
        #1;
        check(out == v, "single corrupted copy outvoted");
        check(mm == ((f < 3) ? 3'(1 << f) : 3'b000), $sformatf("mismatch flags %b", mm));
      end
      in[0] = $urandom; in[1] = $urandom; in[2] = $urandom;
      #1;
      for (int b = 0; b < 32; b++) begin
        int ones;
        ones = int'(in[0][b]) + int'(in[1][b]) + int'(in[2][b]);
        check(out[b] == (ones >= 2), "random majority");
      end
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
