// Testbench for pad_mux: random select fields (GPIO, each of the nine
// functions, and unused codes) are written to all 32 pads; for each setting
// the pad outputs and enables, the function inputs (lowest pad given to a
// function wins, idle level otherwise) and the GPIO inputs are compared with
// values worked out here, and the select registers read back.
module tb_pad_mux;
  import trikarenos_pkg::*;
  localparam int NP = 32, NF = 9;
  localparam logic [NF-1:0] Idle = NF'(2);
  logic clk = 0, rst_n = 0;
  tcdm_req_t rq;
  tcdm_rsp_t rr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [NP-1:0] go, goe, gi, pin, pout, poe;
  logic [NF-1:0] fo, foe, fi;
  logic [3:0]    sel [NP];
  pad_mux #(.NumPads(NP), .NumFunc(NF), .FuncInIdle(Idle)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rr),
    .gpio_out_i(go), .gpio_oe_i(goe), .gpio_in_o(gi), .func_out_i(fo), .func_oe_i(foe),
    .func_in_o(fi), .pad_in_i(pin), .pad_out_o(pout), .pad_oe_o(poe));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic reg_access(input bit we, input logic [31:0] off, input logic [31:0] d,
                            output logic [31:0] q);
    @(negedge clk);
    rq = '{req: 1'b1, we: we, be: 4'hF, addr: off, wdata: d};
    @(posedge clk); #1;
    rq.req = 0;
    check(rr.rvalid, "register response one cycle after the request");
    q = rr.rdata;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] q, w;
    logic eo, eoe, ei;
    rq = '0;
    foreach (sel[p]) sel[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      if (t > 0) begin
        for (int r = 0; r < NP / 8; r++) begin
          for (int k = 0; k < 8; k++) begin
            int pick;
            pick = $urandom_range(15);
            // mostly GPIO or a valid function, sometimes an unused code
            sel[8 * r + k] = (pick < 5) ? 4'd0 : (pick < 14) ? 4'($urandom_range(NF, 1)) : 4'($urandom_range(15, NF + 1));
            w[4 * k +: 4] = sel[8 * r + k];
          end
          reg_access(1, 32'(4 * r), w, q);
        end
      end
      go = $urandom; goe = $urandom; fo = NF'($urandom); foe = NF'($urandom); pin = $urandom;
      #1;
      for (int p = 0; p < NP; p++) begin
        if (sel[p] == 0) begin
          eo = go[p]; eoe = goe[p];
        end else if (sel[p] <= NF) begin
          eo = fo[sel[p] - 1]; eoe = foe[sel[p] - 1];
        end else begin
          eo = 0; eoe = 0;
        end
        check(pout[p] == eo && poe[p] == eoe, $sformatf("pad %0d output (select %0d)", p, sel[p]));
      end
      for (int f = 0; f < NF; f++) begin
        ei = Idle[f];
        for (int p = NP - 1; p >= 0; p--) if (sel[p] == f + 1) ei = pin[p];
        check(fi[f] == ei, $sformatf("function %0d input", f));
      end
      check(gi == pin, "GPIO input sees every pad");
      for (int r = 0; r < NP / 8; r++) begin
        reg_access(0, 32'(4 * r), 0, q);
        for (int k = 0; k < 8; k++) check(q[4 * k +: 4] == sel[8 * r + k], "select field reads back");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
