// Pad multiplexer: every pad can be given to its GPIO or to any one of the
// peripheral functions, independently of the other pads.
//
// Each pad has a 4-bit select field: 0 = GPIO (reset value), f+1 = peripheral
// function f (f < NumFunc); other values leave the pad undriven (output
// enable low). The fields are packed eight per register: pad p is at
// register offset 4*(p/8), bits 4*(p%8) +: 4. A pad's output value and output
// enable come from the chosen source. Every pad level is always visible to
// the GPIO input register. A peripheral function's input takes the level of
// the lowest-numbered pad given to it, or its inactive level FuncInIdle[f]
// when no pad is (so an unconnected UART receive line idles high). Register
// writes take effect at the end of the cycle; read data follows one cycle
// after the request; the register bus is word-wide (byte enables ignored).
//
// The paper says the pads can independently be multiplexed between the
// different peripherals and GPIOs; the pad count, the 4-bit fields and the
// function numbering (set in the SoC top) are this design's choice.
module pad_mux
  import trikarenos_pkg::*;
#(
  parameter int unsigned        NumPads    = 32,
  parameter int unsigned        NumFunc    = 9,
  parameter logic [NumFunc-1:0] FuncInIdle = '0
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  tcdm_req_t          reg_req_i,
  output tcdm_rsp_t          reg_rsp_o,
  input  logic [NumPads-1:0] gpio_out_i,
  input  logic [NumPads-1:0] gpio_oe_i,
  output logic [NumPads-1:0] gpio_in_o,
  input  logic [NumFunc-1:0] func_out_i,
  input  logic [NumFunc-1:0] func_oe_i,
  output logic [NumFunc-1:0] func_in_o,
  input  logic [NumPads-1:0] pad_in_i,
  output logic [NumPads-1:0] pad_out_o,
  output logic [NumPads-1:0] pad_oe_o
);

  logic [3:0]  sel_q [NumPads];
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic [5:0]  ridx;

  assign ridx = reg_req_i.addr[7:2];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < NumPads; p++) sel_q[p] <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      rdata_q  <= '0;
      for (int p = 0; p < NumPads; p++) begin
        if (int'(ridx) == p / 8) begin
          if (reg_req_i.req && reg_req_i.we) sel_q[p] <= reg_req_i.wdata[4 * (p % 8) +: 4];
          if (reg_req_i.req && !reg_req_i.we) rdata_q[4 * (p % 8) +: 4] <= sel_q[p];
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NumPads; p++) begin
      pad_out_o[p] = 1'b0;
      pad_oe_o[p]  = 1'b0;
      if (sel_q[p] == '0) begin
        pad_out_o[p] = gpio_out_i[p];
        pad_oe_o[p]  = gpio_oe_i[p];
      end
      for (int f = 0; f < NumFunc; f++) begin
        if (int'(sel_q[p]) == f + 1) begin
          pad_out_o[p] = func_out_i[f];
          pad_oe_o[p]  = func_oe_i[f];
        end
      end
    end
    for (int f = 0; f < NumFunc; f++) begin
      func_in_o[f] = FuncInIdle[f];
      for (int p = NumPads - 1; p >= 0; p--) begin
        if (int'(sel_q[p]) == f + 1) func_in_o[f] = pad_in_i[p];
      end
    end
  end

  assign gpio_in_o = pad_in_i;

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
