// Behavioural model of one core's bus traffic, used only by the SoC
// testbench (the real cores are not part of this RTL).
//
// It runs the matrix multiplication C = A * B (n x n, 32-bit words) over rows
// row_lo .. row_hi-1 as a stream of bus operations: load A[i][k], load B[k][j]
// (accumulating the product from the returned data), store C[i][j]. With each
// data operation it fetches one instruction word from a small code loop, so
// both ports are busy as on a real core. It follows the TCDM handshake: a
// request is held until granted and the data is taken one cycle later.
//
// Fault tolerance hooks: inject_i corrupts the address this model drives for
// its next data request (its internal state stays right), as a particle strike
// in one core's logic would. When resync_irq_i is seen, the model saves its
// loop state to the stack, writes the ODRG RESYNC register and waits to be
// reset; after any reset it fetches from the boot ROM and, if a saved state
// exists, reloads it from the stack and carries on.
module core_model
  import trikarenos_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,      // power-on reset
  input  logic        core_rst_i,  // reset request from the ODRG unit
  input  logic        start_i,
  input  int unsigned n_i,
  input  int unsigned row_lo_i,
  input  int unsigned row_hi_i,
  input  logic [31:0] a_base_i,
  input  logic [31:0] b_base_i,
  input  logic [31:0] c_base_i,
  input  logic [31:0] stack_i,
  input  logic        inject_i,
  input  logic        resync_irq_i,
  output tcdm_req_t   instr_req_o,
  input  tcdm_rsp_t   instr_rsp_i,
  output tcdm_req_t   data_req_o,
  input  tcdm_rsp_t   data_rsp_i,
  output logic        done_o,
  output logic        idle_o
);

  typedef enum logic [2:0] {Boot, Idle, Compute, Save, Resync, WaitRst, Restore, Done} st_e;

  st_e         st;
  int unsigned i, j, k, ph, acc, a_val, cnt;
  logic        saved;          // a saved state sits on the stack
  logic        corrupt;
  logic        d_busy, d_wait, i_busy, i_wait;
  logic [31:0] pc;
  tcdm_req_t   dreq;
  logic        need, res_v;
  logic [31:0] res_d;

  localparam logic [31:0] CodeBase = SramBase;
  localparam logic [31:0] OdrgRegs = PeriphRegs + 32'h3000;

  assign idle_o = (st == Idle) || (st == Done);
  assign done_o = (st == Done);

  always_comb begin
    data_req_o = dreq;
    data_req_o.req = d_busy;
    if (corrupt) data_req_o.addr = dreq.addr ^ 32'h0000_0100;
    instr_req_o = '0;
    instr_req_o.req  = i_busy;
    instr_req_o.addr = pc;
    instr_req_o.be   = 4'hF;
  end

  // next data operation of the current state
  function automatic tcdm_req_t next_op();
    tcdm_req_t r;
    r = '0;
    r.be = 4'hF;
    unique case (st)
      Compute: begin
        if (ph == 0)      r.addr = a_base_i + 4 * (i * n_i + k);
        else if (ph == 1) r.addr = b_base_i + 4 * (k * n_i + j);
        else begin
          r.addr = c_base_i + 4 * (i * n_i + j);
          r.we = 1'b1;
          r.wdata = acc;
        end
      end
      Save: begin
        r.we = 1'b1;
        r.addr = stack_i + 4 * cnt;
        r.wdata = (cnt == 0) ? i : (cnt == 1) ? j : (cnt == 2) ? k : (cnt == 3) ? ph :
                  (cnt == 4) ? acc : a_val;
      end
      Resync: begin
        r.we = 1'b1;
        r.addr = OdrgRegs + 32'h8;
        r.wdata = 32'd1;
      end
      Restore: r.addr = stack_i + 4 * cnt;
      default: ;
    endcase
    return r;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni || core_rst_i) begin
      st <= Boot;
      i <= 0; j <= 0; k <= 0; ph <= 0; acc <= 0; a_val <= 0; cnt <= 0;
      d_busy <= 0; d_wait <= 0; i_busy <= 1; i_wait <= 0;
      need <= 0; res_v <= 0; res_d <= '0;
      pc <= BootAddr;
      dreq <= '0;
      corrupt <= 0;
      if (!rst_ni) saved <= 0;
    end else begin
      logic d_got, i_got, got;
      logic [31:0] rdata;
      d_got = d_wait && data_rsp_i.rvalid;
      i_got = i_wait && instr_rsp_i.rvalid;
      got   = d_got || res_v;
      rdata = d_got ? data_rsp_i.rdata : res_d;
      if (inject_i) corrupt <= 1;
      if (d_busy && data_rsp_i.gnt) begin d_busy <= 0; d_wait <= 1; corrupt <= 0; end
      if (d_got) begin d_wait <= 0; res_v <= 1; res_d <= data_rsp_i.rdata; end
      if (i_busy && instr_rsp_i.gnt) begin i_busy <= 0; i_wait <= 1; end
      if (i_got) i_wait <= 0;

      if (need) begin
        // issue the next operation from the state settled in the last cycle
        dreq   <= next_op();
        d_busy <= 1;
        i_busy <= 1;
        pc     <= (pc >= CodeBase && pc < CodeBase + 60) ? pc + 4 : CodeBase;
        need   <= 0;
      end else if (!d_busy && !i_busy && (!d_wait || d_got) && (!i_wait || i_got)) begin
        logic issue;
        st_e  nst;
        issue = 0;
        nst   = st;
        res_v <= 0;
        unique case (st)
          Boot: begin
            if (saved) begin nst = Restore; cnt <= 0; issue = 1; end
            else nst = Idle;
          end
          Idle: if (start_i) begin
            i <= row_lo_i; j <= 0; k <= 0; ph <= 0; acc <= 0;
            nst = (row_lo_i < row_hi_i) ? Compute : Done;
            issue = (row_lo_i < row_hi_i);
          end
          Compute: begin
            if (got) begin
              if (ph == 0) begin a_val <= rdata; ph <= 1; end
              else if (ph == 1) begin
                acc <= acc + a_val * rdata;
                if (k + 1 == n_i) ph <= 2; else begin ph <= 0; k <= k + 1; end
              end else begin
                ph <= 0; k <= 0; acc <= 0;
                if (j + 1 == n_i) begin
                  j <= 0;
                  i <= i + 1;
                  if (i + 1 == row_hi_i) nst = Done;
                end else j <= j + 1;
              end
            end
            if (nst == Compute) begin
              if (resync_irq_i) begin nst = Save; cnt <= 0; end
              issue = 1;
            end
          end
          Save: begin
            if (got) cnt <= cnt + 1;
            if (got && cnt == 5) begin nst = Resync; saved <= 1; end
            issue = 1;
          end
          Resync: if (got) nst = WaitRst; else issue = 1;
          WaitRst: ;
          Restore: begin
            if (got) begin
              unique case (cnt)
                0: i <= rdata;
                1: j <= rdata;
                2: k <= rdata;
                3: ph <= rdata;
                4: acc <= rdata;
                default: a_val <= rdata;
              endcase
              cnt <= cnt + 1;
              if (cnt == 5) begin nst = Compute; saved <= 0; end
            end
            issue = 1;
          end
          Done: if (!start_i) nst = Idle;
          default: ;
        endcase
        st <= nst;
        if (issue) need <= 1;
      end
    end
  end

endmodule
