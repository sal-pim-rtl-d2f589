// s_alu: subarray-level ALU of SAL-PIM.
//
// One S-ALU sits on the global bit-lines (GBLs) of a group of DRAM subarrays.
// Each memory read delivers a 256-bit word of LANES 16-bit fixed-point values
// (operand0). Operand1 comes from the bank-level unit (already arranged as
// element-wise or broadcast by that unit); operand2 is the S-ALU's own
// LANES x 32-bit register file. Four operations are supported, as in the
// paper's operation table:
//   ALU_ADD  reg[l] = (mem[l] <<< shl) + (bank[l] <<< shl)      (src_reg = 0)
//            reg[l] = reg[l] + (mem[l] <<< shl)                  (src_reg = 1,
//            used for the intercept step of linear interpolation)
//   ALU_MUL  reg[l] = mem[l] * bank[l]
//   ALU_MAC  reg[l] = reg[l] + mem[l] * bank[l]
//   ALU_MAX  reg[l] = max(reg[l], mem[l] <<< shl)
// Area is saved with shared MACs: only MACS multiply-add units exist, and a
// word is processed in PASSES = LANES/MACS clock cycles, which the paper
// justifies by the ALU clock (500 MHz) being faster than the same-bank column
// command rate (tCCDL, 250 MHz). With the defaults (16 lanes, 8 MACs) a word
// takes 2 cycles: lanes 0..7 in the cycle `start` is high (taken straight from
// the inputs), lanes 8..15 in the next cycle (from a copy captured at start).
// `done` is high in the last pass; `busy` is high while passes remain after
// the start cycle, and a new `start` must not arrive then (asserted).
// Write-back: wb_data[l] = (reg[l] >>> wb_shamt) truncated to 16 bits, the
// paper's "shifted and truncated by fraction bit" path; the tri-state driver
// onto the GBL is replaced by an ordinary output that the bank multiplexes.
// Own choices: the `shl` alignment and `src_reg` select (the paper lists ADD
// with a bank-register operand but its interpolation flow adds the intercept
// to the product held in the register), the clear input, and wrap-around
// (non-saturating) 32-bit arithmetic.
module s_alu
  import salpim_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned MACS    = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  alu_ctl_t                  ctl,
  input  logic [LANES_P-1:0][DW-1:0] gbl_in,
  input  logic [LANES_P-1:0][DW-1:0] feed,
  input  logic                      clr,
  input  logic                      clr_min,
  output logic                      busy,
  output logic                      done,
  input  logic [4:0]                wb_shamt,
  output logic [LANES_P-1:0][DW-1:0] wb_data
);
  localparam int unsigned PASSES = LANES_P / MACS;
  localparam int unsigned PW     = (PASSES > 1) ? $clog2(PASSES) : 1;

  acc_t                        regs [LANES_P];
  logic [LANES_P-1:0][DW-1:0]  op0_q, op1_q;
  alu_ctl_t                    ctl_q;
  logic [PW-1:0]               pass_q;
  logic                        active_q;

  // Current pass and operand source: the start cycle uses the live inputs.
  logic [PW-1:0]               pass;
  alu_ctl_t                    c;
  logic [LANES_P-1:0][DW-1:0]  op0, op1;
  logic                        run;

  always_comb begin
    run  = start | active_q;
    pass = start ? '0 : pass_q;
    c    = start ? ctl : ctl_q;
    op0  = start ? gbl_in : op0_q;
    op1  = start ? feed : op1_q;
  end

  // The MACS shared multiply-add units.
  acc_t mac_res [MACS];
  always_comb begin
    for (int m = 0; m < MACS; m++) begin
      int unsigned l;
      acc_t a_al, b_al, prod, r, x, y;
      l     = int'(pass) * MACS + m;
      a_al  = acc_t'($signed(op0[l])) <<< c.shl;
      b_al  = acc_t'($signed(op1[l])) <<< c.shl;
      prod  = acc_t'($signed(op0[l])) * acc_t'($signed(op1[l]));
      r     = regs[l];
      x     = (c.op == ALU_ADD || c.op == ALU_MAX) ? a_al : prod;
      unique case (c.op)
        ALU_ADD: y = c.src_reg ? r : b_al;
        ALU_MUL: y = '0;
        default: y = r;  // MAC and MAX read the register
      endcase
      if (c.op == ALU_MAX) mac_res[m] = (a_al > r) ? a_al : r;
      else                 mac_res[m] = x + y;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES_P; l++) regs[l] <= '0;
      op0_q    <= '0;
      op1_q    <= '0;
      ctl_q    <= '0;
      pass_q   <= '0;
      active_q <= 1'b0;
    end else begin
      if (clr) begin
        for (int l = 0; l < LANES_P; l++)
          regs[l] <= clr_min ? {1'b1, {(ACCW-1){1'b0}}} : '0;
      end else if (run) begin
        for (int m = 0; m < MACS; m++) regs[int'(pass) * MACS + m] <= mac_res[m];
      end
      if (start) begin
        op0_q <= gbl_in;
        op1_q <= feed;
        ctl_q <= ctl;
      end
      if (run && int'(pass) != PASSES - 1) begin
        pass_q   <= pass + 1'b1;
        active_q <= 1'b1;
      end else begin
        pass_q   <= '0;
        active_q <= 1'b0;
      end
    end
  end

  assign busy = active_q;
  assign done = run && (int'(pass) == PASSES - 1);

  always_comb
    for (int l = 0; l < LANES_P; l++) wb_data[l] = trunc_word(regs[l], wb_shamt);

  // A new word may only be started once the previous one has left the MACs.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !active_q)
    else $error("s_alu: start while busy");
  initial assert (LANES_P % MACS == 0) else $error("s_alu: LANES must be a multiple of MACS");
endmodule
