// c_alu: channel-level ALU slice (one per pseudo-channel) on the buffer die.
//
// Banks of a channel work in parallel, so their partial results must be
// merged; the C-ALU does this next to the TSVs instead of in the host. It has
// a channel vector register (LANES x 16-bit), a channel scalar register
// (16-bit) and LANES configurable 16-bit adders that work in one of two modes:
//  * accumulate (`acc`): adder l adds word l of the data bus (a bank's read
//    data) to vector word l, so reading the same column of every bank in turn
//    accumulates the banks' partial sums;
//  * reduce-sum (`rsum`): the same adders are rewired as a binary tree
//    (adders 0..L/2-1 on the register pairs, the next L/4 on their results,
//    and so on; L-1 adders in all) whose root is stored in the scalar
//    register.
// `clr` zeroes the vector register. vreg and sreg are outputs so the
// pseudo-channel can broadcast either of them to all banks (the scalar
// replicated to every lane). Every operation completes at the next clock
// edge. Arithmetic wraps modulo 2^16; the paper does not say whether the
// adders saturate. The paper's C-ALU of one channel has two such slices, one
// per pseudo-channel (its C-ALU figure), which is how the top instantiates it.
module c_alu
  import salpim_pkg::*;
#(
  parameter int unsigned LANES_P = LANES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       acc,
  input  logic                       rsum,
  input  logic [LANES_P-1:0][DW-1:0] bus_in,
  output logic [LANES_P-1:0][DW-1:0] vreg,
  output logic [DW-1:0]              sreg
);
  // Tree nodes: 0..L-1 are the register words, L+k is the output of adder k.
  logic [DW-1:0] node [2*LANES_P];
  logic [DW-1:0] add_a [LANES_P];
  logic [DW-1:0] add_b [LANES_P];

  always_comb begin
    for (int l = 0; l < LANES_P; l++) node[l] = vreg[l];
    for (int k = 0; k < LANES_P; k++) begin
      if (rsum) begin
        add_a[k] = (k < LANES_P - 1) ? node[2 * k]     : '0;
        add_b[k] = (k < LANES_P - 1) ? node[2 * k + 1] : '0;
      end else begin
        add_a[k] = vreg[k];
        add_b[k] = bus_in[k];
      end
      node[LANES_P + k] = add_a[k] + add_b[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vreg <= '0;
      sreg <= '0;
    end else if (clr) begin
      vreg <= '0;
    end else if (acc) begin
      for (int l = 0; l < LANES_P; l++) vreg[l] <= node[LANES_P + l];
    end else if (rsum) begin
      sreg <= node[2 * LANES_P - 2];
    end
  end

  initial assert ((LANES_P & (LANES_P - 1)) == 0) else $error("c_alu: LANES must be a power of two");
endmodule
