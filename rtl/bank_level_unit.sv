// bank_level_unit: bank-level register, input feeding and LUT decoding units.
//
// The unit holds the bank-level register (LANES x 16-bit). It serves two uses:
//  * Input feeding for the S-ALUs of its bank. With bcast = 0 word l of the
//    register goes to MAC lane l (element-wise operations); with bcast = 1 the
//    single word `bidx` goes to every lane (MAC for matrix-vector products, so
//    each lane accumulates its own output). These are the paper's two feeding
//    methods that make Q x K^T and S x V possible without a transpose.
//  * LUT addressing for linear interpolation. Each word is arithmetically
//    right-shifted by `shamt` (the paper's right shifters that pick the bit
//    position, i.e. the interpolation range of the function), clamped to the
//    signed section range [-2^(SB-1), 2^(SB-1)-1] and offset to an unsigned
//    section number 0 .. 2^SB-1. Its low 5 bits go to a 5-to-32 column decoder
//    and its top bit to a 1-to-2 sub-sel decoder (16 of each, per the paper's
//    configuration table), giving one-hot column selects per MAT and one-hot
//    LUT-subarray selects per lane.
// Timing: the register loads on the clock edge when `ld` is high; feed and
// the decoder outputs are combinational from the register.
// Own choices: clamping of out-of-range inputs to the first/last section and
// the offset-binary section numbering (the paper gives neither).
module bank_level_unit
  import salpim_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned COLS    = LUT_COLS,
  parameter int unsigned SUBSEL  = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         ld,
  input  logic [LANES_P-1:0][DW-1:0]   ld_data,
  input  logic                         bcast,
  input  logic [3:0]                   bidx,
  input  logic [4:0]                   shamt,
  output logic [LANES_P-1:0][DW-1:0]   breg,
  output logic [LANES_P-1:0][DW-1:0]   feed,
  output logic [LANES_P-1:0][COLS-1:0] col_sel,
  output logic [LANES_P-1:0][SUBSEL-1:0] sub_sel
);
  localparam int unsigned CB = $clog2(COLS);
  localparam int unsigned SBB = $clog2(SUBSEL);
  localparam int unsigned SB = CB + SBB;  // section number bits (6 -> 64 sections)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  breg <= '0;
    else if (ld) breg <= ld_data;
  end

  always_comb begin
    for (int l = 0; l < LANES_P; l++) feed[l] = bcast ? breg[bidx] : breg[l];
  end

  always_comb begin
    for (int l = 0; l < LANES_P; l++) begin
      word_t          sh;
      logic [SB-1:0]  sect;
      sh = $signed(breg[l]) >>> shamt;
      if (sh < -(2 ** (SB - 1)))          sect = '0;
      else if (sh > 2 ** (SB - 1) - 1)    sect = '1;
      else                                sect = {~sh[SB-1], sh[SB-2:0]};
      col_sel[l] = '0;
      col_sel[l][sect[CB-1:0]] = 1'b1;
      sub_sel[l] = '0;
      sub_sel[l][sect[SB-1:CB]] = 1'b1;
    end
  end
endmodule
