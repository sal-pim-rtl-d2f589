// lut_column_driver: column-select driver of the LUT-embedded subarrays.
//
// In an ordinary DRAM subarray one column-select line set is shared by all
// MATs. The LUT-embedded subarrays instead give each MAT its own column
// select. This driver produces those MATS x COLS one-hot lines:
//  * lut_mode = 0 (conventional memory): the column address `col` is decoded
//    once and driven to every MAT, so a 256-bit word is read or written at
//    one column as usual;
//  * lut_mode = 1 (look-up table): MAT m receives the select decoded from
//    word m of the bank-level register (`data_sel[m]`), so each MAT returns
//    the table entry of its own lane.
// Purely combinational. The choice of a two-way multiplexer in front of the
// MAT column lines follows the paper's description that selects "are
// generated from a column address or data in the bank-level register".
module lut_column_driver
  import salpim_pkg::*;
#(
  parameter int unsigned MATS_P = MATS,
  parameter int unsigned COLS   = LUT_COLS
) (
  input  logic                        lut_mode,
  input  logic [$clog2(COLS)-1:0]     col,
  input  logic [MATS_P-1:0][COLS-1:0] data_sel,
  output logic [MATS_P-1:0][COLS-1:0] col_sel
);
  logic [COLS-1:0] addr_sel;
  always_comb begin
    addr_sel = '0;
    addr_sel[col] = 1'b1;
    for (int m = 0; m < MATS_P; m++) col_sel[m] = lut_mode ? data_sel[m] : addr_sel;
  end
endmodule
