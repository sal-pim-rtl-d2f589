// lut_selector: connects one LUT-embedded subarray per lane to the GBLs.
//
// When a table has more sections than one row of a MAT can hold, the LUT-
// embedded subarrays are opened together and this selector decides, lane by
// lane, which of them drives the lane's 16 GBL bits. The N_SUB subarrays are
// split in two halves: the first holds slopes (W), the second intercepts (B),
// as in the paper's operation flow where LUT-Sub[0-1] serve the multiply step
// and LUT-Sub[2-3] the add step. `step_b` picks the half; the one-hot
// `sub_sel[l]` from the bank-level unit's sub-sel decoder picks the subarray
// within the half. Purely combinational.
module lut_selector
  import salpim_pkg::*;
#(
  parameter int unsigned N_SUB   = N_LUT_SUB,
  parameter int unsigned LANES_P = LANES
) (
  input  logic [N_SUB-1:0][LANES_P-1:0][DW-1:0] sub_data,
  input  logic [LANES_P-1:0][N_SUB/2-1:0]       sub_sel,
  input  logic                                  step_b,
  output logic [LANES_P-1:0][DW-1:0]            gbl
);
  localparam int unsigned HALF = N_SUB / 2;
  always_comb begin
    for (int l = 0; l < LANES_P; l++) begin
      gbl[l] = '0;
      for (int s = 0; s < HALF; s++)
        if (sub_sel[l][s]) gbl[l] = gbl[l] | sub_data[(step_b ? HALF : 0) + s][l];
    end
  end
endmodule
