`timescale 1ns/1ps
// dram_cells_model: behavioural model of the ordinary DRAM subarray groups
// of one bank (cell arrays, sense amplifiers, row/column decoding), which are
// not part of the RTL. Group g answers mem_req[g] with the 256-bit word at
// (row, col) combinationally, as from an open row, and stores write data at
// the clock edge. Activation and DRAM timing are not modelled. Testbenches
// preload and inspect `cells` hierarchically.
module dram_cells_model
  import salpim_pkg::*;
#(
  parameter int unsigned GROUPS = 4,
  parameter int unsigned ROWS   = 4
) (
  input  logic                  clk,
  input  mem_req_t [GROUPS-1:0] mem_req,
  output vec_t     [GROUPS-1:0] mem_rdata
);
  vec_t cells [GROUPS][ROWS][32];
  int   n_rd = 0, n_wr = 0;

  always_comb
    for (int g = 0; g < GROUPS; g++)
      mem_rdata[g] = cells[g][int'(mem_req[g].row) % ROWS][mem_req[g].col];

  always_ff @(posedge clk)
    for (int g = 0; g < GROUPS; g++) begin
      if (mem_req[g].wr) cells[g][int'(mem_req[g].row) % ROWS][mem_req[g].col] <= mem_req[g].wdata;
      if (mem_req[g].rd) n_rd <= n_rd + 1;
      if (mem_req[g].wr) n_wr <= n_wr + 1;
    end
endmodule
