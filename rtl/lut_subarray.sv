// lut_subarray: LUT-embedded DRAM subarray (cell array written as a memory).
//
// A subarray of ROWS rows; each row is MATS_P MATs x COLS columns x 16 bits
// (1 KB with the defaults: 16 MATs of 512 bits). `act` copies row `row` into
// the bit-line sense amplifiers (row buffer); `pre` restores the buffer to
// the cells and closes the row. While the row is open, each MAT m drives onto
// its 16 GBL bits the column selected by its own one-hot `col_sel[m]`, so one
// access returns MATS_P words from MATS_P different columns - the property
// that lets all sixteen lanes of the bank-level register look up their
// interpolation coefficients at once. `wr` writes `wdata[m]` into the
// selected column of each MAT of the open row.
// Timing: act, wr and pre take effect at the clock edge; rdata is
// combinational from the row buffer (the sense amplifiers act as a cache).
// DRAM timing (tRCD, tRP, ...) is the controller's to respect and is not
// modelled. What follows the paper: per-MAT column selects, sizes. Own
// choices: the command-level interface and restore-at-precharge behaviour.
module lut_subarray
  import salpim_pkg::*;
#(
  parameter int unsigned ROWS   = 512,
  parameter int unsigned MATS_P = MATS,
  parameter int unsigned COLS   = LUT_COLS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        act,
  input  logic                        pre,
  input  logic [$clog2(ROWS)-1:0]     row,
  input  logic [MATS_P-1:0][COLS-1:0] col_sel,
  input  logic                        wr,
  input  logic [MATS_P-1:0][DW-1:0]   wdata,
  output logic [MATS_P-1:0][DW-1:0]   rdata,
  output logic                        is_open
);
  typedef logic [MATS_P-1:0][COLS-1:0][DW-1:0] row_t;

  row_t                    cells [ROWS];
  row_t                    rowbuf;
  logic [$clog2(ROWS)-1:0] open_row;

  // Column number of each MAT's one-hot select line.
  logic [MATS_P-1:0][$clog2(COLS)-1:0] col_idx;
  always_comb begin
    for (int m = 0; m < MATS_P; m++) begin
      col_idx[m] = '0;
      for (int c = 0; c < COLS; c++)
        if (col_sel[m][c]) col_idx[m] = col_idx[m] | ($clog2(COLS))'(c);
    end
  end

  always_ff @(posedge clk) begin
    if (act)                 rowbuf <= cells[row];
    else if (wr && is_open) begin
      for (int m = 0; m < MATS_P; m++) rowbuf[m][col_idx[m]] <= wdata[m];
    end
    if (pre && is_open)      cells[open_row] <= rowbuf;
    if (act)                 open_row <= row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   is_open <= 1'b0;
    else if (act) is_open <= 1'b1;
    else if (pre) is_open <= 1'b0;
  end

  // Per-MAT column multiplexer.
  always_comb
    for (int m = 0; m < MATS_P; m++) rdata[m] = rowbuf[m][col_idx[m]];

  for (genvar m = 0; m < MATS_P; m++) begin : g_onehot
    assert property (@(posedge clk) disable iff (!rst_n) (wr || is_open) |-> $onehot(col_sel[m]))
      else $error("lut_subarray: column select of MAT %0d is not one-hot", m);
  end

  assert property (@(posedge clk) disable iff (!rst_n) act |-> !is_open)
    else $error("lut_subarray: activate while a row is open");
  assert property (@(posedge clk) disable iff (!rst_n) wr |-> is_open)
    else $error("lut_subarray: write with no open row");
endmodule
