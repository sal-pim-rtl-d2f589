// salpim_bank: one SAL-PIM DRAM bank with its processing logic.
//
// The bank's 64 subarrays are split into P_SUB groups of ordinary subarrays
// (each group with one S-ALU on its segment of the global bit-lines) and four
// LUT-embedded subarrays that hold interpolation tables. The ordinary cell
// arrays are not part of this RTL: group g reaches them through mem_req[g]
// (read/write strobe, row, column, write data) and mem_rdata[g] (the 256-bit
// word of the open row, combinational, as from the sense amplifiers).
//
// GBL segments. With all_grp = 1 the GBL switches between groups are open
// ("floated"): every S-ALU reads its own group in the same cycle, which is
// the subarray-level parallelism of the design (P_SUB words per column
// command instead of one). With all_grp = 0 only group `grp` works. For the
// LUT commands the segments are joined and the LUT selector's output reaches
// S-ALU `grp`, so only one S-ALU interpolates at a time, as the paper states.
//
// Commands (pim_cmd_t, executed when `en` is high; see salpim_pkg):
//   BREG_LD_MEM  bank register <= word read from group grp
//   BREG_LD_BUS  bank register <= channel data bus (host data or C-ALU result)
//   SALU         S-ALU op on memory words and bank-register feed
//   SALU_CLR     clear S-ALU registers          SALU_WB  write them back (>>> shamt)
//   LUT_ACT/PRE  open / close a row in all four LUT-embedded subarrays
//   LUT_WR       write bus data to LUT subarray lsub at column col
//   LUT_MUL      S-ALU grp: reg = W(section of bank reg) * bank reg   (element-wise)
//   LUT_ADD      S-ALU grp: reg = reg + (B(section of bank reg) <<< shl)
//   BANK_RD      rd_data = group grp read word (also for CALU_ACC from a bank)
// A full linear interpolation of 16 values is therefore BREG_LD_MEM, LUT_MUL,
// LUT_ADD, SALU_WB, as in the paper's LUT operation flow. Every command is
// accepted in one cycle; an S-ALU word then takes 2 cycles (see s_alu), so
// commands to the same S-ALU must be at least 2 cycles apart, which the
// column-to-column delay tCCDL (4 ns = 2 cycles of the 500 MHz ALU clock)
// guarantees. The command set and its encoding are this design's own.
module salpim_bank
  import salpim_pkg::*;
#(
  parameter int unsigned P_SUB    = 4,
  parameter int unsigned LUT_ROWS = 512
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  pim_cmd_t              cmd,
  input  vec_t                  bus_in,
  output vec_t                  rd_data,
  output mem_req_t [P_SUB-1:0]  mem_req,
  input  vec_t [P_SUB-1:0]      mem_rdata,
  output logic [P_SUB-1:0]      salu_busy,
  output logic [P_SUB-1:0]      salu_done
);
  localparam int unsigned SUBSEL = N_LUT_SUB / 2;

  cmd_op_e op;
  assign op = en ? cmd.op : CMD_NOP;

  logic [P_SUB-1:0] grp_hit;
  always_comb
    for (int g = 0; g < P_SUB; g++) grp_hit[g] = cmd.all_grp || (int'(cmd.grp) == g);

  // ---------------- bank-level unit ----------------
  vec_t                                  breg, feed, breg_ld_data;
  logic [LANES-1:0][LUT_COLS-1:0]        data_col_sel;
  logic [LANES-1:0][SUBSEL-1:0]          sub_sel;
  logic                                  breg_ld;
  logic                                  lut_op;

  assign lut_op       = (op == CMD_LUT_MUL) || (op == CMD_LUT_ADD);
  assign breg_ld      = (op == CMD_BREG_LD_MEM) || (op == CMD_BREG_LD_BUS);
  assign breg_ld_data = (op == CMD_BREG_LD_BUS) ? bus_in : mem_rdata[cmd.grp];

  bank_level_unit #(.LANES_P(LANES), .COLS(LUT_COLS), .SUBSEL(SUBSEL)) u_blu (
    .clk, .rst_n,
    .ld      (breg_ld),
    .ld_data (breg_ld_data),
    .bcast   (lut_op ? 1'b0 : cmd.alu.bcast),
    .bidx    (cmd.alu.bidx),
    .shamt   (cmd.shamt),
    .breg,
    .feed,
    .col_sel (data_col_sel),
    .sub_sel
  );

  // ---------------- LUT-embedded subarrays ----------------
  logic [MATS-1:0][LUT_COLS-1:0]          lut_col_sel;
  logic [N_LUT_SUB-1:0][LANES-1:0][DW-1:0] lut_rdata;
  logic [N_LUT_SUB-1:0]                   lut_open;
  vec_t                                   lut_gbl;

  lut_column_driver #(.MATS_P(MATS), .COLS(LUT_COLS)) u_coldrv (
    .lut_mode (lut_op),
    .col      (cmd.col),
    .data_sel (data_col_sel),
    .col_sel  (lut_col_sel)
  );

  for (genvar s = 0; s < N_LUT_SUB; s++) begin : g_lut
    lut_subarray #(.ROWS(LUT_ROWS), .MATS_P(MATS), .COLS(LUT_COLS)) u_lut (
      .clk, .rst_n,
      .act     (op == CMD_LUT_ACT),
      .pre     (op == CMD_LUT_PRE),
      .row     (cmd.row[$clog2(LUT_ROWS)-1:0]),
      .col_sel (lut_col_sel),
      .wr      (op == CMD_LUT_WR && int'(cmd.lsub) == s),
      .wdata   (bus_in),
      .rdata   (lut_rdata[s]),
      .is_open (lut_open[s])
    );
  end

  lut_selector #(.N_SUB(N_LUT_SUB), .LANES_P(LANES)) u_lutsel (
    .sub_data (lut_rdata),
    .sub_sel,
    .step_b   (op == CMD_LUT_ADD),
    .gbl      (lut_gbl)
  );

  // ---------------- S-ALUs on the GBL segments ----------------
  vec_t [P_SUB-1:0] wb_data;
  for (genvar g = 0; g < P_SUB; g++) begin : g_salu
    alu_ctl_t ctl;
    logic     start;
    always_comb begin
      ctl = cmd.alu;
      if (op == CMD_LUT_MUL) begin
        ctl.op = ALU_MUL;
      end else if (op == CMD_LUT_ADD) begin
        ctl.op      = ALU_ADD;
        ctl.src_reg = 1'b1;
      end
      start = ((op == CMD_SALU) && grp_hit[g]) || (lut_op && int'(cmd.grp) == g);
    end

    s_alu #(.LANES_P(LANES), .MACS(8)) u_salu (
      .clk, .rst_n,
      .start    (start),
      .ctl      (ctl),
      .gbl_in   (lut_op ? lut_gbl : mem_rdata[g]),
      .feed     (feed),
      .clr      (op == CMD_SALU_CLR && grp_hit[g]),
      .clr_min  (cmd.clr_min),
      .busy     (salu_busy[g]),
      .done     (salu_done[g]),
      .wb_shamt (cmd.shamt),
      .wb_data  (wb_data[g])
    );

    always_comb begin
      mem_req[g].rd    = grp_hit[g] && (op == CMD_SALU ||
                         ((op == CMD_BREG_LD_MEM || op == CMD_BANK_RD ||
                           (op == CMD_CALU_ACC && cmd.bus_src == BUS_BANK)) && int'(cmd.grp) == g));
      mem_req[g].wr    = (op == CMD_SALU_WB) && grp_hit[g];
      mem_req[g].row   = cmd.row;
      mem_req[g].col   = cmd.col;
      mem_req[g].wdata = wb_data[g];
    end
  end

  assign rd_data = mem_rdata[cmd.grp];

  // LUT commands need the tables' row open.
  assert property (@(posedge clk) disable iff (!rst_n) lut_op |-> &lut_open)
    else $error("salpim_bank: LUT operation with the LUT subarrays closed");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (op == CMD_SALU_WB) |-> ((salu_busy & grp_hit) == '0))
    else $error("salpim_bank: write-back while an S-ALU is busy");
endmodule
