// salpim_top: SAL-PIM processing logic of one HBM2 stack.
//
// N_CH channels of N_PCHC pseudo-channels each (8 x 2 by default, as in the
// paper's HBM2 configuration), every pseudo-channel holding BANKS banks with
// P_SUB S-ALUs, a bank-level unit and four LUT-embedded subarrays, plus the
// C-ALU slice on the buffer die. The C-ALU of channel c is the pair of slices
// of pseudo-channels 2c and 2c+1. The buffer-die interconnect copies the C-ALU
// vector of pseudo-channel `ic_src` into a register (`ic_load`) that every
// pseudo-channel can broadcast to its banks (bus source BUS_IC).
//
// What stays outside: the host memory controller (it drives cmd and
// host_wdata for each pseudo-channel, one command per cycle of the 500 MHz
// ALU clock, and respects DRAM timing), and the ordinary DRAM cell arrays of
// every subarray group, reached through mem_req / mem_rdata indexed
// [pseudo-channel][bank][group]. Pseudo-channel p = N_PCHC * channel + pch.
module salpim_top
  import salpim_pkg::*;
#(
  parameter int unsigned N_CH     = 8,
  parameter int unsigned N_PCHC   = 2,
  parameter int unsigned BANKS    = 16,
  parameter int unsigned P_SUB    = 4,
  parameter int unsigned LUT_ROWS = 512,
  localparam int unsigned N_PCH   = N_CH * N_PCHC
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  pim_cmd_t [N_PCH-1:0]                         cmd,
  input  vec_t     [N_PCH-1:0]                         host_wdata,
  output vec_t     [N_PCH-1:0]                         host_rdata,
  input  logic                                         ic_load,
  input  logic [$clog2(N_PCH)-1:0]                     ic_src,
  output mem_req_t [N_PCH-1:0][BANKS-1:0][P_SUB-1:0]   mem_req,
  input  vec_t     [N_PCH-1:0][BANKS-1:0][P_SUB-1:0]   mem_rdata,
  output logic     [N_PCH-1:0][BANKS-1:0][P_SUB-1:0]   salu_busy,
  output logic     [N_PCH-1:0][BANKS-1:0][P_SUB-1:0]   salu_done
);
  vec_t [N_PCH-1:0] calu_vec;
  vec_t             ic_vec;

  channel_interconnect #(.N_PCH(N_PCH)) u_ic (
    .clk, .rst_n,
    .load    (ic_load),
    .src     (ic_src),
    .pch_vec (calu_vec),
    .bcast   (ic_vec)
  );

  for (genvar p = 0; p < N_PCH; p++) begin : g_pch
    salpim_pch #(.BANKS(BANKS), .P_SUB(P_SUB), .LUT_ROWS(LUT_ROWS)) u_pch (
      .clk, .rst_n,
      .cmd        (cmd[p]),
      .host_wdata (host_wdata[p]),
      .host_rdata (host_rdata[p]),
      .ic_vec     (ic_vec),
      .calu_vec   (calu_vec[p]),
      .mem_req    (mem_req[p]),
      .mem_rdata  (mem_rdata[p]),
      .salu_busy  (salu_busy[p]),
      .salu_done  (salu_done[p])
    );
  end
endmodule
