// salpim_pch: one SAL-PIM pseudo-channel - BANKS banks, their shared data
// bus, and the C-ALU slice of the buffer die.
//
// The host sends one pim_cmd_t per cycle. In all-bank mode (all_bank = 1)
// every bank executes it, which is how the banks run a matrix-vector product
// in parallel; otherwise only bank `bank` does. The 256-bit data bus is
// driven, as chosen by cmd.bus_src, by the host's write data, the read data
// of the addressed bank, the C-ALU vector register, the C-ALU scalar
// register replicated to all lanes, or the vector from the channel
// interconnect; every bank sees the bus (BREG_LD_BUS, LUT_WR), which is how a
// C-ALU result is broadcast to all banks, and the host reads it back on
// host_rdata. C-ALU commands: CALU_CLR, CALU_ACC (vector += bus, e.g. bus_src
// = BUS_BANK to add one bank's partial sums) and CALU_RSUM (scalar = sum of
// vector). All units act at the clock edge after the command.
// Following the paper: 16 banks per pseudo-channel, one C-ALU slice per
// pseudo-channel, merge-then-broadcast through the C-ALU. Own choices: the
// bus multiplexer and command encoding.
module salpim_pch
  import salpim_pkg::*;
#(
  parameter int unsigned BANKS    = 16,
  parameter int unsigned P_SUB    = 4,
  parameter int unsigned LUT_ROWS = 512
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  pim_cmd_t                             cmd,
  input  vec_t                                 host_wdata,
  output vec_t                                 host_rdata,
  input  vec_t                                 ic_vec,
  output vec_t                                 calu_vec,
  output mem_req_t [BANKS-1:0][P_SUB-1:0]      mem_req,
  input  vec_t     [BANKS-1:0][P_SUB-1:0]      mem_rdata,
  output logic     [BANKS-1:0][P_SUB-1:0]      salu_busy,
  output logic     [BANKS-1:0][P_SUB-1:0]      salu_done
);
  vec_t [BANKS-1:0] bank_rd;
  vec_t             bus;
  logic [DW-1:0]    sreg;
  vec_t             vreg;

  always_comb begin
    unique case (cmd.bus_src)
      BUS_BANK: bus = bank_rd[cmd.bank];
      BUS_CVEC: bus = vreg;
      BUS_CSCL: bus = {LANES{sreg}};
      BUS_IC:   bus = ic_vec;
      default:  bus = host_wdata;
    endcase
  end
  assign host_rdata = bus;
  assign calu_vec   = vreg;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    salpim_bank #(.P_SUB(P_SUB), .LUT_ROWS(LUT_ROWS)) u_bank (
      .clk, .rst_n,
      .en        (cmd.all_bank || int'(cmd.bank) == b),
      .cmd       (cmd),
      .bus_in    (bus),
      .rd_data   (bank_rd[b]),
      .mem_req   (mem_req[b]),
      .mem_rdata (mem_rdata[b]),
      .salu_busy (salu_busy[b]),
      .salu_done (salu_done[b])
    );
  end

  c_alu #(.LANES_P(LANES)) u_calu (
    .clk, .rst_n,
    .clr    (cmd.op == CMD_CALU_CLR),
    .acc    (cmd.op == CMD_CALU_ACC),
    .rsum   (cmd.op == CMD_CALU_RSUM),
    .bus_in (bus),
    .vreg   (vreg),
    .sreg   (sreg)
  );

  initial assert (BANKS <= 16) else $error("salpim_pch: the bank field addresses at most 16 banks");
endmodule
