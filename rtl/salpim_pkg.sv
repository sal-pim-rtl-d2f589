// salpim_pkg: types and constants shared by the SAL-PIM logic units.
//
// A SAL-PIM bank moves data as 256-bit global-bit-line (GBL) words of sixteen
// 16-bit fixed-point lanes. The subarray-level ALUs (S-ALUs) accumulate into
// 32-bit registers; the bank-level unit holds a 16 x 16-bit register; the
// channel-level ALU (C-ALU) holds a 16 x 16-bit vector and a 16-bit scalar.
// These widths follow the paper. The command word (pim_cmd_t) that the host
// memory controller sends to a pseudo-channel is this design's own encoding:
// the paper drives the units with DRAM-style commands (ACT, RD, WR, PRE and
// ALU commands) but does not publish their format.
package salpim_pkg;

  // Datapath sizes given by the paper (Table of the SAL-PIM configuration).
  localparam int unsigned LANES     = 16;  // 16-bit words per 256-bit GBL word
  localparam int unsigned DW        = 16;  // fixed-point word width
  localparam int unsigned ACCW      = 32;  // S-ALU register width
  localparam int unsigned MATS      = 16;  // MATs per subarray row (1 KB / 512 b)
  localparam int unsigned LUT_COLS  = 32;  // 16-bit columns per MAT row (5-to-32 decoder)
  localparam int unsigned N_LUT_SUB = 4;   // LUT-embedded subarrays per bank
  localparam int unsigned SECT_BITS = 6;   // 64 interpolation sections

  typedef logic signed [DW-1:0]   word_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic [LANES-1:0][DW-1:0] vec_t;  // one 256-bit GBL word

  // S-ALU operations (table in the S-ALU figure of the paper).
  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,  // reg = (mem <<< shl) + (bank-reg <<< shl)   or  reg + (mem <<< shl)
    ALU_MUL = 2'd1,  // reg = mem * bank-reg
    ALU_MAC = 2'd2,  // reg = reg + mem * bank-reg
    ALU_MAX = 2'd3   // reg = max(reg, mem <<< shl)
  } alu_op_e;

  // Per-operation control of an S-ALU.
  typedef struct packed {
    alu_op_e    op;
    logic       bcast;    // 1: one bank-register word to every MAC; 0: word i to lane i
    logic [3:0] bidx;     // bank-register word broadcast when bcast = 1
    logic       src_reg;  // ALU_ADD only: second operand is the S-ALU register itself
    logic [3:0] shl;      // left alignment of memory (and bank-register) operand for ADD/MAX
  } alu_ctl_t;

  // Pseudo-channel command set (own encoding).
  typedef enum logic [3:0] {
    CMD_NOP         = 4'd0,
    CMD_BREG_LD_MEM = 4'd1,   // bank register <= GBL read of subarray group `grp`
    CMD_BREG_LD_BUS = 4'd2,   // bank register <= pseudo-channel data bus
    CMD_SALU        = 4'd3,   // S-ALU operation on memory words (GBLs floated if all_grp)
    CMD_SALU_CLR    = 4'd4,   // clear S-ALU registers (to 0, or to the minimum for max)
    CMD_SALU_WB     = 4'd5,   // S-ALU registers >>> shamt, truncated, written to memory
    CMD_LUT_ACT     = 4'd6,   // activate row `row` in all LUT-embedded subarrays
    CMD_LUT_PRE     = 4'd7,   // precharge the LUT-embedded subarrays
    CMD_LUT_WR      = 4'd8,   // conventional write of bus data to LUT subarray `lsub`
    CMD_LUT_MUL     = 4'd9,   // S-ALU `grp`: reg = W[section(bank-reg)] * bank-reg
    CMD_LUT_ADD     = 4'd10,  // S-ALU `grp`: reg = reg + (B[section(bank-reg)] <<< shl)
    CMD_BANK_RD     = 4'd11,  // bank `bank` drives the bus with its group `grp` read data
    CMD_CALU_CLR    = 4'd12,  // clear the C-ALU vector register
    CMD_CALU_ACC    = 4'd13,  // C-ALU vector register += bus (accumulator mode)
    CMD_CALU_RSUM   = 4'd14   // C-ALU scalar register = sum of vector register (adder tree)
  } cmd_op_e;

  // Source of the pseudo-channel data bus.
  typedef enum logic [2:0] {
    BUS_HOST = 3'd0,  // write data from the host
    BUS_BANK = 3'd1,  // read data of the addressed bank
    BUS_CVEC = 3'd2,  // C-ALU vector register (broadcast of an accumulation)
    BUS_CSCL = 3'd3,  // C-ALU scalar register replicated to all lanes
    BUS_IC   = 3'd4   // vector from the buffer-die interconnect (another channel)
  } bus_src_e;

  typedef struct packed {
    cmd_op_e    op;
    bus_src_e   bus_src;
    logic       all_bank;  // all-bank mode: every bank of the pseudo-channel executes
    logic [3:0] bank;      // addressed bank when all_bank = 0
    logic       all_grp;   // every S-ALU works on its own subarray group (GBLs floated)
    logic [2:0] grp;       // addressed S-ALU / subarray group when all_grp = 0
    logic [8:0] row;       // row within a subarray (512 rows)
    logic [4:0] col;       // 256-bit column within a row (32 per 1 KB row)
    logic [1:0] lsub;      // LUT-embedded subarray for CMD_LUT_WR
    logic [4:0] shamt;     // write-back right shift / section decoder right shift
    logic       clr_min;   // CMD_SALU_CLR: clear to the most negative value
    alu_ctl_t   alu;
  } pim_cmd_t;

  // Request from one S-ALU subarray group to the DRAM cells of that group
  // (the cell arrays themselves are outside this RTL).
  typedef struct packed {
    logic       rd;
    logic       wr;
    logic [8:0] row;
    logic [4:0] col;
    vec_t       wdata;
  } mem_req_t;

  // Saturating conversion of a wide signed value to a 16-bit word is NOT used:
  // the paper says the register is "shifted and truncated", so truncation it is.
  function automatic word_t trunc_word(input acc_t v, input logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    return s[DW-1:0];
  endfunction

endpackage
