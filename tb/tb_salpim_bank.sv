`timescale 1ns/1ps
// tb_salpim_bank: one bank with four S-ALUs and a behavioural model of its
// DRAM cells. It runs, and checks against values computed here:
//  * a matrix-vector product on all four subarray groups at once (broadcast
//    feed, MAC, write-back with a fraction shift);
//  * an element-wise product-sum on one group only (the others must stay idle);
//  * LUT-based linear interpolation of 16 values (LUT_MUL, LUT_ADD) with a
//    64-section table spread over the two slope and two intercept subarrays;
//  * a running max, an element-wise add and a plain bank read.
// Commands are issued every 2 cycles (tCCDL at the ALU clock); `salu_done`
// must follow each S-ALU command by exactly one cycle.
module tb_salpim_bank;
  import salpim_pkg::*;
  localparam int P = 4;
  localparam int F = 8;  // fraction bits used by the test data
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  pim_cmd_t cmd;
  vec_t bus_in, rd_data;
  mem_req_t [P-1:0] mem_req;
  vec_t [P-1:0] mem_rdata;
  logic [P-1:0] salu_busy, salu_done;
  int checks = 0, failures = 0;

  salpim_bank #(.P_SUB(P), .LUT_ROWS(4)) dut (.*);
  dram_cells_model #(.GROUPS(P), .ROWS(4)) cells (.clk, .mem_req, .mem_rdata);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic pim_cmd_t mk(input cmd_op_e op);
    pim_cmd_t c;
    c = '0;
    c.op = op;
    return c;
  endfunction

  // Issue one command for one cycle, then one idle cycle.
  task automatic issue(input pim_cmd_t c, input bit expect_done = 0);
    cmd = c;
    @(negedge clk);
    cmd = mk(CMD_NOP);
    #1 if (expect_done) chk(salu_done != '0, "S-ALU done one cycle after its command");
    @(negedge clk);
  endtask

  function automatic logic signed [15:0] tr(input longint v, input int sh);
    longint s;
    s = v >>> sh;
    return s[15:0];
  endfunction

  longint acc [P][16];
  logic signed [15:0] x [16];
  logic signed [15:0] wt [64], bt [64];

  initial begin
    pim_cmd_t c;
    en = 1; cmd = '0; bus_in = '0;
    for (int g = 0; g < P; g++)
      for (int r = 0; r < 4; r++)
        for (int k = 0; k < 32; k++)
          for (int l = 0; l < 16; l++)
            cells.cells[g][r][k][l] = 16'($signed($urandom_range(0, 1023)) - 512);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- matrix-vector product, all groups in parallel, broadcast feed ----
    for (int l = 0; l < 16; l++) begin x[l] = 16'($signed($urandom_range(0, 1023)) - 512); bus_in[l] = x[l]; end
    issue(mk(CMD_BREG_LD_BUS));
    c = mk(CMD_SALU_CLR); c.all_grp = 1; issue(c);
    for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++) acc[g][l] = 0;
    for (int k = 0; k < 16; k++) begin
      c = mk(CMD_SALU); c.all_grp = 1; c.row = 1; c.col = 5'(k);
      c.alu.op = ALU_MAC; c.alu.bcast = 1; c.alu.bidx = 4'(k);
      for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++)
        acc[g][l] += longint'($signed(cells.cells[g][1][k][l])) * x[k];
      issue(c, 1);
    end
    c = mk(CMD_SALU_WB); c.all_grp = 1; c.row = 2; c.col = 20; c.shamt = F; issue(c);
    for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++)
      chk(cells.cells[g][2][20][l] == tr(acc[g][l], F), $sformatf("GEMV group %0d lane %0d", g, l));

    // ---- element-wise MAC on group 2 only ----
    c = mk(CMD_SALU_CLR); c.all_grp = 1; issue(c);
    for (int k = 0; k < 8; k++) begin
      c = mk(CMD_SALU); c.grp = 2; c.row = 3; c.col = 5'(k); c.alu.op = ALU_MAC; c.alu.bcast = 0;
      cmd = c;
      #1 chk(mem_req[2].rd && !mem_req[0].rd && !mem_req[1].rd && !mem_req[3].rd, "single-group read");
      @(negedge clk); cmd = mk(CMD_NOP); @(negedge clk);
      for (int l = 0; l < 16; l++) acc[2][l] = (k == 0 ? 0 : acc[2][l]) + longint'($signed(cells.cells[2][3][k][l])) * x[l];
    end
    c = mk(CMD_SALU_WB); c.all_grp = 1; c.row = 0; c.col = 31; c.shamt = 0; issue(c);
    for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++)
      chk(cells.cells[g][0][31][l] == (g == 2 ? tr(acc[2][l], 0) : 16'd0), $sformatf("element-wise group %0d lane %0d", g, l));

    // ---- LUT tables: 64 sections over [-4, 4) in Q.8, section width 1/8 ----
    c = mk(CMD_LUT_ACT); c.row = 1; issue(c);
    for (int s = 0; s < 64; s++) begin
      wt[s] = 16'($signed($urandom_range(0, 511)) - 256);
      bt[s] = 16'($signed($urandom_range(0, 511)) - 256);
    end
    for (int h = 0; h < 2; h++)
      for (int col = 0; col < 32; col++) begin
        for (int l = 0; l < 16; l++) bus_in[l] = wt[h * 32 + col];
        c = mk(CMD_LUT_WR); c.lsub = 2'(h); c.col = 5'(col); issue(c);
        for (int l = 0; l < 16; l++) bus_in[l] = bt[h * 32 + col];
        c = mk(CMD_LUT_WR); c.lsub = 2'(2 + h); c.col = 5'(col); issue(c);
      end
    for (int rep = 0; rep < 8; rep++) begin
      int g;
      g = rep % P;
      // source values in [-5, 5) so some fall outside the table and clamp
      for (int l = 0; l < 16; l++) cells.cells[g][0][rep][l] = 16'($signed($urandom_range(0, 2559)) - 1280);
      c = mk(CMD_BREG_LD_MEM); c.grp = 3'(g); c.row = 0; c.col = 5'(rep); issue(c);
      c = mk(CMD_LUT_MUL); c.grp = 3'(g); c.shamt = 5; issue(c, 1);
      c = mk(CMD_LUT_ADD); c.grp = 3'(g); c.shamt = 5; c.alu.shl = 4'(F); issue(c, 1);
      c = mk(CMD_SALU_WB); c.grp = 3'(g); c.row = 3; c.col = 5'(rep); c.shamt = F; issue(c);
      for (int l = 0; l < 16; l++) begin
        int xv, sect;
        longint y;
        xv = $signed(cells.cells[g][0][rep][l]);
        sect = (xv >= 0) ? xv / 32 : -((-xv + 31) / 32);
        sect = (sect < -32) ? 0 : (sect > 31) ? 63 : sect + 32;
        y = longint'(wt[sect]) * xv + (longint'(bt[sect]) <<< F);
        chk(cells.cells[g][3][rep][l] == tr(y, F), $sformatf("interpolation rep %0d lane %0d", rep, l));
      end
    end
    c = mk(CMD_LUT_PRE); issue(c);

    // ---- running max over 6 columns of group 1 ----
    c = mk(CMD_SALU_CLR); c.grp = 1; c.clr_min = 1; issue(c);
    for (int l = 0; l < 16; l++) acc[1][l] = -longint'(2 ** 31);
    for (int k = 0; k < 6; k++) begin
      c = mk(CMD_SALU); c.grp = 1; c.row = 1; c.col = 5'(k); c.alu.op = ALU_MAX; issue(c, 1);
      for (int l = 0; l < 16; l++)
        if (longint'($signed(cells.cells[1][1][k][l])) > acc[1][l]) acc[1][l] = $signed(cells.cells[1][1][k][l]);
    end
    c = mk(CMD_SALU_WB); c.grp = 1; c.row = 0; c.col = 30; issue(c);
    for (int l = 0; l < 16; l++) chk(cells.cells[1][0][30][l] == tr(acc[1][l], 0), "max");

    // ---- element-wise add (memory + bank register) on all groups ----
    c = mk(CMD_SALU); c.all_grp = 1; c.row = 2; c.col = 3; c.alu.op = ALU_ADD; issue(c, 1);
    c = mk(CMD_SALU_WB); c.all_grp = 1; c.row = 0; c.col = 29; issue(c);
    for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++)
      chk(cells.cells[g][0][29][l] == 16'(cells.cells[g][2][3][l] + xsrc(l)), "add");

    // ---- plain read ----
    c = mk(CMD_BANK_RD); c.grp = 1; c.row = 3; c.col = 9; cmd = c;
    #1 chk(rd_data == cells.cells[1][3][9], "bank read");
    @(negedge clk); cmd = mk(CMD_NOP);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank-register value in effect during the add above (last LUT source word)
  function automatic logic [15:0] xsrc(input int l);
    return cells.cells[3][0][7][l];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
