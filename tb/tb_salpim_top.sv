`timescale 1ns/1ps
// tb_salpim_top: end-to-end test of the SAL-PIM logic on a reduced stack
// (2 channels x 2 pseudo-channels x 2 banks x 2 S-ALUs, 4-row LUTs).
// The DRAM cells of every subarray group are modelled here as an array.
// It walks through the steps of one decoder-layer fragment in every
// pseudo-channel at once and compares every result with a model computed
// here:
//   A  embedding + position: element-wise add of a memory word and a vector
//      broadcast from the host into all banks (all-bank, all-group);
//   B  matrix-vector product: per-bank input slices, broadcast-feed MAC on
//      all S-ALUs in parallel (floated GBLs), write-back with fraction shift;
//   C  merge of the banks' partial sums in the C-ALU (accumulate mode);
//   D  channel interconnect: one pseudo-channel's result broadcast to the
//      bank registers of all pseudo-channels;
//   E  non-linear function by LUT linear interpolation (tables written with
//      conventional LUT writes, 64 sections over two subarray pairs);
//   F  max for softmax (running max), element-wise-feed MAC, reduce-sum in
//      the C-ALU and scalar broadcast to every bank.
// Every mechanism is counted; one that never happened counts as a failure.
module tb_salpim_top;
  import salpim_pkg::*;
  localparam int NCH = 2, NPC = 2, NB = 2, P = 2;
  localparam int NP = NCH * NPC;
  localparam int F = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pim_cmd_t [NP-1:0] cmd;
  vec_t [NP-1:0] host_wdata, host_rdata;
  logic ic_load;
  logic [$clog2(NP)-1:0] ic_src;
  mem_req_t [NP-1:0][NB-1:0][P-1:0] mem_req;
  vec_t [NP-1:0][NB-1:0][P-1:0] mem_rdata;
  logic [NP-1:0][NB-1:0][P-1:0] salu_busy, salu_done;
  int checks = 0, failures = 0;

  salpim_top #(.N_CH(NCH), .N_PCHC(NPC), .BANKS(NB), .P_SUB(P), .LUT_ROWS(4)) dut (.*);

  // ---------------- behavioural DRAM cells of all groups ----------------
  vec_t cells [NP][NB][P][4][32];
  always_comb
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++)
      mem_rdata[p][b][g] = cells[p][b][g][mem_req[p][b][g].row % 4][mem_req[p][b][g].col];
  always_ff @(posedge clk)
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++)
      if (mem_req[p][b][g].wr) cells[p][b][g][mem_req[p][b][g].row % 4][mem_req[p][b][g].col] <= mem_req[p][b][g].wdata;

  // ---------------- helpers ----------------
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  function automatic pim_cmd_t mk(input cmd_op_e op);
    pim_cmd_t c;
    c = '0; c.op = op;
    return c;
  endfunction
  function automatic logic [15:0] tr(input longint v, input int sh);
    longint s;
    s = v >>> sh;
    return s[15:0];
  endfunction
  function automatic logic signed [15:0] rnd(input int span);
    return 16'($signed($urandom_range(0, 2 * span - 1)) - span);
  endfunction

  // mechanism counters
  int n_par, n_single, n_bfeed, n_efeed, n_lut_mul, n_lut_add, n_sub_hi, n_clamp;
  int n_acc, n_rsum, n_cscl, n_cvec, n_ic, n_max, n_wb, n_lutwr, n_add, n_host;

  // Issue the same command to every pseudo-channel, then one idle cycle
  // (tCCDL = 2 ALU cycles). Counts the mechanisms it uses.
  task automatic issue_all(input pim_cmd_t c);
    for (int p = 0; p < NP; p++) cmd[p] = c;
    if (c.op == CMD_SALU) begin
      if (c.all_grp) n_par++; else n_single++;
      if (c.alu.op == ALU_MAX) n_max++;
      else if (c.alu.op == ALU_ADD) n_add++;
      else if (c.alu.bcast) n_bfeed++; else n_efeed++;
    end
    if (c.op == CMD_LUT_MUL) n_lut_mul++;
    if (c.op == CMD_LUT_ADD) n_lut_add++;
    if (c.op == CMD_CALU_ACC) n_acc++;
    if (c.op == CMD_CALU_RSUM) n_rsum++;
    if (c.op == CMD_SALU_WB) n_wb++;
    if (c.op == CMD_LUT_WR) n_lutwr++;
    if (c.bus_src == BUS_CSCL && c.op == CMD_BREG_LD_BUS) n_cscl++;
    if (c.bus_src == BUS_CVEC && c.op == CMD_BREG_LD_BUS) n_cvec++;
    if (c.bus_src == BUS_IC && c.op == CMD_BREG_LD_BUS) n_ic++;
    if (c.bus_src == BUS_HOST && c.op == CMD_BREG_LD_BUS) n_host++;
    @(negedge clk);
    for (int p = 0; p < NP; p++) cmd[p] = mk(CMD_NOP);
    @(negedge clk);
  endtask

  logic signed [15:0] x [NP][NB][16];
  logic [15:0] y [NP][16];
  logic signed [15:0] wt [64], bt [64];
  logic [15:0] pos [16];
  logic [15:0] ysum [NP];
  longint mx [NP][NB][16];

  initial begin
    pim_cmd_t c;
    int cyc0;
    cmd = '0; host_wdata = '0; ic_load = 0; ic_src = '0;
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++)
      for (int r = 0; r < 4; r++) for (int k = 0; k < 32; k++) for (int l = 0; l < 16; l++)
        cells[p][b][g][r][k][l] = rnd(128);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- A: embedding word (row 0 col 0) + position vector from the host ----
    for (int l = 0; l < 16; l++) pos[l] = rnd(128);
    for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) host_wdata[p][l] = pos[l];
    c = mk(CMD_BREG_LD_BUS); c.all_bank = 1; c.bus_src = BUS_HOST; issue_all(c);
    c = mk(CMD_SALU); c.all_bank = 1; c.all_grp = 1; c.row = 0; c.col = 0; c.alu.op = ALU_ADD; issue_all(c);
    c = mk(CMD_SALU_WB); c.all_bank = 1; c.all_grp = 1; c.row = 0; c.col = 1; issue_all(c);
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++)
      chk(cells[p][b][g][0][1][l] == 16'(cells[p][b][g][0][0][l] + pos[l]), "A: embedding + position");

    // ---- B: matrix-vector product, input slice per bank ----
    for (int b = 0; b < NB; b++) begin
      for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin x[p][b][l] = rnd(128); host_wdata[p][l] = x[p][b][l]; end
      c = mk(CMD_BREG_LD_BUS); c.bank = 4'(b); c.bus_src = BUS_HOST; issue_all(c);
    end
    c = mk(CMD_SALU_CLR); c.all_bank = 1; c.all_grp = 1; issue_all(c);
    cyc0 = 0;
    for (int k = 0; k < 16; k++) begin
      c = mk(CMD_SALU); c.all_bank = 1; c.all_grp = 1; c.row = 1; c.col = 5'(k);
      c.alu.op = ALU_MAC; c.alu.bcast = 1; c.alu.bidx = 4'(k);
      for (int p = 0; p < NP; p++) cmd[p] = c;
      n_par++; n_bfeed++;
      @(negedge clk);
      for (int p = 0; p < NP; p++) cmd[p] = mk(CMD_NOP);
      #1 chk(salu_done == '1, "B: every S-ALU finishes its word one cycle after the command");
      @(negedge clk);
    end
    c = mk(CMD_SALU_WB); c.all_bank = 1; c.all_grp = 1; c.row = 2; c.col = 0; c.shamt = F; issue_all(c);

    // ---- C: merge bank partial sums of group 0 in each C-ALU ----
    c = mk(CMD_CALU_CLR); issue_all(c);
    for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) y[p][l] = 0;
    for (int b = 0; b < NB; b++) begin
      c = mk(CMD_CALU_ACC); c.bus_src = BUS_BANK; c.bank = 4'(b); c.grp = 0; c.row = 2; c.col = 0; issue_all(c);
      for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin
        longint a;
        a = 0;
        for (int k = 0; k < 16; k++) a += longint'($signed(cells[p][b][0][1][k][l])) * x[p][b][k];
        y[p][l] += tr(a, F);
      end
    end
    for (int p = 0; p < NP; p++) begin
      c = mk(CMD_NOP); c.bus_src = BUS_CVEC; cmd[p] = c;
    end
    #1 for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++)
      chk(host_rdata[p][l] == y[p][l], $sformatf("C: C-ALU merge pch %0d lane %0d", p, l));
    @(negedge clk);
    for (int p = 0; p < NP; p++) cmd[p] = mk(CMD_NOP);

    // ---- D: interconnect broadcasts the last pseudo-channel's vector ----
    ic_src = ($clog2(NP))'(NP - 1); ic_load = 1;
    @(negedge clk);
    ic_load = 0;
    c = mk(CMD_BREG_LD_BUS); c.all_bank = 1; c.bus_src = BUS_IC; issue_all(c);
    for (int p = 0; p < NP; p++) begin
      c = mk(CMD_NOP); c.bus_src = BUS_IC; cmd[p] = c;
    end
    #1 for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++)
      chk(host_rdata[p][l] == y[NP-1][l], "D: interconnect vector seen by every pseudo-channel");
    @(negedge clk);
    for (int p = 0; p < NP; p++) cmd[p] = mk(CMD_NOP);

    // ---- E: LUT linear interpolation of the broadcast vector ----
    c = mk(CMD_LUT_ACT); c.all_bank = 1; c.row = 2; issue_all(c);
    for (int s = 0; s < 64; s++) begin wt[s] = rnd(256); bt[s] = rnd(256); end
    for (int h = 0; h < 2; h++)
      for (int col = 0; col < 32; col++) begin
        for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) host_wdata[p][l] = wt[h * 32 + col];
        c = mk(CMD_LUT_WR); c.all_bank = 1; c.bus_src = BUS_HOST; c.lsub = 2'(h); c.col = 5'(col); issue_all(c);
        for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) host_wdata[p][l] = bt[h * 32 + col];
        c = mk(CMD_LUT_WR); c.all_bank = 1; c.bus_src = BUS_HOST; c.lsub = 2'(2 + h); c.col = 5'(col); issue_all(c);
      end
    for (int g = 0; g < P; g++) begin
      c = mk(CMD_LUT_MUL); c.all_bank = 1; c.grp = 3'(g); c.shamt = 4; issue_all(c);
      c = mk(CMD_LUT_ADD); c.all_bank = 1; c.grp = 3'(g); c.shamt = 4; c.alu.shl = 4'(F); issue_all(c);
      c = mk(CMD_SALU_WB); c.all_bank = 1; c.grp = 3'(g); c.row = 3; c.col = 0; c.shamt = F; issue_all(c);
    end
    c = mk(CMD_LUT_PRE); c.all_bank = 1; issue_all(c);
    for (int l = 0; l < 16; l++) begin
      int xv, sect;
      longint v;
      xv = $signed(y[NP-1][l]);
      sect = (xv >= 0) ? xv / 16 : -((-xv + 15) / 16);
      if (sect < -32 || sect > 31) n_clamp++;
      sect = (sect < -32) ? 0 : (sect > 31) ? 63 : sect + 32;
      if (sect >= 32) n_sub_hi++;
      v = longint'(wt[sect]) * xv + (longint'(bt[sect]) <<< F);
      for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++)
        chk(cells[p][b][g][3][0][l] == tr(v, F), $sformatf("E: interpolation lane %0d", l));
    end

    // ---- F: running max over row 1 on group 1 of every bank ----
    c = mk(CMD_SALU_CLR); c.all_bank = 1; c.grp = 1; c.clr_min = 1; issue_all(c);
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int l = 0; l < 16; l++) mx[p][b][l] = -longint'(2 ** 31);
    for (int k = 0; k < 8; k++) begin
      c = mk(CMD_SALU); c.all_bank = 1; c.grp = 1; c.row = 1; c.col = 5'(k); c.alu.op = ALU_MAX; issue_all(c);
      for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int l = 0; l < 16; l++)
        if (longint'($signed(cells[p][b][1][1][k][l])) > mx[p][b][l]) mx[p][b][l] = $signed(cells[p][b][1][1][k][l]);
    end
    c = mk(CMD_SALU_WB); c.all_bank = 1; c.grp = 1; c.row = 3; c.col = 1; issue_all(c);
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int l = 0; l < 16; l++)
      chk(cells[p][b][1][3][1][l] == tr(mx[p][b][l], 0), "F: max");
    // element-wise-feed MAC on group 0 only, then reduce-sum of the C-ALU
    // vector (still the merged result of C) and scalar broadcast to all banks
    c = mk(CMD_SALU_CLR); c.all_bank = 1; c.grp = 0; issue_all(c);
    c = mk(CMD_SALU); c.all_bank = 1; c.grp = 0; c.row = 0; c.col = 2; c.alu.op = ALU_MAC; issue_all(c);
    c = mk(CMD_SALU_WB); c.all_bank = 1; c.grp = 0; c.row = 3; c.col = 2; issue_all(c);
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int l = 0; l < 16; l++)
      chk(cells[p][b][0][3][2][l] == tr(longint'($signed(cells[p][b][0][0][2][l])) * $signed(y[NP-1][l]), 0), "F: element-wise MAC");
    c = mk(CMD_CALU_RSUM); issue_all(c);
    c = mk(CMD_BREG_LD_BUS); c.all_bank = 1; c.bus_src = BUS_CSCL; issue_all(c);
    for (int p = 0; p < NP; p++) begin
      ysum[p] = 0;
      for (int l = 0; l < 16; l++) ysum[p] += y[p][l];
      c = mk(CMD_NOP); c.bus_src = BUS_CSCL; cmd[p] = c;
    end
    #1 for (int p = 0; p < NP; p++) chk(host_rdata[p] == {16{ysum[p]}}, "F: reduce-sum broadcast");
    @(negedge clk);
    for (int p = 0; p < NP; p++) cmd[p] = mk(CMD_NOP);
    // vector broadcast of the C-ALU register into all bank registers
    c = mk(CMD_BREG_LD_BUS); c.all_bank = 1; c.bus_src = BUS_CVEC; issue_all(c);
    c = mk(CMD_SALU); c.all_bank = 1; c.all_grp = 1; c.row = 0; c.col = 3; c.alu.op = ALU_ADD; issue_all(c);
    c = mk(CMD_SALU_WB); c.all_bank = 1; c.all_grp = 1; c.row = 3; c.col = 3; issue_all(c);
    for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++)
      chk(cells[p][b][g][3][3][l] == 16'(cells[p][b][g][0][3][l] + y[p][l]), "F: C-ALU vector broadcast");

    // ---- every mechanism must have happened ----
    chk(n_par > 0, "parallel S-ALUs (floated GBLs)");
    chk(n_single > 0, "single S-ALU");
    chk(n_bfeed > 0, "broadcast feed");
    chk(n_efeed > 0, "element-wise feed");
    chk(n_add > 0, "element-wise add");
    chk(n_max > 0, "max");
    chk(n_lut_mul > 0 && n_lut_add > 0 && n_lutwr > 0, "LUT interpolation");
    chk(n_sub_hi > 0 && n_sub_hi < 16, "both LUT subarrays of a pair used");
    chk(n_clamp > 0, "section clamping");
    chk(n_acc > 0, "C-ALU accumulation");
    chk(n_rsum > 0, "C-ALU reduce-sum");
    chk(n_cscl > 0 && n_cvec > 0 && n_ic > 0 && n_host > 0, "bus broadcasts");
    chk(n_wb > 0, "write-back");
    $display("mechanisms: parallel=%0d single=%0d bfeed=%0d efeed=%0d add=%0d max=%0d lut_mul=%0d lut_add=%0d lut_wr=%0d sub_hi=%0d clamp=%0d acc=%0d rsum=%0d scalar_bc=%0d vector_bc=%0d ic=%0d wb=%0d",
             n_par, n_single, n_bfeed, n_efeed, n_add, n_max, n_lut_mul, n_lut_add, n_lutwr, n_sub_hi, n_clamp, n_acc, n_rsum, n_cscl, n_cvec, n_ic, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
