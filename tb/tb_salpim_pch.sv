`timescale 1ns/1ps
// tb_salpim_pch: one full-size pseudo-channel (sixteen banks of four S-ALUs, 512-row LUT subarrays).
// Each bank gets its own slice of an input vector from the host, all banks
// run a matrix-vector product in all-bank mode, the results are written
// back, merged bank by bank in the C-ALU (accumulate mode), reduce-summed,
// and the vector and scalar results are broadcast back into every bank's
// register. The DRAM cells of the subarray groups are modelled as an array (4 rows per group).
// All values are compared with a model computed here.
module tb_salpim_pch;
  import salpim_pkg::*;
  localparam int NB = 16, P = 4, F = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pim_cmd_t cmd;
  vec_t host_wdata, host_rdata, ic_vec, calu_vec;
  mem_req_t [NB-1:0][P-1:0] mem_req;
  vec_t [NB-1:0][P-1:0] mem_rdata;
  logic [NB-1:0][P-1:0] salu_busy, salu_done;
  int checks = 0, failures = 0;

  salpim_pch dut (.*);  // full-size pseudo-channel: 16 banks x 4 S-ALUs, 512-row LUT subarrays
  // behavioural DRAM cells of every subarray group (4 rows modelled)
  vec_t cells [NB][P][4][32];
  always_comb
    for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++)
      mem_rdata[b][g] = cells[b][g][mem_req[b][g].row % 4][mem_req[b][g].col];
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++)
      if (mem_req[b][g].wr) cells[b][g][mem_req[b][g].row % 4][mem_req[b][g].col] <= mem_req[b][g].wdata;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic pim_cmd_t mk(input cmd_op_e op);
    pim_cmd_t c;
    c = '0; c.op = op;
    return c;
  endfunction
  task automatic issue(input pim_cmd_t c);
    cmd = c;
    @(negedge clk);
    cmd = mk(CMD_NOP);
    @(negedge clk);
  endtask
  function automatic logic [15:0] tr(input longint v, input int sh);
    longint s;
    s = v >>> sh;
    return s[15:0];
  endfunction

  logic signed [15:0] w [NB][P][16][16];  // [bank][group][k][lane]
  logic signed [15:0] x [NB][16];
  logic [15:0] part [NB][P][16];
  logic [15:0] y [16];
  logic [15:0] ysum;

  initial begin
    pim_cmd_t c;
    cmd = '0; host_wdata = '0; ic_vec = '0;
    for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++) for (int k = 0; k < 16; k++) for (int l = 0; l < 16; l++) begin
      w[b][g][k][l] = 16'($signed($urandom_range(0, 255)) - 128);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // weights into the cell model (row 1, columns 0..15)
    for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++) for (int k = 0; k < 16; k++)
      for (int l = 0; l < 16; l++) cells[b][g][1][k][l] = w[b][g][k][l];
    // input slices, one per bank, from the host
    for (int b = 0; b < NB; b++) begin
      for (int l = 0; l < 16; l++) begin x[b][l] = 16'($signed($urandom_range(0, 255)) - 128); host_wdata[l] = x[b][l]; end
      c = mk(CMD_BREG_LD_BUS); c.bank = 4'(b); c.bus_src = BUS_HOST; issue(c);
    end
    c = mk(CMD_SALU_CLR); c.all_bank = 1; c.all_grp = 1; issue(c);
    for (int k = 0; k < 16; k++) begin
      c = mk(CMD_SALU); c.all_bank = 1; c.all_grp = 1; c.row = 1; c.col = 5'(k);
      c.alu.op = ALU_MAC; c.alu.bcast = 1; c.alu.bidx = 4'(k);
      issue(c);
    end
    c = mk(CMD_SALU_WB); c.all_bank = 1; c.all_grp = 1; c.row = 2; c.col = 0; c.shamt = F; issue(c);
    for (int b = 0; b < NB; b++) for (int g = 0; g < P; g++) for (int l = 0; l < 16; l++) begin
      longint a;
      a = 0;
      for (int k = 0; k < 16; k++) a += longint'(w[b][g][k][l]) * x[b][k];
      part[b][g][l] = tr(a, F);
    end
    for (int g = 0; g < P; g++) begin
      // merge the banks' partial sums of output block g in the C-ALU
      issue(mk(CMD_CALU_CLR));
      for (int l = 0; l < 16; l++) y[l] = 0;
      for (int b = 0; b < NB; b++) begin
        c = mk(CMD_CALU_ACC); c.bus_src = BUS_BANK; c.bank = 4'(b); c.grp = 3'(g); c.row = 2; c.col = 0; issue(c);
        for (int l = 0; l < 16; l++) y[l] += part[b][g][l];
      end
      for (int l = 0; l < 16; l++) chk(calu_vec[l] == y[l], $sformatf("bank accumulation block %0d lane %0d", g, l));
      issue(mk(CMD_CALU_RSUM));
      ysum = 0;
      for (int l = 0; l < 16; l++) ysum += y[l];
      c = mk(CMD_NOP); c.bus_src = BUS_CSCL; cmd = c;
      #1 for (int l = 0; l < 16; l++) chk(host_rdata[l] == ysum, "scalar broadcast on the bus");
      @(negedge clk);
      // vector broadcast into every bank register
      c = mk(CMD_BREG_LD_BUS); c.all_bank = 1; c.bus_src = BUS_CVEC; issue(c);
      c = mk(CMD_SALU); c.all_bank = 1; c.all_grp = 1; c.row = 0; c.col = 5'(5 + g); c.alu.op = ALU_ADD; issue(c);
      c = mk(CMD_SALU_WB); c.all_bank = 1; c.all_grp = 1; c.row = 3; c.col = 5'(5 + g); issue(c);
      for (int b = 0; b < NB; b++) for (int gg = 0; gg < P; gg++) for (int l = 0; l < 16; l++)
        chk(cells[b][gg][3][5 + g][l] == 16'(cells[b][gg][0][5 + g][l] + y[l]), "vector broadcast to all banks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
