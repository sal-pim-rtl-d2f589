`timescale 1ns/1ps
// tb_s_alu: self-checking test of the S-ALU.
// Random words and operations (add with both second operands, mult, MAC,
// max, clear) are applied; a reference model in this file tracks the 32-bit
// registers, which are read back through the write-back shifter as low and
// high halves. The two-cycle word time of the shared MACs is checked: `done`
// must rise exactly one cycle after `start`, and `busy` in between.
module tb_s_alu;
  import salpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, clr, clr_min, busy, done;
  alu_ctl_t ctl;
  vec_t gbl_in, feed, wb_data;
  logic [4:0] wb_shamt;
  int checks = 0, failures = 0;

  s_alu #(.LANES_P(16), .MACS(8)) dut (.*);

  longint ref_reg [16];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare_regs(input string tag);
    wb_shamt = 0; #0.1;
    for (int l = 0; l < 16; l++) chk(wb_data[l] == ref_reg[l][15:0], $sformatf("%s lane %0d low %h vs %h", tag, l, wb_data[l], ref_reg[l][15:0]));
    wb_shamt = 16; #0.1;
    for (int l = 0; l < 16; l++) chk(wb_data[l] == ref_reg[l][31:16], $sformatf("%s lane %0d high", tag, l));
  endtask

  function automatic longint s32(input longint v);
    return longint'($signed(v[31:0]));
  endfunction

  initial begin
    int n_op [4];
    start = 0; clr = 0; clr_min = 0; ctl = '0; gbl_in = '0; feed = '0; wb_shamt = 0;
    for (int l = 0; l < 16; l++) ref_reg[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_regs("reset");
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      if (it % 37 == 0) begin
        clr = 1; clr_min = $urandom_range(0, 1);
        @(negedge clk);
        clr = 0;
        for (int l = 0; l < 16; l++) ref_reg[l] = clr_min ? -longint'(2**31) : 0;
        compare_regs("clear");
        continue;
      end
      ctl.op = alu_op_e'($urandom_range(0, 3));
      ctl.bcast = 0; ctl.bidx = 0;
      ctl.src_reg = $urandom_range(0, 1);
      ctl.shl = 4'($urandom_range(0, 12));
      for (int l = 0; l < 16; l++) begin
        gbl_in[l] = 16'($urandom);
        feed[l]   = 16'($urandom);
      end
      n_op[ctl.op]++;
      for (int l = 0; l < 16; l++) begin
        longint a, b, aa, bb;
        a = longint'($signed(gbl_in[l])); b = longint'($signed(feed[l]));
        aa = s32(a << ctl.shl); bb = s32(b << ctl.shl);
        case (ctl.op)
          ALU_ADD: ref_reg[l] = s32(aa + (ctl.src_reg ? ref_reg[l] : bb));
          ALU_MUL: ref_reg[l] = s32(a * b);
          ALU_MAC: ref_reg[l] = s32(ref_reg[l] + a * b);
          ALU_MAX: ref_reg[l] = (aa > ref_reg[l]) ? aa : ref_reg[l];
        endcase
      end
      start = 1;
      #0.1 chk(!done, "done in start cycle (2 passes expected)");
      @(negedge clk);
      start = 0;
      gbl_in = '1; feed = '1;  // must not matter: second pass uses the captured copy
      #0.1 chk(busy && done, "second pass: busy and done expected one cycle after start");
      @(negedge clk);
      #0.1 chk(!busy && !done, "idle after two cycles");
      compare_regs($sformatf("op %0d it %0d", ctl.op, it));
    end
    for (int k = 0; k < 4; k++) chk(n_op[k] > 0, "every operation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
