`timescale 1ns/1ps
// tb_c_alu: accumulates random bank vectors, reduce-sums them, clears, and
// compares the vector and scalar registers with sums computed here (mod 2^16).
module tb_c_alu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, acc, rsum;
  logic [15:0][15:0] bus_in, vreg;
  logic [15:0] sreg;
  logic [15:0] ref_v [16];
  logic [15:0] ref_s;
  int checks = 0, failures = 0;

  c_alu #(.LANES_P(16)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    clr = 0; acc = 0; rsum = 0; bus_in = '0; ref_s = 0;
    for (int l = 0; l < 16; l++) ref_v[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 50; rnd++) begin
      int nb;
      nb = $urandom_range(1, 16);  // number of banks merged
      for (int b = 0; b < nb; b++) begin
        for (int l = 0; l < 16; l++) begin
          bus_in[l] = 16'($urandom);
          ref_v[l] += bus_in[l];
        end
        acc = 1;
        @(negedge clk);
        acc = 0;
      end
      for (int l = 0; l < 16; l++) chk(vreg[l] == ref_v[l], $sformatf("accumulate lane %0d", l));
      bus_in = '1;
      rsum = 1;
      @(negedge clk);
      rsum = 0;
      ref_s = 0;
      for (int l = 0; l < 16; l++) ref_s += ref_v[l];
      chk(sreg == ref_s, $sformatf("reduce-sum %h vs %h", sreg, ref_s));
      for (int l = 0; l < 16; l++) chk(vreg[l] == ref_v[l], "vector kept during reduce-sum");
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int l = 0; l < 16; l++) ref_v[l] = 0;
      chk(vreg == '0, "clear");
      chk(sreg == ref_s, "scalar kept on clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
