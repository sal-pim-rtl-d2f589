`timescale 1ns/1ps
// tb_lut_selector: each lane must carry the word of subarray
// (step_b ? 2 : 0) + sub-select of that lane.
module tb_lut_selector;
  logic [3:0][15:0][15:0] sub_data;
  logic [15:0][1:0] sub_sel;
  logic step_b;
  logic [15:0][15:0] gbl;
  int checks = 0, failures = 0;

  lut_selector #(.N_SUB(4), .LANES_P(16)) dut (.*);

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l++) sub_data[s][l] = 16'($urandom);
      for (int l = 0; l < 16; l++) sub_sel[l] = 2'd1 << $urandom_range(0, 1);
      step_b = 1'($urandom);
      #1;
      for (int l = 0; l < 16; l++) begin
        int s;
        s = (step_b ? 2 : 0) + (sub_sel[l] == 2'b10 ? 1 : 0);
        checks++;
        if (gbl[l] != sub_data[s][l]) begin failures++; $display("FAIL lane %0d", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
