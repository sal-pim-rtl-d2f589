`timescale 1ns/1ps
// tb_channel_interconnect: the broadcast register must take the vector of
// the selected pseudo-channel on `load` and hold it otherwise.
module tb_channel_interconnect;
  import salpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load;
  logic [2:0] src;
  vec_t [7:0] pch_vec;
  vec_t bcast, expect_v;
  int checks = 0, failures = 0;

  channel_interconnect #(.N_PCH(8)) dut (.*);

  initial begin
    load = 0; src = 0; pch_vec = '0; expect_v = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      for (int p = 0; p < 8; p++) for (int l = 0; l < 16; l++) pch_vec[p][l] = 16'($urandom);
      src = 3'($urandom);
      load = 1'($urandom);
      if (load) expect_v = pch_vec[src];
      @(negedge clk);
      checks++;
      if (bcast != expect_v) begin failures++; $display("FAIL it %0d", it); end
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
