`timescale 1ns/1ps
// tb_bank_level_unit: checks the bank-level register load, both input
// feeding methods (element-wise and broadcast of one word), and the LUT
// decoding path: arithmetic right shift, clamping and the one-hot column and
// sub-sel selects, against a section number computed here by floor division.
module tb_bank_level_unit;
  import salpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld, bcast;
  logic [3:0] bidx;
  logic [4:0] shamt;
  vec_t ld_data, breg, feed;
  logic [15:0][31:0] col_sel;
  logic [15:0][1:0]  sub_sel;
  int checks = 0, failures = 0;

  bank_level_unit #(.LANES_P(16), .COLS(32), .SUBSEL(2)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    ld = 0; bcast = 0; bidx = 0; shamt = 0; ld_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      for (int l = 0; l < 16; l++) begin
        // mix of small values (inside the table range) and full-range values
        ld_data[l] = (it % 3 == 0) ? 16'($urandom) : 16'($signed($urandom_range(0, 16383)) - 8192);
      end
      ld = 1;
      @(negedge clk);
      ld = 0;
      for (int l = 0; l < 16; l++) chk(breg[l] == ld_data[l], "bank register load");
      bcast = 0;
      #1 for (int l = 0; l < 16; l++) chk(feed[l] == ld_data[l], "element-wise feed");
      bcast = 1; bidx = 4'($urandom);
      #1 for (int l = 0; l < 16; l++) chk(feed[l] == ld_data[bidx], "broadcast feed");
      shamt = 5'($urandom_range(0, 12));
      #1 for (int l = 0; l < 16; l++) begin
        int v, sect;
        v = $signed(ld_data[l]);
        // floor division by 2^shamt
        v = (v >= 0) ? v / (1 << shamt) : -((-v + (1 << shamt) - 1) / (1 << shamt));
        if (v < -32) v = -32;
        if (v > 31) v = 31;
        sect = v + 32;
        chk(col_sel[l] == (32'd1 << (sect % 32)), $sformatf("column select lane %0d sect %0d", l, sect));
        chk(sub_sel[l] == (2'd1 << (sect / 32)), $sformatf("sub select lane %0d", l));
      end
      // register holds while ld is low
      ld_data = ~ld_data;
      @(negedge clk);
      chk(breg != ld_data, "register holds without ld");
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
