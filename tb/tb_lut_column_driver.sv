`timescale 1ns/1ps
// tb_lut_column_driver: in address mode every MAT must get the one-hot of the
// column address; in LUT mode each MAT must get its own select unchanged.
module tb_lut_column_driver;
  logic lut_mode;
  logic [4:0] col;
  logic [15:0][31:0] data_sel, col_sel;
  int checks = 0, failures = 0;

  lut_column_driver #(.MATS_P(16), .COLS(32)) dut (.*);

  initial begin
    for (int it = 0; it < 500; it++) begin
      lut_mode = 1'($urandom);
      col = 5'($urandom);
      for (int m = 0; m < 16; m++) data_sel[m] = 32'd1 << $urandom_range(0, 31);
      #1;
      for (int m = 0; m < 16; m++) begin
        checks++;
        if (col_sel[m] != (lut_mode ? data_sel[m] : (32'd1 << col))) begin
          failures++;
          $display("FAIL: MAT %0d mode %0d", m, lut_mode);
        end
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
