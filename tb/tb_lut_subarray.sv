`timescale 1ns/1ps
// tb_lut_subarray: fills several rows with known words through conventional
// (same-column-in-every-MAT) writes, precharges, re-opens them and reads with
// a different column per MAT, comparing with a copy kept here. Also checks
// the open flag.
module tb_lut_subarray;
  import salpim_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic act, pre, wr, is_open;
  logic [2:0] row;
  logic [15:0][31:0] col_sel;
  logic [15:0][15:0] wdata, rdata;
  logic [15:0] shadow [ROWS][16][32];
  int checks = 0, failures = 0;

  lut_subarray #(.ROWS(ROWS), .MATS_P(16), .COLS(32)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    act = 0; pre = 0; wr = 0; row = 0; col_sel = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(!is_open, "closed after reset");
    for (int r = 0; r < ROWS; r++) begin
      row = 3'(r); act = 1;
      @(negedge clk);
      act = 0;
      chk(is_open, "open after activate");
      for (int c = 0; c < 32; c++) begin
        for (int m = 0; m < 16; m++) begin
          col_sel[m] = 32'd1 << c;
          wdata[m] = 16'($urandom);
          shadow[r][m][c] = wdata[m];
        end
        wr = 1;
        @(negedge clk);
        wr = 0;
      end
      pre = 1;
      @(negedge clk);
      pre = 0;
      chk(!is_open, "closed after precharge");
    end
    for (int it = 0; it < 200; it++) begin
      int r;
      r = $urandom_range(0, ROWS - 1);
      row = 3'(r); act = 1;
      @(negedge clk);
      act = 0;
      repeat (4) begin
        int cs [16];
        for (int m = 0; m < 16; m++) begin cs[m] = $urandom_range(0, 31); col_sel[m] = 32'd1 << cs[m]; end
        #1;
        for (int m = 0; m < 16; m++) chk(rdata[m] == shadow[r][m][cs[m]], $sformatf("row %0d MAT %0d col %0d", r, m, cs[m]));
        @(negedge clk);
      end
      pre = 1;
      @(negedge clk);
      pre = 0;
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
