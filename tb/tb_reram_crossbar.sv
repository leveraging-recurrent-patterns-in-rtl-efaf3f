// tb_reram_crossbar: checks the crossbar model. Random patterns are written
// row by row, then random wordline vectors are applied and every bitline sum
// is compared with a column count computed here from the written pattern.
// The wear counter must equal the number of row writes.
module tb_reram_crossbar;
  import graph_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0;
  logic [$clog2(C)-1:0] wr_row = '0;
  logic [C-1:0] wr_bits = '0, wl = '0;
  logic [C-1:0][$clog2(C+1)-1:0] bl;
  logic [31:0] write_ops;
  int checks = 0, failures = 0, nwr = 0;
  bit model [C][C];

  reram_crossbar dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    foreach (model[i, j]) model[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      // rewrite a random row
      @(negedge clk);
      wr_en = 1'b1; wr_row = $clog2(C)'($urandom_range(0, C-1)); wr_bits = C'($urandom);
      for (int j = 0; j < C; j++) model[wr_row][j] = wr_bits[j];
      nwr++;
      @(negedge clk);
      wr_en = 1'b0;
      for (int r = 0; r < 4; r++) begin
        wl = C'($urandom);
        #1;
        for (int j = 0; j < C; j++) begin
          int s;
          s = 0;
          for (int i = 0; i < C; i++) s += (model[i][j] && wl[i]) ? 1 : 0;
          check($sformatf("bl[%0d]", j), int'(bl[j]), s);
        end
      end
      check("write_ops", int'(write_ops), nwr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
