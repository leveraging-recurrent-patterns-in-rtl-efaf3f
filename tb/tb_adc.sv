// tb_adc: the ADC must present, one clock after `start`, the held value of
// the selected bitline as its code (ideal converter, one code per unit), with
// `valid` high for exactly that cycle. A second instance with 40 codes per
// unit checks scaling and saturation at the top code.
module tb_adc;
  import graph_pkg::*;
  localparam int W = $clog2(C+1);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [$clog2(C)-1:0] sel = '0;
  logic [C-1:0][W-1:0] held = '0;
  logic valid, valid2;
  logic [7:0] code, code2;
  int checks = 0, failures = 0;

  adc dut (.*);
  adc #(.LSB_PER_UNIT(100)) dut2 (.clk, .rst_n, .start, .sel, .held,
                                  .valid(valid2), .code(code2));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int v, e2;
      bit st;
      @(negedge clk);
      for (int j = 0; j < C; j++) held[j] = W'($urandom_range(0, C));
      sel = $clog2(C)'($urandom_range(0, C-1));
      st  = $urandom_range(0, 1);
      start = st;
      v  = int'(held[sel]);
      e2 = (v * 100 > 255) ? 255 : v * 100;
      @(negedge clk);
      start = 1'b0;
      check("valid", int'(valid), int'(st));
      if (st) begin
        check("code", int'(code), v);
        check("code x100", int'(code2), e2);
      end
      @(negedge clk);
      check("valid drops", int'(valid), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
