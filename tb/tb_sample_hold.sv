// tb_sample_hold: random bitline values change every cycle; the held output
// must equal the value present at the last clock edge with `sample` high and
// must not move otherwise.
module tb_sample_hold;
  import graph_pkg::*;
  localparam int W = $clog2(C+1);
  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0;
  logic [C-1:0][W-1:0] bl = '0, held, expv;
  int checks = 0, failures = 0;

  sample_hold dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expv = '0;
    repeat (2) @(posedge clk);
    #1 checks++; if (held != '0) failures++;
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int j = 0; j < C; j++) bl[j] = W'($urandom_range(0, C));
      sample = ($urandom_range(0, 3) == 0);
      @(posedge clk);
      if (sample) expv = bl;
      #1;
      checks++;
      if (held != expv) begin
        failures++;
        $display("FAIL t=%0d held=%h exp=%h", t, held, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
