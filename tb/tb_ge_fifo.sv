// tb_ge_fifo: random pushes and pops against a queue model. Every popped word
// must be the oldest word pushed, in_ready must be low exactly when DEPTH
// words are stored, out_valid exactly when at least one is.
module tb_ge_fifo;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_ready = 1'b0, in_ready, out_valid;
  logic [15:0] in_data = '0, out_data;
  logic [$clog2(DEPTH):0] count;
  logic [15:0] q[$];
  int checks = 0, failures = 0, full_seen = 0;

  ge_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);
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
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < (t < 1500 ? 70 : 30));
      in_data   = 16'($urandom);
      out_ready = ($urandom_range(0, 99) < (t < 1500 ? 30 : 70));
      #1;
      check("in_ready", int'(in_ready), int'(q.size() < DEPTH));
      check("out_valid", int'(out_valid), int'(q.size() > 0));
      check("count", int'(count), q.size());
      if (out_valid && q.size() > 0) check("data", int'(out_data), int'(q[0]));
      if (q.size() == DEPTH) full_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check("full reached", int'(full_seen > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
