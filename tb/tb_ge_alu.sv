// tb_ge_alu: random operands. OP_MIN must give min(acc, src+1) when the code
// is non-zero (INF source stays INF) and acc otherwise; OP_SUM must give
// acc + code * 2^plane, saturated at 255. Expected values are computed with
// plain integer arithmetic.
module tb_ge_alu;
  import graph_pkg::*;
  alu_op_e op;
  logic [7:0] code;
  logic [DATA_W-1:0] src, acc_in, acc_out;
  logic [$clog2(DATA_W)-1:0] plane;
  int checks = 0, failures = 0;

  ge_alu dut (.*);

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int e;
      op     = alu_op_e'($urandom_range(0, 1));
      code   = ($urandom_range(0, 2) == 0) ? 8'd0 : 8'($urandom_range(0, 4));
      src    = ($urandom_range(0, 5) == 0) ? 8'hFF : 8'($urandom);
      acc_in = ($urandom_range(0, 5) == 0) ? 8'hFF : 8'($urandom);
      plane  = 3'($urandom);
      #1;
      if (op == OP_MIN) begin
        int cand;
        cand = (int'(src) + 1 > 255) ? 255 : int'(src) + 1;
        e = (code != 0 && cand < int'(acc_in)) ? cand : int'(acc_in);
      end else begin
        e = int'(acc_in) + int'(code) * (1 << plane);
        if (e > 255) e = 255;
      end
      checks++;
      if (int'(acc_out) != e) begin
        failures++;
        $display("FAIL op=%0d code=%0d src=%0d acc=%0d plane=%0d -> %0d exp %0d",
                 op, code, src, acc_in, plane, acc_out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
