// tb_xbar_driver: random vertex data, rows, planes and patterns. For OP_MIN
// the wordlines must be one-hot on the selected row when that source is
// active (not INF) and all low otherwise; for OP_SUM they must carry the
// selected bit of every source value; nothing is driven without rd_en. The
// write bits must be the selected pattern row.
module tb_xbar_driver;
  import graph_pkg::*;
  alu_op_e op;
  logic rd_en;
  logic [$clog2(C)-1:0] rd_row, wr_row;
  logic [$clog2(DATA_W)-1:0] rd_plane;
  vblock_t vdata;
  pattern_t cfg;
  logic [C-1:0] wl, wr_bits;
  int checks = 0, failures = 0;

  xbar_driver dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [C-1:0] e;
      int sh;
      logic [15:0] wexp;
      op       = alu_op_e'($urandom_range(0, 1));
      rd_en    = ($urandom_range(0, 7) != 0);
      rd_row   = $clog2(C)'($urandom_range(0, C-1));
      wr_row   = $clog2(C)'($urandom_range(0, C-1));
      rd_plane = $clog2(DATA_W)'($urandom_range(0, DATA_W-1));
      for (int i = 0; i < C; i++)
        vdata[i] = ($urandom_range(0, 3) == 0) ? INF : DATA_W'($urandom);
      cfg = pattern_t'({$urandom, $urandom});
      #1;
      e = '0;
      if (rd_en) begin
        if (op == OP_MIN) e[rd_row] = (vdata[rd_row] != 8'hFF);
        else for (int i = 0; i < C; i++) e[i] = (vdata[i] >> rd_plane) & 1;
      end
      checks++;
      if (wl !== e) begin failures++; $display("FAIL wl=%b exp=%b", wl, e); end
      sh = int'(wr_row) * C;
      wexp = 16'(cfg) >> sh;
      checks++;
      if (wr_bits !== wexp[C-1:0]) begin failures++; $display("FAIL wr_bits %b cfg=%h row=%0d", wr_bits, cfg, wr_row); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
