// tb_ge_controller: runs random requests through the engine controller alone
// (READ_CYCLES = 3, WRITE_CYCLES = 5) and checks the control sequence:
//   - C row writes, rows 0..C-1, each WRITE_CYCLES apart, when has_cfg;
//   - OP_MIN: one read per row that is in row_mask and has an active source,
//     in increasing row order; OP_SUM: DATA_W reads, planes 0..DATA_W-1;
//   - READ_CYCLES wordline cycles and one S/H sample per read, C ADC starts
//     per read with selects 0..C-1;
//   - out_valid after exactly 3 + C*WRITE_CYCLES*has_cfg +
//     reads*(READ_CYCLES + C + 1) cycles, and held until out_ready.
module tb_ge_controller;
  import graph_pkg::*;
  localparam int R = 3, WC = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_take, out_ready = 1'b0;
  ge_req_t req;
  logic wr_en, rd_en, sh_sample, adc_start, acc_clear, out_valid, busy;
  logic [$clog2(C)-1:0] wr_row, rd_row, adc_sel, alu_lane, alu_row;
  logic [$clog2(DATA_W)-1:0] rd_plane, alu_plane;
  int checks = 0, failures = 0;

  ge_controller #(.READ_CYCLES(R), .WRITE_CYCLES(WC)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int exp_rows[$], got_rows[$], wr_rows[$], sels[$];
      int nrd, nrd_cyc, nsh, nadc, cyc, lat;
      @(negedge clk);
      req = '0;
      req.has_cfg  = $urandom_range(0, 1);
      req.has_data = (t % 7 == 3) ? 1'b0 : 1'b1;
      req.op       = alu_op_e'($urandom_range(0, 1));
      req.row_mask = C'($urandom);
      for (int i = 0; i < C; i++) req.vdata[i] = ($urandom_range(0, 2) == 0) ? INF : 8'($urandom_range(0, 20));
      exp_rows = {};
      if (req.has_data) begin
        if (req.op == OP_MIN) begin
          for (int i = 0; i < C; i++) if (req.row_mask[i] && req.vdata[i] != INF) exp_rows.push_back(i);
        end else for (int b = 0; b < DATA_W; b++) exp_rows.push_back(b);
      end
      lat = 3 + (req.has_cfg ? C * WC : 0) + exp_rows.size() * (R + C + 1);
      req_valid = 1'b1;
      // cycle of the take
      @(posedge clk);
      check("take", int'(req_take), 1);
      @(negedge clk);
      req_valid = 1'b0;
      nrd = 0; nrd_cyc = 0; nsh = 0; nadc = 0; cyc = 1;
      while (!out_valid && busy && cyc < 5000) begin
        if (wr_en) wr_rows.push_back(int'(wr_row));
        if (rd_en) nrd_cyc++;
        if (sh_sample) begin
          nsh++;
          got_rows.push_back(req.op == OP_MIN ? int'(rd_row) : int'(rd_plane));
        end
        if (adc_start) begin nadc++; sels.push_back(int'(adc_sel)); end
        @(negedge clk);
        cyc++;
      end
      if (req.has_data) begin
        check("latency", cyc, lat);
        // out_valid must hold until accepted
        repeat ($urandom_range(0, 3)) begin
          @(negedge clk);
          check("out held", int'(out_valid), 1);
        end
        out_ready = 1'b1;
        @(negedge clk);
        out_ready = 1'b0;
        check("idle after out", int'(busy), 0);
      end else check("no output", int'(out_valid), 0);
      check("row writes", wr_rows.size(), req.has_cfg ? C : 0);
      foreach (wr_rows[k]) check("write row order", wr_rows[k], k);
      check("reads", got_rows.size(), exp_rows.size());
      foreach (exp_rows[k]) if (k < got_rows.size()) check("read row/plane", got_rows[k], exp_rows[k]);
      check("read cycles", nrd_cyc, exp_rows.size() * R);
      check("adc starts", nadc, exp_rows.size() * C);
      foreach (sels[k]) check("adc select", sels[k], k % C);
      got_rows = {}; wr_rows = {}; sels = {};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
