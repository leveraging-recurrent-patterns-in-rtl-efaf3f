// tb_graph_engine: two engines, one static with one crossbar and one dynamic
// with two crossbars (M = 2), default crossbar timing.
//   Static engine: configured once by a configuration-only request, then fed
//   random vertex data only. Dynamic engine: requests either carry a new
//   pattern for a random crossbar or reuse the pattern a crossbar holds.
// Each result is compared with a reference computed here from the pattern:
//   OP_MIN  pv[j] = min over rows i in row_mask with edge i->j and active
//           source of src[i] + 1, INF if none;
//   OP_SUM  pv[j] = sum over edges i->j of src[i], saturated at 255.
// Also checked: results come back in order with their tags, the static
// engine's crossbar is written only at initialisation (C row writes), the
// dynamic engine's write count grows by C per configuration, each engine's
// read count matches the rows and bit-planes its requests need, and the latency
// of a lone one-row OP_MIN request in the static engine is READ_CYCLES + C + 7
// cycles from acceptance to rsp_valid.
module tb_graph_engine;
  import graph_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] req_valid, req_ready, rsp_valid, rsp_ready, busy;
  ge_req_t [1:0] req;
  ge_rsp_t [1:0] rsp;
  logic [1:0][31:0] cfg_count, xb_writes, xb_reads;
  int exp_rd [2] = '{0, 0};   // expected crossbar reads per engine
  int checks = 0, failures = 0;
  ge_rsp_t expq[2][$];
  pattern_t dyn_pat[2];

  graph_engine #(.IS_STATIC(1'b1), .M(1)) u_static (
    .clk, .rst_n, .req_valid(req_valid[0]), .req_ready(req_ready[0]), .req(req[0]),
    .rsp_valid(rsp_valid[0]), .rsp_ready(rsp_ready[0]), .rsp(rsp[0]),
    .cfg_count(cfg_count[0]), .xb_writes(xb_writes[0]), .xb_reads(xb_reads[0]), .busy(busy[0]));
  graph_engine #(.IS_STATIC(1'b0), .M(2)) u_dynamic (
    .clk, .rst_n, .req_valid(req_valid[1]), .req_ready(req_ready[1]), .req(req[1]),
    .rsp_valid(rsp_valid[1]), .rsp_ready(rsp_ready[1]), .rsp(rsp[1]),
    .cfg_count(cfg_count[1]), .xb_writes(xb_writes[1]), .xb_reads(xb_reads[1]), .busy(busy[1]));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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

  function automatic vblock_t reference(alu_op_e op, pattern_t p, logic [C-1:0] rm, vblock_t v);
    vblock_t r;
    for (int j = 0; j < C; j++) begin
      int best, sum;
      best = 255; sum = 0;
      for (int i = 0; i < C; i++)
        if (p[i][j]) begin
          sum += int'(v[i]);
          if (rm[i] && v[i] != 8'hFF && int'(v[i]) + 1 < best) best = int'(v[i]) + 1;
        end
      r[j] = (op == OP_MIN) ? 8'(best) : 8'(sum > 255 ? 255 : sum);
    end
    return r;
  endfunction

  // crossbar reads of one request: OP_MIN reads each row that is in the row
  // mask and has an active source; OP_SUM reads each bit-plane once
  function automatic int reads_of(ge_req_t r);
    int n = 0;
    if (r.op == OP_SUM) return DATA_W;
    for (int i = 0; i < C; i++) if (r.row_mask[i] && r.vdata[i] != INF) n++;
    return n;
  endfunction

  function automatic logic [C-1:0] rows_of(pattern_t p);
    for (int i = 0; i < C; i++) rows_of[i] = |p[i];
  endfunction

  task automatic send(int e, ge_req_t r);
    @(negedge clk);
    req[e] = r;
    req_valid[e] = 1'b1;
    do @(posedge clk); while (!req_ready[e]);
    #1 req_valid[e] = 1'b0;
  endtask

  // result checker with random back-pressure
  for (genvar e = 0; e < 2; e++) begin : g_chk
    always @(negedge clk) rsp_ready[e] = ($urandom_range(0, 3) != 0);
    always @(posedge clk) if (rst_n && rsp_valid[e] && rsp_ready[e]) begin
      ge_rsp_t x;
      if (expq[e].size() == 0) begin
        failures++; checks++;
        $display("FAIL engine %0d: unexpected result", e);
      end else begin
        x = expq[e].pop_front();
        check($sformatf("engine %0d tag", e), int'(rsp[e].tag), int'(x.tag));
        for (int j = 0; j < C; j++)
          check($sformatf("engine %0d pv[%0d]", e, j), int'(rsp[e].pv[j]), int'(x.pv[j]));
      end
    end
  end

  pattern_t spat;
  int lat;

  initial begin
    req_valid = '0; req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- static engine: configure once with a two-edge pattern ----
    spat = '0; spat[2][1] = 1'b1; spat[2][3] = 1'b1;
    begin
      automatic ge_req_t r = '0;
      r.has_cfg = 1'b1; r.cfg = spat; r.row_mask = rows_of(spat);
      send(0, r);
    end
    wait (cfg_count[0] == 1);
    wait (!busy[0]);
    repeat (3) @(posedge clk);
    check("static writes after init", int'(xb_writes[0]), C);
    // latency of one lone request
    begin
      automatic ge_req_t r = '0;
      ge_rsp_t x;
      r.has_data = 1'b1; r.op = OP_MIN; r.row_mask = rows_of(spat);
      r.vdata = {8'd9, 8'd4, 8'd9, 8'd9}; r.tag = 20'h5;
      x.tag = r.tag; x.pv = reference(OP_MIN, spat, r.row_mask, r.vdata);
      expq[0].push_back(x);
      exp_rd[0] += reads_of(r);
      @(negedge clk);
      req[0] = r; req_valid[0] = 1'b1;
      @(posedge clk); #1 req_valid[0] = 1'b0;
      lat = 1;
      while (!rsp_valid[0]) begin @(posedge clk); #1 lat++; end
      check("lone request latency", lat, 2 + C + 7);
    end
    // ---- random traffic to both engines ----
    fork
      for (int t = 0; t < 300; t++) begin
        automatic ge_req_t r = '0;
        ge_rsp_t x;
        r.has_data = 1'b1; r.op = alu_op_e'($urandom_range(0, 1));
        r.row_mask = rows_of(spat);
        for (int i = 0; i < C; i++) r.vdata[i] = ($urandom_range(0, 3) == 0) ? INF : 8'($urandom_range(0, 60));
        r.tag = 20'($urandom);
        x.tag = r.tag; x.pv = reference(r.op, spat, r.row_mask, r.vdata);
        expq[0].push_back(x);
        exp_rd[0] += reads_of(r);
        send(0, r);
      end
      begin
        automatic int ncfg = 0;
        dyn_pat[0] = '0; dyn_pat[1] = '0;
        for (int t = 0; t < 300; t++) begin
          automatic ge_req_t r = '0;
          ge_rsp_t x;
          int cb;
          cb = $urandom_range(0, 1);
          r.has_data = 1'b1; r.cb = CB_W'(cb); r.op = alu_op_e'($urandom_range(0, 1));
          if (t < 2 || $urandom_range(0, 2) == 0) begin
            r.has_cfg = 1'b1;
            dyn_pat[cb] = pattern_t'($urandom);
            ncfg++;
          end
          r.cfg = dyn_pat[cb];
          r.row_mask = (t % 5 == 4) ? C'($urandom) : rows_of(dyn_pat[cb]);
          for (int i = 0; i < C; i++) r.vdata[i] = ($urandom_range(0, 3) == 0) ? INF : 8'($urandom_range(0, 60));
          r.tag = 20'($urandom);
          x.tag = r.tag; x.pv = reference(r.op, dyn_pat[cb], r.row_mask, r.vdata);
          expq[1].push_back(x);
          exp_rd[1] += reads_of(r);
          send(1, r);
        end
        wait (expq[1].size() == 0);
        check("dynamic configurations", int'(cfg_count[1]), ncfg);
        check("dynamic row writes", int'(xb_writes[1]), ncfg * C);
      end
    join
    wait (expq[0].size() == 0 && expq[1].size() == 0);
    check("static writes at end", int'(xb_writes[0]), C);
    check("static configurations", int'(cfg_count[0]), 1);
    check("static engine crossbar reads", int'(xb_reads[0]), exp_rd[0]);
    check("dynamic engine crossbar reads", int'(xb_reads[1]), exp_rd[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
