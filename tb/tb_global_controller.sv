// tb_global_controller: the scheduler alone, with T = 4 engines (N = 2
// static, 2 dynamic, one crossbar each) modelled in the testbench. A model
// engine keeps the pattern of its crossbar, computes each result from it
// (OP_MIN reference) after a random delay, and answers in order through one
// shared return channel. Checked:
//   - initialisation sends each static pattern, configuration only, to the
//     engine named in the configuration table, before any vertex data;
//   - a static subgraph goes to its static engine without configuration;
//   - a dynamic subgraph goes to a dynamic engine that either holds its
//     pattern already (no configuration) or receives it with the request;
//   - every request carries the source block values read from vertex memory and
//     the destination block as tag;
//   - no subgraph of a new batch is sent before all results of the previous
//     batch have been written back (column-major batches);
//   - the final vertex values equal BFS levels from vertex 0.
module tb_global_controller;
  import graph_pkg::*;
  import graph_tb_pkg::*;
  localparam int T = 4, N = 2, NV = 32, NB = NV / C;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  alu_op_e op = OP_MIN;
  logic row_major = 1'b0;
  logic [PAT_W:0] num_ct;
  logic [ST_AW:0] num_st;
  logic [7:0] max_passes = 8'd40;
  logic [BLK_W-1:0] src_base = '0, dst_base = '0;
  logic busy, done, ct_en, st_en, vs_en, va_en, va_we;
  logic [PAT_W-1:0] ct_addr;
  logic [ST_AW-1:0] st_addr;
  logic [BLK_W-1:0] vs_addr, va_addr;
  ct_entry_t ct_rdata;
  st_entry_t st_rdata;
  vblock_t vs_rdata, va_rdata, va_wdata;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  logic [GE_W-1:0] req_ge;
  ge_req_t req;
  ge_rsp_t rsp;
  logic [31:0] n_passes, n_static, n_dyn_hit, n_dyn_cfg, n_stall, n_barrier;
  int checks = 0, failures = 0;

  global_controller #(.T(T), .N(N), .M(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
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

  // ---------------- memory model ----------------
  ct_entry_t ct_mem [256];
  st_entry_t st_mem [256];
  vblock_t   vx_mem [NB];
  always_ff @(posedge clk) begin
    if (ct_en) ct_rdata <= ct_mem[ct_addr[7:0]];
    if (st_en) st_rdata <= st_mem[st_addr[7:0]];
    if (vs_en) vs_rdata <= vx_mem[vs_addr[2:0]];
    if (va_en) begin
      if (va_we) vx_mem[va_addr[2:0]] <= va_wdata;
      else       va_rdata <= vx_mem[va_addr[2:0]];
    end
  end

  // ---------------- engine models ----------------
  pattern_t   xb [T];
  bit         xb_ok [T];
  ge_rsp_t    pend [$];
  int         pend_t [$];
  int         cyc = 0;
  int         data_seen = 0, bad_batch = 0, writes_done = 0, sent_cnt = 0;
  logic [BLK_W-1:0] cur_batch;
  bit         batch_init = 0;
  ct_entry_t  ct[$];
  st_entry_t  st[$];

  function automatic vblock_t model_min(pattern_t p, vblock_t v);
    vblock_t r;
    for (int j = 0; j < C; j++) begin
      int best;
      best = 255;
      for (int i = 0; i < C; i++)
        if (p[i][j] && v[i] != 8'hFF && int'(v[i]) + 1 < best) best = int'(v[i]) + 1;
      r[j] = 8'(best);
    end
    return r;
  endfunction

  always @(negedge clk) req_ready = ($urandom_range(0, 4) != 0);
  always @(posedge clk) cyc++;
  vblock_t fetched;
  always @(posedge clk) if (vs_en) begin
    check("source read address", int'(vs_addr), int'(src_base + dut.cur_st.src_blk));
    fetched = vx_mem[vs_addr[2:0]];
  end
  always @(posedge clk) if (rst_n && va_en && va_we) writes_done++;

  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    int g, pi;
    g = int'(req_ge);
    check("engine in range", int'(g < T), 1);
    if (!req.has_data) begin
      // initialisation
      check("init only before data", data_seen, 0);
      check("init goes to static engine", int'(g < N), 1);
      check("init carries config", int'(req.has_cfg), 1);
      xb[g] = req.cfg; xb_ok[g] = 1;
    end else begin
      data_seen++;
      sent_cnt++;
      // locate the subgraph being sent: the controller's current ST entry
      pi = int'(dut.cur_st.pat);
      check("request source values", int'(req.vdata == fetched), 1);
      check("request tag", int'(req.tag), int'(dut.cur_st.dst_blk));
      if (ct[pi].is_static) begin
        check("static pattern -> its static engine", g, int'(ct[pi].ge));
        check("static: no configuration", int'(req.has_cfg), 0);
      end else begin
        check("dynamic pattern -> dynamic engine", int'(g >= N), 1);
        if (req.has_cfg) begin
          check("dynamic config is the pattern", int'(req.cfg == ct[pi].pattern), 1);
          xb[g] = req.cfg; xb_ok[g] = 1;
        end
      end
      check("engine holds the pattern", int'(xb_ok[g] && xb[g] == ct[pi].pattern), 1);
      // batch barrier
      if (batch_init && req.tag != cur_batch && sent_cnt - 1 != writes_done) bad_batch++;
      cur_batch = req.tag; batch_init = 1;
      begin
        ge_rsp_t r;
        r.tag = req.tag;
        r.pv  = model_min(xb[g], req.vdata);
        pend.push_back(r);
        pend_t.push_back(cyc + $urandom_range(1, 12));
      end
    end
  end

  // in-order return channel
  always @(negedge clk) begin
    rsp_valid = (pend.size() > 0) && (pend_t[0] <= cyc);
    rsp       = (pend.size() > 0) ? pend[0] : '0;
  end
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    void'(pend.pop_front());
    void'(pend_t.pop_front());
  end

  bit adj[];
  int level[];

  initial begin
    foreach (xb_ok[g]) xb_ok[g] = 0;
    adj = new[NV * NV];
    foreach (adj[k]) adj[k] = 1'b0;
    for (int v = 0; v < 20; v++) adj[v*NV + v + 1] = 1'b1;
    repeat (40) adj[$urandom_range(0, NV-1) * NV + $urandom_range(0, NV-1)] = 1'b1;
    ref_bfs(adj, NV, 0, level);
    preprocess(adj, NV, N, 1, 1'b0, ct, st);
    foreach (ct[k]) ct_mem[k] = ct[k];
    foreach (st[k]) st_mem[k] = st[k];
    num_ct = (PAT_W+1)'(ct.size());
    num_st = (ST_AW+1)'(st.size());
    for (int b = 0; b < NB; b++) vx_mem[b] = {C{INF}};
    vx_mem[0][0] = 8'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    @(negedge clk);
    for (int v = 0; v < NV; v++)
      check($sformatf("BFS level v%0d", v), int'(vx_mem[v / C][v % C]), level[v]);
    check("batch barrier respected", bad_batch, 0);
    check("static subgraphs counted", int'(n_static > 0), 1);
    check("dynamic reconfigurations counted", int'(n_dyn_cfg > 0), 1);
    check("all results aggregated", writes_done, sent_cnt);
    check("counts add up", int'(n_static + n_dyn_hit + n_dyn_cfg), sent_cnt);
    $display("passes=%0d static=%0d dyn_hit=%0d dyn_cfg=%0d stall=%0d barrier=%0d",
             n_passes, n_static, n_dyn_hit, n_dyn_cfg, n_stall, n_barrier);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
