// tb_workload_bfs: BFS workload on the configurations of the evaluation.
//
// The evaluation runs BFS on large social, web and peer-to-peer graphs (from
// 5K to 875K vertices). Those graphs are far too large to simulate at RTL
// level, so this testbench generates a scaled-down graph with the same kind
// of structure: 128 vertices, a few hub vertices that hold most edges (a
// skewed, power-law-like out-degree), a long chain for many BFS levels and
// some dense windows that give rare patterns. The same graph runs on five
// accelerators at once, each with its own copy of main memory:
//   cfg 0..3  32 engines of one 4 x 4 crossbar, with N = 0, 8, 16 and 31
//             static engines (points of the static/dynamic sweep; N = 16 is
//             the default and the sweep's best point);
//   cfg 4     6 engines, 4 static and 2 dynamic, 4 crossbars each (the
//             configuration used to study per-engine activity).
// Each configuration gets its own tables from the host preprocessing (the
// static set depends on N and M) and runs BFS from vertex 0 in column-major
// order. Checked for each: every BFS level against a reference BFS; static
// row writes equal C per static pattern; no dynamic writes without dynamic
// patterns; N = 0 sends nothing to static engines; configuration 4 uses
// crossbars 1..3 of its static engines. Across configurations: making 16
// engines static removes dynamic writes compared with no static engines.
// The crossbar reads and writes of each of the six engines of configuration
// 4 are printed, as in a per-engine activity study.
// The cycles of each run are printed as speedup over N = 0, the measure of
// the sweep; the speedup itself is reported, not checked.
module tb_workload_bfs;
  import graph_pkg::*;
  import graph_tb_pkg::*;

  localparam int NV = 128, NB = NV / C;
  localparam int NCFG = 5;
  localparam int TS [NCFG] = '{32, 32, 32, 32, 6};
  localparam int NS [NCFG] = '{0, 8, 16, 31, 4};
  localparam int MS [NCFG] = '{1, 1, 1, 1, 4};
  localparam int DEPTH = 1024;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [PAT_W:0] num_ct [NCFG];
  logic [ST_AW:0] num_st [NCFG];
  logic [NCFG-1:0] done;
  logic [31:0] n_passes [NCFG], n_static [NCFG], n_dyn_hit [NCFG], n_dyn_cfg [NCFG];
  logic [31:0] stat_w [NCFG], dyn_w [NCFG], stat_r [NCFG], dyn_r [NCFG];

  ct_entry_t ct_mem [NCFG][DEPTH];
  st_entry_t st_mem [NCFG][DEPTH];
  vblock_t   vx_mem [NCFG][NB];

  always #5 clk = ~clk;

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    logic busy, ct_en, st_en, vs_en, va_en, va_we;
    logic [PAT_W-1:0] ct_addr;
    logic [ST_AW-1:0] st_addr;
    logic [BLK_W-1:0] vs_addr, va_addr;
    ct_entry_t ct_rdata;
    st_entry_t st_rdata;
    vblock_t vs_rdata, va_rdata, va_wdata;
    logic [31:0] n_stall, n_barrier, n_xb_configs;
    logic [TS[i]-1:0] engine_busy;

    graph_accel #(.T(TS[i]), .N(NS[i]), .M(MS[i])) u_acc (
      .clk, .rst_n, .start, .op(OP_MIN), .row_major(1'b0),
      .num_ct(num_ct[i]), .num_st(num_st[i]), .max_passes(8'd100),
      .src_base('0), .dst_base('0), .busy, .done(done[i]),
      .ct_en, .ct_addr, .ct_rdata, .st_en, .st_addr, .st_rdata,
      .vs_en, .vs_addr, .vs_rdata,
      .va_en, .va_we, .va_addr, .va_wdata, .va_rdata,
      .n_passes(n_passes[i]), .n_static(n_static[i]), .n_dyn_hit(n_dyn_hit[i]),
      .n_dyn_cfg(n_dyn_cfg[i]), .n_stall, .n_barrier,
      .static_xb_writes(stat_w[i]), .dynamic_xb_writes(dyn_w[i]),
      .static_xb_reads(stat_r[i]), .dynamic_xb_reads(dyn_r[i]),
      .n_xb_configs, .engine_busy
    );

    // main memory of this configuration, one-cycle read latency
    always @(posedge clk) begin
      if (ct_en) ct_rdata <= ct_mem[i][ct_addr[9:0]];
      if (st_en) st_rdata <= st_mem[i][st_addr[9:0]];
      if (vs_en) vs_rdata <= vx_mem[i][vs_addr[4:0]];
      if (va_en) begin
        if (va_we) vx_mem[i][va_addr[4:0]] <= va_wdata;
        else       va_rdata <= vx_mem[i][va_addr[4:0]];
      end
    end
  end

  // Row writes of crossbars 1..3 of the static engines of configuration 4:
  // static patterns of rank 4..15 are placed there.
  int upper_cb_writes;
  always_comb begin
    upper_cb_writes = 0;
    upper_cb_writes += int'(g_cfg[4].u_acc.g_ge[0].u_ge.g_cb[1].u_xb.write_ops);
    upper_cb_writes += int'(g_cfg[4].u_acc.g_ge[1].u_ge.g_cb[2].u_xb.write_ops);
    upper_cb_writes += int'(g_cfg[4].u_acc.g_ge[3].u_ge.g_cb[3].u_xb.write_ops);
  end

  int checks = 0, failures = 0;

  function automatic int engine_reads(int g);
    case (g)
      0: return int'(g_cfg[4].u_acc.g_ge[0].u_ge.xb_reads);
      1: return int'(g_cfg[4].u_acc.g_ge[1].u_ge.xb_reads);
      2: return int'(g_cfg[4].u_acc.g_ge[2].u_ge.xb_reads);
      3: return int'(g_cfg[4].u_acc.g_ge[3].u_ge.xb_reads);
      4: return int'(g_cfg[4].u_acc.g_ge[4].u_ge.xb_reads);
      default: return int'(g_cfg[4].u_acc.g_ge[5].u_ge.xb_reads);
    endcase
  endfunction

  function automatic int engine_writes(int g);
    case (g)
      0: return int'(g_cfg[4].u_acc.g_ge[0].u_ge.xb_writes);
      1: return int'(g_cfg[4].u_acc.g_ge[1].u_ge.xb_writes);
      2: return int'(g_cfg[4].u_acc.g_ge[2].u_ge.xb_writes);
      3: return int'(g_cfg[4].u_acc.g_ge[3].u_ge.xb_writes);
      4: return int'(g_cfg[4].u_acc.g_ge[4].u_ge.xb_writes);
      default: return int'(g_cfg[4].u_acc.g_ge[5].u_ge.xb_writes);
    endcase
  endfunction

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: done=%b", done);
    for (int i = 0; i < NCFG; i++)
      $display("  cfg%0d passes=%0d static=%0d dyn_hit=%0d dyn_cfg=%0d", i, n_passes[i],
               n_static[i], n_dyn_hit[i], n_dyn_cfg[i]);
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

  bit adj[];
  ct_entry_t ct[$];
  st_entry_t st[$];
  int level[];
  int npat [NCFG];
  int cycles [NCFG];

  initial begin
    adj = new[NV * NV];
    foreach (adj[k]) adj[k] = 1'b0;
    for (int v = 0; v < 50; v++) adj[v*NV + v + 1] = 1'b1;             // chain
    // skewed out-degree: the product of two uniform numbers favours low ids,
    // so vertices 0..15 become hubs
    repeat (360) begin
      int u, v;
      u = ($urandom_range(0, NV-1) * $urandom_range(0, NV-1)) / NV;
      v = $urandom_range(0, NV-1);
      if (u != v) adj[u*NV + v] = 1'b1;
    end
    repeat (10) begin                                                  // dense windows
      int sb, db;
      pattern_t p;
      sb = $urandom_range(0, NB-1); db = $urandom_range(0, NB-1);
      p = pattern_t'($urandom);
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) adj[(sb*C+i)*NV + db*C + j] |= p[i][j];
    end
    ref_bfs(adj, NV, 0, level);

    for (int i = 0; i < NCFG; i++) begin
      preprocess(adj, NV, NS[i], MS[i], 1'b0, ct, st);
      if (ct.size() > DEPTH || st.size() > DEPTH) $fatal(1, "tables too large");
      foreach (ct[k]) ct_mem[i][k] = ct[k];
      foreach (st[k]) st_mem[i][k] = st[k];
      num_ct[i] = (PAT_W+1)'(ct.size());
      num_st[i] = (ST_AW+1)'(st.size());
      npat[i] = ct.size();
      for (int b = 0; b < NB; b++) vx_mem[i][b] = {C{INF}};
      vx_mem[i][0][0] = 8'd0;
    end
    $display("graph: %0d vertices, %0d subgraphs, %0d patterns", NV, st.size(), npat[0]);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    foreach (cycles[i]) cycles[i] = 0;
    // done pulses once per configuration: note the cycle of each pulse
    begin
      int t, left;
      t = 1;
      left = NCFG;
      while (left > 0) begin
        for (int i = 0; i < NCFG; i++)
          if (done[i] && cycles[i] == 0) begin
            cycles[i] = t;
            left--;
          end
        @(negedge clk);
        t++;
      end
    end
    repeat (2) @(negedge clk);

    for (int i = 0; i < NCFG; i++) begin
      int nst;
      nst = (npat[i] < NS[i] * MS[i]) ? npat[i] : NS[i] * MS[i];
      for (int v = 0; v < NV; v++)
        check($sformatf("cfg%0d BFS level v%0d", i, v), int'(vx_mem[i][v / C][v % C]), level[v]);
      check($sformatf("cfg%0d static row writes", i), int'(stat_w[i]), nst * C);
      if (npat[i] <= NS[i] * MS[i])
        check($sformatf("cfg%0d no dynamic writes", i), int'(dyn_w[i]), 0);
      $display("cfg%0d T=%0d N=%0d M=%0d: %0d cycles (%0.2f times the speed of cfg0), %0d passes, static=%0d dyn_hit=%0d dyn_cfg=%0d, row writes static=%0d dynamic=%0d, reads static=%0d dynamic=%0d",
               i, TS[i], NS[i], MS[i], cycles[i], real'(cycles[0]) / real'(cycles[i]), n_passes[i],
               n_static[i], n_dyn_hit[i], n_dyn_cfg[i], stat_w[i], dyn_w[i], stat_r[i], dyn_r[i]);
    end
    // per-engine activity of the 6-engine configuration
    for (int g = 0; g < 6; g++)
      $display("cfg4 GE%0d (%0s): crossbar reads=%0d row writes=%0d", g, (g < 4) ? "static" : "dynamic",
               engine_reads(g), engine_writes(g));
    check("N=0 sends nothing to static engines", int'(n_static[0]), 0);
    check("N=0 reads nothing in static engines", int'(stat_r[0]), 0);
    check("cfg4 per-engine reads add up", engine_reads(0) + engine_reads(1) + engine_reads(2) + engine_reads(3),
          int'(stat_r[4]));
    check("N=16 has fewer dynamic writes than N=0", int'(dyn_w[2] < dyn_w[0]), 1);
    check("cfg4 static patterns spread over crossbars 1..3", int'(upper_cb_writes > 0), 1);
    check("cfg4 processed subgraphs on static engines", int'(n_static[4] > 0), 1);
    check("cfg4 reconfigured its dynamic engines", int'(n_dyn_cfg[4] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
