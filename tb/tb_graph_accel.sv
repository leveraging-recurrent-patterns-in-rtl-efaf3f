// tb_graph_accel: end-to-end test of the accelerator at its default size
// (32 engines, 16 static, one 4 x 4 crossbar each, 8-bit vertex data).
//
// The testbench plays host and main memory. It builds a 64-vertex directed
// graph with a long chain (many BFS levels), random single edges (which give
// the frequent one-edge patterns), one two-edge pattern planted in several
// windows (a rare pattern that recurs) and dense random windows (many
// distinct rare patterns, more than the dynamic crossbars can hold). It
// preprocesses the graph into the configuration and subgraph tables, loads
// them into a memory model with one-cycle read latency, and runs:
//   1. BFS from vertex 0, column-major subgraph order;
//   2. the same BFS with row-major order;
//   3. one gather-sum pass (OP_SUM) into a separate destination array.
// Results are compared with reference models. Each mechanism of the design
// must occur at least once: static-engine processing, a dynamic crossbar
// reused without rewrite, a dynamic crossbar rewritten (and, with more
// patterns than dynamic crossbars, replaced), a stall on a full input buffer,
// a wait at a batch boundary, more than one BFS pass, row-major order and
// OP_SUM. Each run must write every static crossbar exactly once (C row
// writes per static pattern). Crossbar reads are counted too: a BFS run must
// read fewer than C rows per subgraph and pass (row skipping), and the
// gather-sum pass exactly one read per bit-plane of each subgraph.
module tb_graph_accel;
  import graph_pkg::*;
  import graph_tb_pkg::*;

  localparam int NV = 64, NB = NV / C;
  localparam int T_GE = 32, N_ST = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  alu_op_e op = OP_MIN;
  logic row_major = 1'b0;
  logic [PAT_W:0] num_ct = '0;
  logic [ST_AW:0] num_st = '0;
  logic [7:0] max_passes = 8'd64;
  logic [BLK_W-1:0] src_base = '0, dst_base = '0;
  logic busy, done, ct_en, st_en, vs_en, va_en, va_we;
  logic [PAT_W-1:0] ct_addr;
  logic [ST_AW-1:0] st_addr;
  logic [BLK_W-1:0] vs_addr, va_addr;
  ct_entry_t ct_rdata;
  st_entry_t st_rdata;
  vblock_t vs_rdata, va_rdata, va_wdata;
  logic [31:0] n_passes, n_static, n_dyn_hit, n_dyn_cfg, n_stall, n_barrier;
  logic [31:0] static_xb_writes, dynamic_xb_writes, n_xb_configs;
  logic [31:0] static_xb_reads, dynamic_xb_reads;
  logic [T_GE-1:0] engine_busy;

  graph_accel dut (.*);

  always #5 clk = ~clk;

  // ---------------- main memory model ----------------
  ct_entry_t ct_mem [1024];
  st_entry_t st_mem [1024];
  vblock_t   vx_mem [64];
  always_ff @(posedge clk) begin
    if (ct_en) ct_rdata <= ct_mem[ct_addr[9:0]];
    if (st_en) st_rdata <= st_mem[st_addr[9:0]];
    if (vs_en) vs_rdata <= vx_mem[vs_addr[5:0]];
    if (va_en) begin
      if (va_we) vx_mem[va_addr[5:0]] <= va_wdata;
      else       va_rdata <= vx_mem[va_addr[5:0]];
    end
  end

  int checks = 0, failures = 0;
  int seen_static = 0, seen_dyn_hit = 0, seen_dyn_cfg = 0, seen_replace = 0;
  int seen_stall = 0, seen_barrier = 0, seen_multipass = 0, seen_rowmajor = 0, seen_sum = 0;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
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

  bit adj[];
  ct_entry_t ct[$];
  st_entry_t st[$];

  task automatic load_tables(bit rm);
    preprocess(adj, NV, N_ST, 1, rm, ct, st);
    foreach (ct[k]) ct_mem[k] = ct[k];
    foreach (st[k]) st_mem[k] = st[k];
    num_ct = (PAT_W+1)'(ct.size());
    num_st = (ST_AW+1)'(st.size());
  endtask

  task automatic run(output int cycles);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  int level[];
  int cyc, sw_before, nstatic_pat, rd_before;

  task automatic bfs_run(bit rm);
    row_major = rm;
    op = OP_MIN;
    src_base = '0; dst_base = '0;
    max_passes = 8'd64;
    load_tables(rm);
    for (int b = 0; b < 64; b++) vx_mem[b] = {C{INF}};
    vx_mem[0][0] = 8'd0;
    sw_before = int'(static_xb_writes);
    rd_before = int'(static_xb_reads + dynamic_xb_reads);
    run(cyc);
    nstatic_pat = (ct.size() < N_ST) ? ct.size() : N_ST;
    check("static row writes per run", int'(static_xb_writes) - sw_before, nstatic_pat * C);
    for (int v = 0; v < NV; v++)
      check($sformatf("BFS level v%0d (row_major=%0d)", v, rm), int'(vx_mem[v / C][v % C]), level[v]);
    $display("BFS row_major=%0d: %0d cycles, %0d passes, %0d subgraphs/pass, %0d patterns, static=%0d dyn_hit=%0d dyn_cfg=%0d stall=%0d barrier=%0d",
             rm, cyc, n_passes, st.size(), ct.size(), n_static, n_dyn_hit, n_dyn_cfg, n_stall, n_barrier);
    if (n_static > 0) seen_static++;
    if (n_dyn_hit > 0) seen_dyn_hit++;
    if (n_dyn_cfg > 0) seen_dyn_cfg++;
    if (n_dyn_cfg > (T_GE - N_ST)) seen_replace++;
    if (n_stall > 0) seen_stall++;
    if (n_barrier > 0) seen_barrier++;
    if (n_passes > 1) seen_multipass++;
    if (rm) seen_rowmajor++;
    check("passes within limit", int'(n_passes <= 64), 1);
    // row addresses: empty rows and inactive sources are never read
    check("BFS reads fewer than C per subgraph", int'(int'(static_xb_reads + dynamic_xb_reads) - rd_before
                                                    < C * st.size() * int'(n_passes)), 1);
  endtask

  initial begin
    pattern_t planted;
    int val[], init[], outv[];
    adj = new[NV * NV];
    foreach (adj[k]) adj[k] = 1'b0;
    for (int v = 0; v < 40; v++) adj[v*NV + v + 1] = 1'b1;                 // chain
    repeat (70) adj[$urandom_range(0, NV-1) * NV + $urandom_range(0, NV-1)] = 1'b1;
    for (int k = 0; k < 24; k++) begin
      int sb, db;
      pattern_t p;
      sb = $urandom_range(0, NB-1); db = $urandom_range(0, NB-1);
      p = pattern_t'($urandom) | pattern_t'(16'h0421);
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) adj[(sb*C+i)*NV + db*C + j] = p[i][j];
    end
    // seventeen two-edge patterns, four windows each, so that more than 16
    // patterns are more frequent than the planted rare pattern below
    begin
      int n, w, sb, db;
      n = 0; w = 0;
      while (n < 17 * 4) begin
        pattern_t q;
        int qi, a, b;
        w = (w + 37) % 256;
        sb = w / NB; db = w % NB;
        if ((db == 2 && sb >= 9 && sb <= 11) || (db == 5 && sb < 8)) continue;
        qi = n / 4;
        a = qi % 16; b = (qi * 7 + 3 + qi / 16) % 16;
        q = '0; q[a / C][a % C] = 1'b1; q[b / C][b % C] = 1'b1;
        for (int i = 0; i < C; i++)
          for (int j = 0; j < C; j++) adj[(sb*C+i)*NV + db*C + j] = q[i][j];
        n++;
      end
    end
    // one rare two-edge pattern in three consecutive windows of one column
    planted = '0; planted[0][1] = 1'b1; planted[3][2] = 1'b1;
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) adj[((9+k)*C+i)*NV + 2*C + j] = planted[i][j];
    // the same one-edge pattern in eight windows of one column: one static
    // engine receives a burst of eight subgraphs in one batch
    for (int sb = 0; sb < 8; sb++) begin
      for (int i = 0; i < C; i++)
        for (int j = 0; j < C; j++) adj[(sb*C+i)*NV + 5*C + j] = 1'b0;
      adj[(sb*C+1)*NV + 5*C + 2] = 1'b1;
    end
    ref_bfs(adj, NV, 0, level);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    preprocess(adj, NV, N_ST, 1, 1'b0, ct, st);
    foreach (ct[k]) if (ct[k].pattern == planted) check("planted pattern is dynamic", int'(ct[k].is_static), 0);
    bfs_run(1'b0);
    bfs_run(1'b1);

    // gather-sum pass: src values in blocks 0..15, results in blocks 16..31
    op = OP_SUM; row_major = 1'b0; max_passes = 8'd1;
    src_base = '0; dst_base = BLK_W'(NB);
    load_tables(1'b0);
    val = new[NV]; init = new[NV];
    for (int v = 0; v < NV; v++) begin
      val[v] = $urandom_range(0, 3);
      init[v] = $urandom_range(0, 5);
      vx_mem[v / C][v % C] = 8'(val[v]);
      vx_mem[NB + v / C][v % C] = 8'(init[v]);
    end
    ref_sum(adj, NV, val, init, outv);
    rd_before = int'(static_xb_reads + dynamic_xb_reads);
    run(cyc);
    check("sum: one read per bit-plane and subgraph", int'(static_xb_reads + dynamic_xb_reads) - rd_before,
          DATA_W * st.size());
    for (int v = 0; v < NV; v++) begin
      check($sformatf("sum v%0d", v), int'(vx_mem[NB + v / C][v % C]), outv[v]);
      check($sformatf("sum source v%0d untouched", v), int'(vx_mem[v / C][v % C]), val[v]);
    end
    check("sum: one pass", int'(n_passes), 1);
    seen_sum++;
    if (n_stall > 0) seen_stall++;
    $display("SUM: %0d cycles", cyc);

    check("mechanism: static engine processing", int'(seen_static > 0), 1);
    check("mechanism: dynamic crossbar reuse", int'(seen_dyn_hit > 0), 1);
    check("mechanism: dynamic reconfiguration", int'(seen_dyn_cfg > 0), 1);
    check("mechanism: dynamic replacement", int'(seen_replace > 0), 1);
    check("mechanism: input buffer stall", int'(seen_stall > 0), 1);
    check("mechanism: batch barrier", int'(seen_barrier > 0), 1);
    check("mechanism: several BFS passes", int'(seen_multipass > 0), 1);
    check("mechanism: row-major order", int'(seen_rowmajor > 0), 1);
    check("mechanism: gather-sum", int'(seen_sum > 0), 1);
    $display("mechanisms: static=%0d dyn_hit=%0d dyn_cfg=%0d replace=%0d stall=%0d barrier=%0d multipass=%0d rowmajor=%0d sum=%0d",
             seen_static, seen_dyn_hit, seen_dyn_cfg, seen_replace, seen_stall, seen_barrier,
             seen_multipass, seen_rowmajor, seen_sum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
