// graph_accel: pattern-based ReRAM graph accelerator (top level).
//
// T graph engines of M C x C crossbars each sit behind one interconnect. The
// first N engines are static: the N*M most frequent subgraph patterns are
// written into their crossbars once, at initialisation, and never again. The
// remaining T-N engines are dynamic and are rewritten at run time for the
// rare patterns. A global controller streams the subgraph table, sends each
// subgraph's source vertex values to the engine holding its pattern (or
// reconfigures a dynamic engine), and reduces the engines' results into the
// destination vertex values.
//
// Main memory is outside this module: its configuration table (ct_*),
// subgraph table (st_*) and vertex data (vs_* read port for dispatch, va_*
// read/write port for aggregation) are brought out as synchronous memory
// ports with one-cycle read latency. The host fills the tables (by the
// preprocessing described in the README), sets num_ct/num_st/op/row_major/
// max_passes/src_base/dst_base and pulses `start`; `done` pulses when the last
// pass has been aggregated. The counters report the engines' activity.
//
// Defaults follow the paper's main configuration: 32 engines of one 4 x 4
// crossbar, 16 of them static (the best split in its engine-count study),
// 8-bit vertex data (C and DATA_W are in graph_pkg). Crossbar read and write
// times assume a 1 GHz clock against the paper's 1.3 ns read and 20.2 ns
// write; buffer depths are this design's choice.
module graph_accel
  import graph_pkg::*;
#(
  parameter int unsigned T            = 32,
  parameter int unsigned N            = 16,
  parameter int unsigned M            = 1,
  parameter int unsigned IN_DEPTH     = 4,
  parameter int unsigned OUT_DEPTH    = 4,
  parameter int unsigned READ_CYCLES  = 2,
  parameter int unsigned WRITE_CYCLES = 21
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  alu_op_e          op,
  input  logic             row_major,
  input  logic [PAT_W:0]   num_ct,
  input  logic [ST_AW:0]   num_st,
  input  logic [7:0]       max_passes,
  input  logic [BLK_W-1:0] src_base,
  input  logic [BLK_W-1:0] dst_base,
  output logic             busy,
  output logic             done,
  output logic             ct_en,
  output logic [PAT_W-1:0] ct_addr,
  input  ct_entry_t        ct_rdata,
  output logic             st_en,
  output logic [ST_AW-1:0] st_addr,
  input  st_entry_t        st_rdata,
  output logic             vs_en,
  output logic [BLK_W-1:0] vs_addr,
  input  vblock_t          vs_rdata,
  output logic             va_en,
  output logic             va_we,
  output logic [BLK_W-1:0] va_addr,
  output vblock_t          va_wdata,
  input  vblock_t          va_rdata,
  output logic [31:0]      n_passes,
  output logic [31:0]      n_static,
  output logic [31:0]      n_dyn_hit,
  output logic [31:0]      n_dyn_cfg,
  output logic [31:0]      n_stall,
  output logic [31:0]      n_barrier,
  output logic [31:0]      static_xb_writes,   // row writes, static engines
  output logic [31:0]      dynamic_xb_writes,  // row writes, dynamic engines
  output logic [31:0]      static_xb_reads,    // crossbar reads, static engines
  output logic [31:0]      dynamic_xb_reads,   // crossbar reads, dynamic engines
  output logic [31:0]      n_xb_configs,       // crossbar configurations applied
  output logic [T-1:0]     engine_busy
);

  logic            req_valid, req_ready, rsp_valid, rsp_ready;
  logic [GE_W-1:0] req_ge;
  ge_req_t         req, ge_req;
  ge_rsp_t         rsp;
  logic [T-1:0]    ge_req_valid, ge_req_ready, ge_rsp_valid, ge_rsp_ready;
  ge_rsp_t [T-1:0] ge_rsp;
  logic [T-1:0][31:0] ge_cfg_count, ge_writes, ge_reads;

  global_controller #(.T(T), .N(N), .M(M)) u_gctrl (
    .clk, .rst_n, .start, .op, .row_major, .num_ct, .num_st, .max_passes,
    .src_base, .dst_base, .busy, .done,
    .ct_en, .ct_addr, .ct_rdata, .st_en, .st_addr, .st_rdata,
    .vs_en, .vs_addr, .vs_rdata,
    .va_en, .va_we, .va_addr, .va_wdata, .va_rdata,
    .req_valid, .req_ready, .req_ge, .req,
    .rsp_valid, .rsp_ready, .rsp,
    .n_passes, .n_static, .n_dyn_hit, .n_dyn_cfg, .n_stall, .n_barrier
  );

  ge_interconnect #(.T(T)) u_noc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_ge, .req,
    .ge_req_valid, .ge_req_ready, .ge_req,
    .ge_rsp_valid, .ge_rsp_ready, .ge_rsp,
    .rsp_valid, .rsp_ready, .rsp, .rsp_ge()
  );

  for (genvar g = 0; g < T; g++) begin : g_ge
    graph_engine #(
      .IS_STATIC(g < N), .M(M), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH),
      .READ_CYCLES(READ_CYCLES), .WRITE_CYCLES(WRITE_CYCLES)
    ) u_ge (
      .clk, .rst_n,
      .req_valid(ge_req_valid[g]), .req_ready(ge_req_ready[g]), .req(ge_req),
      .rsp_valid(ge_rsp_valid[g]), .rsp_ready(ge_rsp_ready[g]), .rsp(ge_rsp[g]),
      .cfg_count(ge_cfg_count[g]), .xb_writes(ge_writes[g]), .xb_reads(ge_reads[g]),
      .busy(engine_busy[g])
    );
  end

  always_comb begin
    static_xb_writes  = '0;
    dynamic_xb_writes = '0;
    n_xb_configs      = '0;
    static_xb_reads   = '0;
    dynamic_xb_reads  = '0;
    for (int g = 0; g < T; g++)
      if (g < N) static_xb_writes  = static_xb_writes  + ge_writes[g];
      else       dynamic_xb_writes = dynamic_xb_writes + ge_writes[g];
    for (int g = 0; g < T; g++)
      if (g < N) static_xb_reads  = static_xb_reads  + ge_reads[g];
      else       dynamic_xb_reads = dynamic_xb_reads + ge_reads[g];
    for (int g = 0; g < T; g++) n_xb_configs = n_xb_configs + ge_cfg_count[g];
  end

endmodule
