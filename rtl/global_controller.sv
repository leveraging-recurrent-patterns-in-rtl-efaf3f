// global_controller: scheduler of the accelerator (initialisation, batching,
// engine selection and aggregation).
//
// It runs the processing algorithm of the design over the two tables the host
// has placed in main memory:
//   Initialisation  every configuration-table (CT) entry marked static is sent
//                   once, configuration only, to its engine and crossbar.
//   Pass            the subgraph table (ST) is streamed in order. For each
//                   subgraph the controller reads its CT entry and the C
//                   source vertex values, then
//                     - static pattern: sends vertex data only, to the static
//                       engine named in the CT;
//                     - dynamic pattern: FindGE picks a dynamic crossbar. If
//                       one already holds the pattern the data goes there
//                       without configuration; otherwise the next crossbar in
//                       round-robin order is rewritten (configuration sent with
//                       the data).
//                   Subgraphs with the same destination block (column-major
//                   order, row_major = 0) or source block (row_major = 1) form
//                   a batch; a new batch starts only when every result of the
//                   previous one has been aggregated.
//   Aggregation     runs beside dispatch: each engine result is reduced
//                   (OP_MIN or OP_SUM) into the destination block in vertex
//                   memory with a read-modify-write, and a changed value is
//                   noted.
//   Iteration       passes repeat while a pass changed some value and fewer
//                   than max_passes have run (BFS levels settle this way);
//                   then `done` is pulsed.
// Memory ports all have one-cycle read latency: data appear the cycle after
// the enable. The vertex memory has a read port for dispatch (vs_*) and a
// read/write port for aggregation (va_*).
// Engines 0..N-1 are static and N..T-1 dynamic, each with M crossbars.
// Following the paper (its Algorithm 2): static configuration once, batches
// of subgraphs sharing destination (or source) vertices, vertex-data-only
// transfer to static engines, FindGE plus reconfiguration for dynamic ones,
// aggregation of the results. This design's choices: the replacement policy
// (reuse a crossbar already holding the pattern, else round robin), the
// barrier between batches, in-place aggregation and the convergence loop.
module global_controller
  import graph_pkg::*;
#(
  parameter int unsigned T = 32,   // graph engines
  parameter int unsigned N = 16,   // static graph engines
  parameter int unsigned M = 1     // crossbars per engine
) (
  input  logic                clk,
  input  logic                rst_n,
  // run control
  input  logic                start,
  input  alu_op_e             op,
  input  logic                row_major,
  input  logic [PAT_W:0]      num_ct,
  input  logic [ST_AW:0]      num_st,
  input  logic [7:0]          max_passes,
  input  logic [BLK_W-1:0]    src_base,
  input  logic [BLK_W-1:0]    dst_base,
  output logic                busy,
  output logic                done,
  // configuration table
  output logic                ct_en,
  output logic [PAT_W-1:0]    ct_addr,
  input  ct_entry_t           ct_rdata,
  // subgraph table
  output logic                st_en,
  output logic [ST_AW-1:0]    st_addr,
  input  st_entry_t           st_rdata,
  // vertex memory, dispatch read port
  output logic                vs_en,
  output logic [BLK_W-1:0]    vs_addr,
  input  vblock_t             vs_rdata,
  // vertex memory, aggregation read/write port
  output logic                va_en,
  output logic                va_we,
  output logic [BLK_W-1:0]    va_addr,
  output vblock_t             va_wdata,
  input  vblock_t             va_rdata,
  // to / from the engines through the interconnect
  output logic                req_valid,
  input  logic                req_ready,
  output logic [GE_W-1:0]     req_ge,
  output ge_req_t             req,
  input  logic                rsp_valid,
  output logic                rsp_ready,
  input  ge_rsp_t             rsp,
  // activity counters (cleared by start)
  output logic [31:0]         n_passes,
  output logic [31:0]         n_static,     // subgraphs sent to static engines
  output logic [31:0]         n_dyn_hit,    // dynamic, pattern already loaded
  output logic [31:0]         n_dyn_cfg,    // dynamic, crossbar reconfigured
  output logic [31:0]         n_stall,      // cycles a request waited on a full buffer
  output logic [31:0]         n_barrier     // cycles spent waiting at a batch boundary
);

  localparam int unsigned NDYN = (T - N) * M;           // dynamic crossbars
  localparam int unsigned SW   = (NDYN > 1) ? $clog2(NDYN) : 1;

  typedef enum logic [3:0] {
    D_IDLE, D_INIT_RD, D_INIT_CHK, D_INIT_SEND, D_PASS, D_ST_RD, D_ST_CHK,
    D_BARRIER, D_FETCH, D_SELECT, D_SEND, D_DRAIN, D_DONE
  } dstate_e;
  dstate_e dstate;

  logic [PAT_W:0]   ct_i;
  logic [ST_AW:0]   st_i;
  st_entry_t        cur_st;
  logic [BLK_W-1:0] prev_key;
  logic             have_prev;
  logic [15:0]      outstanding;
  logic             changed;

  // dynamic crossbar pattern tags (FindGE state)
  logic [NDYN-1:0]             slot_v;
  logic [NDYN-1:0][PAT_W-1:0]  slot_pat;
  logic [SW-1:0]               rr;
  logic                        hit;
  logic [SW-1:0]               hit_slot;

  always_comb begin
    hit      = 1'b0;
    hit_slot = '0;
    for (int s = 0; s < NDYN; s++)
      if (!hit && slot_v[s] && slot_pat[s] == cur_st.pat) begin
        hit      = 1'b1;
        hit_slot = SW'(s);
      end
  end

  // ---------------- aggregation ----------------
  typedef enum logic [1:0] {A_IDLE, A_READ, A_WRITE} astate_e;
  astate_e   astate;
  ge_rsp_t   agg;
  vblock_t   merged;
  logic      agg_done;

  assign rsp_ready = (astate == A_IDLE);

  always_comb begin
    for (int j = 0; j < C; j++) merged[j] = reduce2(op, va_rdata[j], agg.pv[j]);
  end

  assign va_en    = (astate == A_READ) || (astate == A_WRITE);
  assign va_we    = (astate == A_WRITE);
  assign va_addr  = dst_base + agg.tag;
  assign va_wdata = merged;
  assign agg_done = (astate == A_WRITE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      astate <= A_IDLE;
      agg    <= '0;
    end else begin
      unique case (astate)
        A_IDLE:  if (rsp_valid) begin agg <= rsp; astate <= A_READ; end
        A_READ:  astate <= A_WRITE;
        A_WRITE: astate <= A_IDLE;
        default: astate <= A_IDLE;
      endcase
    end
  end

  // ---------------- dispatch ----------------
  logic sent_data;
  assign sent_data = (dstate == D_SEND) && req_valid && req_ready && req.has_data;

  assign busy = (dstate != D_IDLE);
  assign done = (dstate == D_DONE);

  // memory read requests
  assign ct_en   = (dstate == D_INIT_RD) || (dstate == D_FETCH);
  assign ct_addr = (dstate == D_INIT_RD) ? PAT_W'(ct_i) : cur_st.pat;
  assign st_en   = (dstate == D_ST_RD);
  assign st_addr = ST_AW'(st_i);
  assign vs_en   = (dstate == D_FETCH);
  assign vs_addr = src_base + cur_st.src_blk;

  assign req_valid = (dstate == D_INIT_SEND) || (dstate == D_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate     <= D_IDLE;
      ct_i       <= '0;
      st_i       <= '0;
      cur_st     <= '0;
      prev_key   <= '0;
      have_prev  <= 1'b0;
      changed    <= 1'b0;
      slot_v     <= '0;
      slot_pat   <= '0;
      rr         <= '0;
      req_ge     <= '0;
      req        <= '0;
      n_passes   <= '0;
      n_static   <= '0;
      n_dyn_hit  <= '0;
      n_dyn_cfg  <= '0;
      n_stall    <= '0;
      n_barrier  <= '0;
    end else begin
      if (agg_done && merged != va_rdata) changed <= 1'b1;
      if ((dstate == D_SEND || dstate == D_INIT_SEND) && !req_ready) n_stall <= n_stall + 1;

      unique case (dstate)
        D_IDLE: if (start) begin
          ct_i      <= '0;
          slot_v    <= '0;
          rr        <= '0;
          n_passes  <= '0;
          n_static  <= '0;
          n_dyn_hit <= '0;
          n_dyn_cfg <= '0;
          n_stall   <= '0;
          n_barrier <= '0;
          dstate    <= D_INIT_RD;
        end
        // ---- initialisation: configure static engines once ----
        D_INIT_RD: dstate <= (ct_i == num_ct) ? D_PASS : D_INIT_CHK;
        D_INIT_CHK: begin
          if (ct_rdata.is_static) begin
            req_ge       <= ct_rdata.ge;
            req          <= '0;
            req.has_cfg  <= 1'b1;
            req.cb       <= ct_rdata.cb;
            req.op       <= op;
            req.cfg      <= ct_rdata.pattern;
            req.row_mask <= ct_rdata.row_mask;
            dstate       <= D_INIT_SEND;
          end else begin
            ct_i   <= ct_i + 1'b1;
            dstate <= D_INIT_RD;
          end
        end
        D_INIT_SEND: if (req_ready) begin
          ct_i   <= ct_i + 1'b1;
          dstate <= D_INIT_RD;
        end
        // ---- one pass over the subgraph table ----
        D_PASS: begin
          st_i      <= '0;
          have_prev <= 1'b0;
          changed   <= 1'b0;
          n_passes  <= n_passes + 1;
          dstate    <= (num_st == '0) ? D_DRAIN : D_ST_RD;
        end
        D_ST_RD: dstate <= D_ST_CHK;
        D_ST_CHK: begin
          cur_st <= st_rdata;
          if (have_prev && (row_major ? st_rdata.src_blk : st_rdata.dst_blk) != prev_key)
            dstate <= D_BARRIER;
          else
            dstate <= D_FETCH;
          prev_key  <= row_major ? st_rdata.src_blk : st_rdata.dst_blk;
          have_prev <= 1'b1;
        end
        D_BARRIER: begin
          // batch boundary: wait for every result of the previous batch
          if (outstanding == '0 && astate == A_IDLE && !rsp_valid) dstate <= D_FETCH;
          else n_barrier <= n_barrier + 1;
        end
        D_FETCH: dstate <= D_SELECT;
        D_SELECT: begin
          req          <= '0;
          req.has_data <= 1'b1;
          req.op       <= op;
          req.cfg      <= ct_rdata.pattern;
          req.row_mask <= ct_rdata.row_mask;
          req.vdata    <= vs_rdata;
          req.tag      <= cur_st.dst_blk;
          if (ct_rdata.is_static) begin
            req_ge   <= ct_rdata.ge;
            req.cb   <= ct_rdata.cb;
            n_static <= n_static + 1;
          end else if (hit) begin
            req_ge    <= GE_W'(N + int'(hit_slot) / M);
            req.cb    <= CB_W'(int'(hit_slot) % M);
            n_dyn_hit <= n_dyn_hit + 1;
          end else begin
            req_ge      <= GE_W'(N + int'(rr) / M);
            req.cb      <= CB_W'(int'(rr) % M);
            req.has_cfg <= 1'b1;
            slot_v[rr]  <= 1'b1;
            slot_pat[rr] <= cur_st.pat;
            rr          <= (rr == SW'(NDYN-1)) ? '0 : rr + 1'b1;
            n_dyn_cfg   <= n_dyn_cfg + 1;
          end
          dstate <= D_SEND;
        end
        D_SEND: if (req_ready) begin
          st_i <= st_i + 1'b1;
          dstate <= (st_i + 1'b1 == num_st) ? D_DRAIN : D_ST_RD;
        end
        // ---- end of pass ----
        D_DRAIN: if (outstanding == '0 && astate == A_IDLE && !rsp_valid) begin
          if (changed && n_passes < 32'(max_passes)) dstate <= D_PASS;
          else                                       dstate <= D_DONE;
        end
        D_DONE: dstate <= D_IDLE;
        default: dstate <= D_IDLE;
      endcase
    end
  end

  // results still to be aggregated
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else outstanding <= outstanding + 16'(sent_data) - 16'(agg_done);
  end

  a_no_underflow : assert property (@(posedge clk) disable iff (!rst_n)
                                    agg_done |-> outstanding != '0 || sent_data);
  a_req_stable   : assert property (@(posedge clk) disable iff (!rst_n)
                                    req_valid && !req_ready |=> $stable(req) && $stable(req_ge));
  a_static_ge    : assert property (@(posedge clk) disable iff (!rst_n)
                                    req_valid && !req.has_data |-> int'(req_ge) < int'(N));

endmodule
