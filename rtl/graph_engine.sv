// graph_engine: one ReRAM graph engine (GE).
//
// Datapath, in the order data flows:
//   input buffer (ge_fifo) -> input register -> controller, which allocates
//   the request to crossbar CB[req.cb] -> driver -> crossbar -> S/H
//   -> shared ADC -> ALU -> accumulators / output register -> output buffer.
// An engine holds M crossbars of C x C 1-bit cells. In a static engine
// (IS_STATIC = 1) the crossbars are written once at initialisation by
// configuration-only requests and afterwards receive vertex data only; in a
// dynamic engine a request may carry the pattern to write before processing.
// Only one crossbar is active at a time; the ADC and the ALU are shared.
//
// Interface: requests in (ge_req_t, valid/ready into the input buffer),
// results out (ge_rsp_t, valid/ready from the output buffer). Every request
// with has_data produces exactly one result, in order; configuration-only
// requests produce none. cfg_count counts applied configurations,
// xb_writes the row writes of all crossbars (wear) and xb_reads the crossbar
// reads (one per wordline activation, counted when the S/H samples).
// Timing: see ge_controller; one request of a static engine in OP_MIN with
// one edge row takes READ_CYCLES + C + 5 cycles from input register to output
// buffer, plus the buffers' one-cycle latencies.
// Following the paper (its Fig. 4): input/output buffers as FIFOs, input and
// output registers, controller, per-crossbar driver and S/H, ADC shared across
// bitlines, ALU. This design's choice: one ADC per engine, buffer depths, the
// request format.
module graph_engine
  import graph_pkg::*;
#(
  parameter bit          IS_STATIC    = 1'b0,
  parameter int unsigned M            = 1,    // crossbars per engine
  parameter int unsigned IN_DEPTH     = 4,
  parameter int unsigned OUT_DEPTH    = 4,
  parameter int unsigned READ_CYCLES  = 2,
  parameter int unsigned WRITE_CYCLES = 21
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  ge_req_t   req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output ge_rsp_t   rsp,
  output logic [31:0] cfg_count,
  output logic [31:0] xb_writes,
  output logic [31:0] xb_reads,
  output logic      busy
);

  localparam int unsigned BLW = $clog2(C+1);
  localparam int unsigned MW  = (M > 1) ? $clog2(M) : 1;

  // ---------------- input buffer and input register ----------------
  logic    ib_valid, ib_ready;
  ge_req_t ib_data;
  logic    in_take;
  ge_req_t in_reg;
  logic    in_full;        // input register holds a request

  ge_fifo #(.T(ge_req_t), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data),
    .count()
  );

  // The input register is refilled when empty or when the controller takes
  // its request.
  assign ib_ready = !in_full || in_take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full <= 1'b0;
      in_reg  <= '0;
    end else if (ib_ready) begin
      in_full <= ib_valid;
      if (ib_valid) in_reg <= ib_data;
    end
  end

  // ---------------- controller ----------------
  logic                      wr_en, rd_en, sh_sample, adc_start, acc_clear;
  logic [$clog2(C)-1:0]      wr_row, rd_row, adc_sel, alu_lane, alu_row;
  logic [$clog2(DATA_W)-1:0] rd_plane, alu_plane;
  logic                      out_valid, out_ready;
  ge_req_t                   cur;   // request being run

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       cur <= '0;
    else if (in_take) cur <= in_reg;
  end

  ge_controller #(.READ_CYCLES(READ_CYCLES), .WRITE_CYCLES(WRITE_CYCLES)) u_ctrl (
    .clk, .rst_n,
    .req_valid(in_full), .req_take(in_take), .req(cur),
    .wr_en, .wr_row,
    .rd_en, .rd_row, .rd_plane, .sh_sample,
    .adc_start, .adc_sel,
    .acc_clear, .alu_lane, .alu_row, .alu_plane,
    .out_valid, .out_ready, .busy
  );

  // ---------------- crossbars with driver and S/H ----------------
  logic [M-1:0][C-1:0][BLW-1:0] held_all;
  logic [M-1:0][31:0]           wops;
  logic [MW-1:0]                cb_sel;

  assign cb_sel = MW'(cur.cb);

  for (genvar m = 0; m < M; m++) begin : g_cb
    logic [C-1:0]          wl, wr_bits;
    logic [C-1:0][BLW-1:0] bl;
    logic                  sel_me;
    assign sel_me = (cb_sel == MW'(m));

    xbar_driver u_drv (
      .op(cur.op), .rd_en(rd_en && sel_me), .rd_row, .rd_plane,
      .vdata(cur.vdata), .cfg(cur.cfg), .wr_row,
      .wl, .wr_bits
    );
    reram_crossbar u_xb (
      .clk, .rst_n,
      .wr_en(wr_en && sel_me), .wr_row, .wr_bits,
      .wl, .bl, .write_ops(wops[m])
    );
    sample_hold u_sh (
      .clk, .rst_n, .sample(sh_sample && sel_me), .bl, .held(held_all[m])
    );
  end

  always_comb begin
    xb_writes = '0;
    for (int m = 0; m < M; m++) xb_writes = xb_writes + wops[m];
  end

  // ---------------- shared ADC and ALU ----------------
  logic       adc_valid;
  logic [7:0] adc_code;

  adc u_adc (
    .clk, .rst_n, .start(adc_start), .sel(adc_sel), .held(held_all[cb_sel]),
    .valid(adc_valid), .code(adc_code)
  );

  vblock_t           acc;      // accumulators = output register
  logic [DATA_W-1:0] alu_out;

  ge_alu u_alu (
    .op(cur.op), .code(adc_code), .src(cur.vdata[alu_row]), .plane(alu_plane),
    .acc_in(acc[alu_lane]), .acc_out(alu_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (acc_clear)
      for (int j = 0; j < C; j++) acc[j] <= reduce_identity(cur.op);
    else if (adc_valid) acc[alu_lane] <= alu_out;
  end

  // ---------------- output buffer ----------------
  ge_rsp_t ob_in;
  assign ob_in.tag = cur.tag;
  assign ob_in.pv  = acc;

  ge_fifo #(.T(ge_rsp_t), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid(out_valid), .in_ready(out_ready), .in_data(ob_in),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp),
    .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                cfg_count <= '0;
    else if (in_take && in_reg.has_cfg)        cfg_count <= cfg_count + 32'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         xb_reads <= '0;
    else if (sh_sample) xb_reads <= xb_reads + 32'd1;
  end

  // Requests must name an existing crossbar; a static engine is configured
  // only by configuration-only requests (initialisation), never together with
  // vertex data.
  a_cb_range  : assert property (@(posedge clk) disable iff (!rst_n)
                                 in_take |-> int'(in_reg.cb) < int'(M));
  a_static_ro : assert property (@(posedge clk) disable iff (!rst_n)
                                 in_take && IS_STATIC |-> !(in_reg.has_cfg && in_reg.has_data));

endmodule
