// ge_interconnect: interconnect between the global controller and the T graph
// engines.
//
// Downstream, a request addressed to engine `req_ge` is steered to that
// engine only; `req_ready` is that engine's input-buffer ready, so a full
// buffer stalls the sender. Upstream, the engines' results compete for one
// return channel: a round-robin arbiter grants one valid engine per cycle
// into a single output register (rsp_valid/rsp_ready, with the granting
// engine's id in rsp_ge). The pointer moves past the engine just granted, so
// no engine starves. Result latency through the interconnect is one cycle.
// Following the paper: one interconnect joins the global controller, main
// memory and all engines (control, vertex data, configuration). This design's
// choice: a demultiplexer for requests, round-robin arbitration for results.
module ge_interconnect
  import graph_pkg::*;
#(
  parameter int unsigned T = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // from the global controller
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [GE_W-1:0]     req_ge,
  input  ge_req_t             req,
  // to the engines
  output logic [T-1:0]        ge_req_valid,
  input  logic [T-1:0]        ge_req_ready,
  output ge_req_t             ge_req,
  // from the engines
  input  logic [T-1:0]        ge_rsp_valid,
  output logic [T-1:0]        ge_rsp_ready,
  input  ge_rsp_t [T-1:0]     ge_rsp,
  // to the global controller
  output logic                rsp_valid,
  input  logic                rsp_ready,
  output ge_rsp_t             rsp,
  output logic [GE_W-1:0]     rsp_ge
);

  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1;

  // ---------------- requests ----------------
  always_comb begin
    ge_req_valid = '0;
    ge_req_valid[TW'(req_ge)] = req_valid;
  end
  assign ge_req    = req;
  assign req_ready = ge_req_ready[TW'(req_ge)];

  // ---------------- results ----------------
  logic [TW-1:0] ptr;        // engine with highest priority
  logic [TW-1:0] pick;
  logic          any;
  logic          load;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 0; k < T; k++) begin
      logic [TW-1:0] idx;
      idx = TW'((int'(ptr) + k) % T);
      if (!any && ge_rsp_valid[idx]) begin
        any  = 1'b1;
        pick = idx;
      end
    end
  end

  assign load = any && (!rsp_valid || rsp_ready);

  always_comb begin
    ge_rsp_ready = '0;
    ge_rsp_ready[pick] = load;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
      rsp_ge    <= '0;
      ptr       <= '0;
    end else begin
      if (load) begin
        rsp_valid <= 1'b1;
        rsp       <= ge_rsp[pick];
        rsp_ge    <= GE_W'(pick);
        ptr       <= (pick == TW'(T-1)) ? '0 : pick + 1'b1;
      end else if (rsp_ready) begin
        rsp_valid <= 1'b0;
      end
    end
  end

  a_req_in_range : assert property (@(posedge clk) disable iff (!rst_n)
                                    req_valid |-> int'(req_ge) < int'(T));
  a_one_grant    : assert property (@(posedge clk) disable iff (!rst_n)
                                    $onehot0(ge_rsp_ready));

endmodule
