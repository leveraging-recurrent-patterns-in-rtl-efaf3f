// xbar_driver: wordline and write driver of one crossbar.
//
// For a read it turns the engine's source vertex values into the binary
// wordline inputs of the crossbar:
//   OP_MIN (BFS/SSSP)  one wordline at a time: wl = one-hot(rd_row), and only
//                      if that source vertex is active (its value is not INF).
//                      The bitlines then return the row's edges.
//   OP_SUM (PageRank)  all wordlines at once carrying bit `rd_plane` of every
//                      source value (bit-serial input); the bitlines return
//                      the in-situ sum of that bit-plane.
// Wordlines are driven only while `rd_en` is high. For a configuration write
// it presents row `wr_row` of the pattern as the cell values of that row.
// Purely combinational; the controller holds the inputs for the read time.
// Following the paper: the driver applies input voltages and configures the
// crossbar. This design's choice: binary wordline voltages with bit-serial
// multi-bit inputs, and row-at-a-time activation for min-based algorithms.
module xbar_driver
  import graph_pkg::*;
(
  input  alu_op_e                    op,
  input  logic                       rd_en,
  input  logic [$clog2(C)-1:0]       rd_row,
  input  logic [$clog2(DATA_W)-1:0]  rd_plane,
  input  vblock_t                    vdata,
  input  pattern_t                   cfg,
  input  logic [$clog2(C)-1:0]       wr_row,
  output logic [C-1:0]               wl,
  output logic [C-1:0]               wr_bits
);

  always_comb begin
    wl = '0;
    if (rd_en) begin
      if (op == OP_MIN) begin
        if (vdata[rd_row] != INF) wl[rd_row] = 1'b1;
      end else begin
        for (int i = 0; i < C; i++) wl[i] = vdata[i][rd_plane];
      end
    end
    wr_bits = cfg[wr_row];
  end

endmodule
