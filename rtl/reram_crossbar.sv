// reram_crossbar: behavioural model of a C x C crossbar of 1-bit ReRAM cells.
//
// This is a behavioural model, not synthesizable logic of the real part: a
// ReRAM crossbar is an analog array. Each cell holds one bit (conductance
// G = 0 or 1). A read applies binary voltages on the wordlines (wl) and every
// bitline j carries a current proportional to sum_i G[i][j] * wl[i]; the model
// gives that current as an integer count 0..C on bl[j]. In the graph engine
// the stored pattern is the subgraph's adjacency window, row = source vertex,
// column = destination vertex.
//
// Interface and timing:
//   wr_en/wr_row/wr_bits  write one full row of cells at the clock edge. The
//                         real write is slow (20.2 ns per bit in the paper's
//                         Table 3); the engine controller waits WRITE_CYCLES,
//                         the model itself updates at once.
//   wl -> bl              combinational read (the engine waits READ_CYCLES
//                         before the sample-and-hold takes the value).
//   write_ops             number of row writes since reset; every cell of the
//                         row is counted as written, which is what limits the
//                         cell endurance the paper discusses.
// Following the paper: 1-bit cells, C x C size, in-situ sum on bitlines.
// This design's choice: row-at-a-time writes and the wear counter.
module reram_crossbar
  import graph_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(C)-1:0]       wr_row,
  input  logic [C-1:0]               wr_bits,
  input  logic [C-1:0]               wl,
  output logic [C-1:0][$clog2(C+1)-1:0] bl,
  output logic [31:0]                write_ops
);

  logic [C-1:0][C-1:0] cells;   // [row][col]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cells      <= '0;
      write_ops <= '0;
    end else if (wr_en) begin
      cells[wr_row] <= wr_bits;
      write_ops    <= write_ops + 32'd1;
    end
  end

  // Bitline currents: column-wise sum of the cells whose wordline is driven.
  always_comb begin
    for (int j = 0; j < C; j++) begin
      bl[j] = '0;
      for (int i = 0; i < C; i++)
        bl[j] = bl[j] + (($clog2(C+1))'(cells[i][j] & wl[i]));
    end
  end

endmodule
