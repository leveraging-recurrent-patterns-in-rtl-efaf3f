// ge_fifo: synchronous FIFO used as a graph engine's input and output buffer.
//
// The input buffer holds requests (source vertex data, and for a dynamic
// crossbar the configuration to write first); the output buffer holds the
// processed vertex data of each request. Buffering lets the global controller
// queue several subgraphs on one engine, so the engine processes them back to
// back (the pipelining of subgraphs the paper describes).
//
// Interface: valid/ready on both sides. A word is written when in_valid and
// in_ready are high at a clock edge, and read when out_valid and out_ready
// are. out_data is the oldest word (first-word fall-through). A full FIFO
// drops in_ready, which is the back-pressure that stalls the global
// controller. DEPTH must be a power of two.
// Following the paper: both buffers are FIFOs. This design's choice: depth,
// handshake and fall-through timing.
module ge_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count != ($clog2(DEPTH)+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(push) - ($clog2(DEPTH)+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  // A word is never lost or invented.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
                                   count <= ($clog2(DEPTH)+1)'(DEPTH));
  a_hold_data   : assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid && !out_ready |=> out_valid);

endmodule
