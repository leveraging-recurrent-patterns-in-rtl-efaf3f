// sample_hold: behavioural model of the sample-and-hold circuits of one
// crossbar.
//
// This is a behavioural model of an analog part. One S/H sits on each of the
// C bitlines. When `sample` is high at a clock edge all C bitline values are
// captured; they are held unchanged on `held` until the next sample, so the
// shared ADC can convert them one after another while the crossbar is already
// read again. Held values are cleared by reset.
// The paper places S/H between the bitlines and the ADCs; holding all
// bitlines of one crossbar with a single strobe is this design's choice.
module sample_hold
  import graph_pkg::*;
#(
  parameter int unsigned W = $clog2(C+1)   // width of a bitline value
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sample,
  input  logic [C-1:0][W-1:0]  bl,
  output logic [C-1:0][W-1:0]  held
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      held <= '0;
    else if (sample) held <= bl;
  end

endmodule
