// adc: behavioural model of the 8-bit ADC shared by the bitlines of a graph
// engine.
//
// This is a behavioural model of a mixed-signal part. Each conversion takes
// the held value of the bitline chosen by `sel`, scales it to the 8-bit code
// range (code = value * LSB_PER_UNIT, an ideal converter with one unit of
// bitline current equal to LSB_PER_UNIT codes) and presents the code on
// `code` one clock after `start`, with `valid` high for that cycle.
// Because the ADC is shared, converting all C bitlines of one read takes C
// conversions; the engine controller steps `sel` through them.
// Following the paper: 8-bit resolution, shared across bitlines, fed from the
// S/H. This design's choice: one-cycle conversion, ideal transfer function,
// LSB_PER_UNIT = 1 so that the code equals the number of conducting cells.
module adc
  import graph_pkg::*;
#(
  parameter int unsigned W            = $clog2(C+1),
  parameter int unsigned RES          = 8,
  parameter int unsigned LSB_PER_UNIT = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [$clog2(C)-1:0] sel,
  input  logic [C-1:0][W-1:0]  held,
  output logic                 valid,
  output logic [RES-1:0]       code
);

  logic [RES+W-1:0] scaled;
  always_comb scaled = (RES+W)'(held[sel]) * (RES+W)'(LSB_PER_UNIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      code  <= '0;
    end else begin
      valid <= start;
      if (start) code <= (scaled > (RES+W)'({RES{1'b1}})) ? '1 : scaled[RES-1:0];
    end
  end

endmodule
