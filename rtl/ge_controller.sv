// ge_controller: control unit of one graph engine.
//
// It takes one request at a time from the input register and runs it:
//   1. If configuration is attached (dynamic crossbar, or a static crossbar at
//      initialisation), write the C rows of the pattern into crossbar `cb`,
//      one row per write, each write held for WRITE_CYCLES.
//   2. If vertex data is attached, clear the accumulators and run reads:
//      OP_MIN  one read per row that both holds an edge (row_mask, from the
//              configuration table) and has an active source; rows without
//              edges are skipped, which saves crossbar reads.
//      OP_SUM  one read per bit-plane of the source values (DATA_W reads).
//      Each read drives the wordlines for READ_CYCLES, samples the bitlines
//      into the S/H on the last read cycle, then starts C conversions on the
//      shared ADC, one bitline per cycle. The ALU lane/row/plane of each
//      conversion is delayed one cycle to line up with the ADC result.
//   3. Present the result (output register) until the output buffer takes it.
// A request with neither part is consumed without effect.
//
// Cycle count of one request: C*WRITE_CYCLES if configured, plus per read
// READ_CYCLES + C + 1, plus 2 (start, output) when the output is accepted at
// once, plus 1 to take the request.
// Following the paper: controller allocates each input to CB0..CB(M-1),
// reconfigures dynamic crossbars from the configuration sent with the input,
// skips rows using the stored row addresses. This design's choice: the FSM,
// the sequential (not overlapped) read/convert schedule and the cycle counts.
module ge_controller
  import graph_pkg::*;
#(
  parameter int unsigned READ_CYCLES  = 2,
  parameter int unsigned WRITE_CYCLES = 21
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // input register
  input  logic                       req_valid,
  output logic                       req_take,
  input  ge_req_t                    req,
  // crossbar write
  output logic                       wr_en,
  output logic [$clog2(C)-1:0]       wr_row,
  // crossbar read (driver + S/H)
  output logic                       rd_en,
  output logic [$clog2(C)-1:0]       rd_row,
  output logic [$clog2(DATA_W)-1:0]  rd_plane,
  output logic                       sh_sample,
  // shared ADC
  output logic                       adc_start,
  output logic [$clog2(C)-1:0]       adc_sel,
  // ALU / accumulators
  output logic                       acc_clear,
  output logic [$clog2(C)-1:0]       alu_lane,
  output logic [$clog2(C)-1:0]       alu_row,
  output logic [$clog2(DATA_W)-1:0]  alu_plane,
  // output register
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       busy
);

  typedef enum logic [2:0] {S_IDLE, S_START, S_WR, S_NEXT, S_RD, S_CV, S_OUT} state_e;
  state_e state;

  localparam int unsigned CW = (WRITE_CYCLES > READ_CYCLES) ? $clog2(WRITE_CYCLES + 1)
                                                            : $clog2(READ_CYCLES + 1);
  logic [CW-1:0]               cnt;
  logic [C-1:0]                pending;     // rows still to read (OP_MIN)
  logic [$clog2(DATA_W):0]     plane_cnt;   // planes read so far (OP_SUM)
  logic [$clog2(C)-1:0]        next_row;
  logic [C-1:0]                active;

  // Rows whose source vertex is active.
  always_comb
    for (int i = 0; i < C; i++) active[i] = (req.vdata[i] != INF);

  // Lowest pending row.
  always_comb begin
    next_row = '0;
    for (int i = C-1; i >= 0; i--) if (pending[i]) next_row = ($clog2(C))'(i);
  end

  assign req_take  = (state == S_IDLE) && req_valid;
  assign wr_en     = (state == S_WR) && (cnt == '0);
  assign rd_en     = (state == S_RD);
  assign sh_sample = (state == S_RD) && (cnt == CW'(READ_CYCLES - 1));
  assign adc_start = (state == S_CV);
  assign acc_clear = (state == S_START);
  assign out_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);
  assign rd_plane  = plane_cnt[$clog2(DATA_W)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      wr_row    <= '0;
      rd_row    <= '0;
      pending   <= '0;
      plane_cnt <= '0;
      adc_sel   <= '0;
      alu_lane  <= '0;
      alu_row   <= '0;
      alu_plane <= '0;
    end else begin
      // ALU tags follow the ADC by one cycle.
      alu_lane  <= adc_sel;
      alu_row   <= rd_row;
      alu_plane <= rd_plane;
      unique case (state)
        S_IDLE: if (req_valid) state <= S_START;
        S_START: begin
          cnt       <= '0;
          wr_row    <= '0;
          pending   <= req.row_mask & active;
          plane_cnt <= '0;
          if (req.has_cfg)       state <= S_WR;
          else if (req.has_data) state <= S_NEXT;
          else                   state <= S_IDLE;
        end
        S_WR: begin
          if (cnt == CW'(WRITE_CYCLES - 1)) begin
            cnt <= '0;
            if (wr_row == ($clog2(C))'(C - 1))
              state <= req.has_data ? S_NEXT : S_IDLE;
            else
              wr_row <= wr_row + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_NEXT: begin
          cnt <= '0;
          if (req.op == OP_MIN) begin
            if (pending != '0) begin
              rd_row           <= next_row;
              pending[next_row] <= 1'b0;
              state            <= S_RD;
            end else state <= S_OUT;
          end else begin
            if (plane_cnt != ($clog2(DATA_W)+1)'(DATA_W)) state <= S_RD;
            else                                          state <= S_OUT;
          end
        end
        S_RD: begin
          if (cnt == CW'(READ_CYCLES - 1)) begin
            cnt     <= '0;
            adc_sel <= '0;
            state   <= S_CV;
          end else cnt <= cnt + 1'b1;
        end
        S_CV: begin
          if (adc_sel == ($clog2(C))'(C - 1)) begin
            if (req.op == OP_SUM) plane_cnt <= plane_cnt + 1'b1;
            state <= S_NEXT;
          end else adc_sel <= adc_sel + 1'b1;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The request must stay in the input register while it is being run.
  a_req_stable : assert property (@(posedge clk) disable iff (!rst_n)
                                  busy && state != S_START |-> $stable(req));

endmodule
