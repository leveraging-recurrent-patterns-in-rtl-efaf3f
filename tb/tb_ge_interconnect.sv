// tb_ge_interconnect: four engines modelled in the testbench.
//   Requests: a random engine id is addressed; only that engine may see
//   req_valid, req_ready must follow that engine's ready, and every accepted
//   request must arrive at the addressed engine with every field unchanged
//   (requests are fully random).
//   Results: engines raise results at random; each must reach the output
//   exactly once, with the id of its engine and its payload intact (the
//   payload is a scramble of the tag), at most one engine is granted per
//   cycle, and with all engines permanently requesting the grants rotate
//   0,1,2,3,0,... (round robin).
module tb_ge_interconnect;
  import graph_pkg::*;
  localparam int T = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready, rsp_valid, rsp_ready = 1'b0;
  logic [GE_W-1:0] req_ge = '0, rsp_ge;
  ge_req_t req = '0, ge_req;
  ge_rsp_t rsp;
  logic [T-1:0] ge_req_valid, ge_req_ready = '0, ge_rsp_valid = '0, ge_rsp_ready;
  ge_rsp_t [T-1:0] ge_rsp;
  int checks = 0, failures = 0;
  int sent[T], got[T];
  int last_grant = -1, rr_ok = 0, rr_checks = 0;
  bit rr_phase = 0, stop = 0;

  ge_interconnect #(.T(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got_v, int exp);
    checks++;
    if (got_v != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got_v, exp);
    end
  endtask

  // result payload: a fixed scramble of the tag, so every pv bit toggles
  function automatic vblock_t pv_of(logic [BLK_W-1:0] tag);
    return vblock_t'(32'(tag) * 32'h9E37_79B1);
  endfunction

  // engine-side result sources: tag carries engine id and sequence number
  int seq[T];
  for (genvar g = 0; g < T; g++) begin : g_src
    always @(posedge clk) if (rst_n) begin
      if (ge_rsp_valid[g] && ge_rsp_ready[g]) begin
        sent[g]++;
        seq[g]++;
      end
    end
    always @(negedge clk) if (rst_n) begin
      if (rr_phase) ge_rsp_valid[g] = 1'b1;
      else if (stop) ge_rsp_valid[g] = 1'b0;
      else if (!ge_rsp_valid[g]) ge_rsp_valid[g] = ($urandom_range(0, 2) == 0);
      ge_rsp[g].tag = BLK_W'(g * 4096 + seq[g]);
      ge_rsp[g].pv  = pv_of(ge_rsp[g].tag);
    end
  end

  // sink
  always @(negedge clk) rsp_ready = (rr_phase || stop) ? 1'b1 : ($urandom_range(0, 1) == 1);
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    int g;
    g = int'(rsp.tag) / 4096;
    check("result engine id", int'(rsp_ge), g);
    check("result order", int'(rsp.tag) % 4096, got[g]);
    check("result payload", int'(rsp.pv == pv_of(rsp.tag)), 1);
    got[g]++;
    if (rr_phase) begin
      if (last_grant >= 0) begin
        rr_checks++;
        if (g == (last_grant + 1) % T) rr_ok++;
      end
      last_grant = g;
    end
  end
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(ge_rsp_ready)) failures++;
  end

  initial begin
    foreach (sent[g]) begin sent[g] = 0; got[g] = 0; seq[g] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // request routing
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      req_valid    = $urandom_range(0, 1);
      req_ge       = GE_W'($urandom_range(0, T-1));
      req          = ge_req_t'($bits(ge_req_t)'({$urandom, $urandom, $urandom}));
      ge_req_ready = T'($urandom);
      #1;
      for (int g = 0; g < T; g++)
        check("req_valid steering", int'(ge_req_valid[g]), int'(req_valid && req_ge == GE_W'(g)));
      check("req_ready", int'(req_ready), int'(ge_req_ready[req_ge]));
      check("req data", int'(ge_req == req), 1);
    end
    repeat (500) @(negedge clk);
    // round robin under full load
    rr_phase = 1;
    repeat (200) @(negedge clk);
    rr_phase = 0;
    stop = 1;
    repeat (20) @(negedge clk);
    check("round robin", rr_ok, rr_checks);
    check("round robin seen", int'(rr_checks > 100), 1);
    for (int g = 0; g < T; g++) check("every result delivered", got[g], sent[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
