// tb_cnc_noc: self-checking test of the CNC interconnect crossbar.
//
// Four cores send random request packets to random slices; the slices accept
// with random back-pressure and return responses to random cores, who also
// apply back-pressure. Scoreboards check that every packet reaches the named
// destination exactly once, unchanged, and in order per source/destination
// pair. A hot-spot phase, where all cores send to slice 0 every cycle, checks
// round-robin fairness: consecutive grants at one slice go to different cores
// and every core gets one transfer in any four. Transfers take no extra
// cycle: a packet offered while the destination is ready is taken that cycle.
module tb_cnc_noc;
  import cnc_pkg::*;

  localparam int NC = 4, NS = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  cnc_req_t  core_req [NC];
  logic      core_ready [NC];
  cnc_req_t  slice_req [NS];
  logic      slice_ready [NS];
  cnc_resp_t slice_resp [NS];
  logic      slice_resp_ready [NS];
  cnc_resp_t core_resp [NC];
  logic      core_resp_ready [NC];

  cnc_noc #(.NUM_CORES(NC), .NUM_SLICES(NS)) dut (.*);

  int checks = 0, failures = 0, conflicts = 0;
  logic [31:0] exp_req [NC][NS][$];
  int sent = 0, recv = 0, rsent = 0, rrecv = 0;
  bit hot = 0;
  int last_grant = -1, hot_grants = 0;
  int win [$];

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq [NC];
  // sources and sinks, driven at the negedge, sampled at the posedge
  always @(posedge clk) if (rst_n) begin
    int n;
    n = 0;
    for (int c = 0; c < NC; c++) if (core_req[c].valid) n++;
    for (int s = 0; s < NS; s++) begin
      int w; w = 0;
      for (int c = 0; c < NC; c++) if (core_req[c].valid && core_req[c].dest == 4'(s)) w++;
      if (w > 1) conflicts++;
    end
    for (int c = 0; c < NC; c++)
      if (core_req[c].valid && core_ready[c]) begin
        exp_req[c][core_req[c].dest].push_back(core_req[c].addr);
        sent++;
        seq[c]++;
      end
    for (int s = 0; s < NS; s++)
      if (slice_req[s].valid && slice_ready[s]) begin
        int c; c = slice_req[s].core;
        check("request at its destination", slice_req[s].dest == 4'(s));
        if (exp_req[c][s].size() == 0) check("unexpected request", 0);
        else check("request order and contents", exp_req[c][s].pop_front() == slice_req[s].addr);
        recv++;
        if (hot && s == 0) begin
          if (last_grant >= 0) check("round robin alternates", c != last_grant);
          last_grant = c;
          win.push_back(c);
          hot_grants++;
        end
      end
    for (int s = 0; s < NS; s++)
      if (slice_resp[s].valid && slice_resp_ready[s]) rsent++;
    for (int c = 0; c < NC; c++)
      if (core_resp[c].valid && core_resp_ready[c]) begin
        int m; m = 0;
        for (int s = 0; s < NS; s++)
          if (slice_resp_ready[s] && slice_resp[s].valid && slice_resp[s].core == 4'(c) &&
              slice_resp[s].nc == core_resp[c].nc) m++;
        check("response comes from a slice that addressed this core", m == 1);
        check("response at its core", core_resp[c].core == 4'(c));
        rrecv++;
      end
  end

  task automatic drive_random();
    for (int c = 0; c < NC; c++) begin
      if (!core_req[c].valid || core_ready[c]) begin
        core_req[c] = '0;
        if ($urandom % 3 != 0) begin
          core_req[c].valid = 1;
          core_req[c].dest = 4'($urandom % NS);
          core_req[c].core = 4'(c);
          core_req[c].addr = {8'(c), 24'(seq[c])};
          core_req[c].nc = nc_e'($urandom % 8);
        end
      end
      core_resp_ready[c] = ($urandom % 4 != 0);
    end
    for (int s = 0; s < NS; s++) begin
      slice_ready[s] = ($urandom % 3 != 0);
      if (!slice_resp[s].valid || slice_resp_ready[s]) begin
        slice_resp[s] = '0;
        if ($urandom % 2) begin
          slice_resp[s].valid = 1;
          slice_resp[s].core = 4'($urandom % NC);
          slice_resp[s].nc = nc_e'($urandom % 8);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0;
    for (int c = 0; c < NC; c++) begin core_req[c] = '0; core_resp_ready[c] = 1; seq[c] = 0; end
    for (int s = 0; s < NS; s++) begin slice_ready[s] = 1; slice_resp[s] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // same-cycle transfer
    core_req[1].valid = 1; core_req[1].dest = 4'd2; core_req[1].core = 4'd1; core_req[1].addr = 32'h0100_0000;
    #1 check("taken in the cycle it is offered", core_ready[1] && slice_req[2].valid && slice_req[2].addr == 32'h0100_0000);
    seq[1] = 1;
    @(negedge clk);
    core_req[1] = '0;
    // random traffic
    repeat (3000) begin
      @(negedge clk);
      drive_random();
    end
    // hot spot: everyone to slice 0, slice 0 always ready
    @(negedge clk);
    for (int s = 0; s < NS; s++) begin slice_ready[s] = 1; slice_resp[s] = '0; end
    for (int c = 0; c < NC; c++) begin core_req[c] = '0; core_resp_ready[c] = 1; end
    repeat (3) @(negedge clk);
    hot = 1;
    repeat (40) begin
      for (int c = 0; c < NC; c++) begin
        core_req[c].valid = 1; core_req[c].dest = 0; core_req[c].core = 4'(c);
        core_req[c].addr = {8'(c), 24'(seq[c])};
      end
      @(negedge clk);
    end
    hot = 0;
    for (int c = 0; c < NC; c++) core_req[c] = '0;
    @(negedge clk);
    check("hot spot grants one per cycle", hot_grants == 40);
    for (int i = 0; i + 4 <= win.size(); i++) begin
      bit [3:0] m; m = 0;
      for (int j = 0; j < 4; j++) m[win[i + j]] = 1;
      check("every core served in any four grants", m == 4'hF);
    end
    check("all requests delivered", sent == recv);
    for (int c = 0; c < NC; c++) for (int s = 0; s < NS; s++) check("no request left", exp_req[c][s].size() == 0);
    check("all responses delivered", rsent == rrecv);
    check("contention happened", conflicts > 100);
    $display("requests %0d responses %0d contended cycles %0d", sent, rsent, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
