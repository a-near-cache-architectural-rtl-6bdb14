// tb_cnc_scale16: the system scaled to 16 cache slices, all computing at once.
//
// The evaluation system of the design has 16 CNC arrays, one per slice of a
// 16-slice last-level cache. This testbench builds the top with
// NUM_SLICES = 16 (four cores) and runs the Kyber coefficient modular-addition
// kernel (cnc_prog.svh, 411 commands, 32 lanes of 16 bits) on every slice:
// 16 x 32 = 512 coefficient additions in parallel, the CNC-512 parallelism.
// Core c serves slices c, c+4, c+8 and c+12, issuing for each one four
// RD_D2CNC (operands, carry mask, -q), thirteen LD_CMD and one ALG_CNC
// without waiting for completions, so its requests to different slices
// overlap. Each slice's cache model holds its own operands and program at
// addresses that hash to that slice, with some blocks missing.
//
// Checked per slice: the block written back equals (a + b) mod 3329 lane by
// lane, every request arrived at that slice, the run took N + 7 cycles
// (N = 416 commands) when the result block was present, and no illegal
// command. Also checked: all 16 slices were computing at the same time at
// some point, and every instruction completed.
module tb_cnc_scale16;
  import cnc_pkg::*;
  `include "cnc_prog.svh"

  localparam int NC = 4, NS = 16;
  localparam int Q = 3329;
  localparam int NBLK = 18;         // 4 operand rows, 13 program blocks, 1 result

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic        instr_valid [NC];
  logic [31:0] instr       [NC];
  logic [31:0] rs1_val     [NC];
  logic [31:0] rs2_val     [NC];
  logic        stall       [NC];
  logic [4:0]  rf_rs1      [NC];
  logic [4:0]  rf_rs2      [NC];
  logic        tlb_req     [NC];
  logic [31:0] tlb_vaddr   [NC];
  logic        tlb_ack     [NC];
  logic [31:0] tlb_paddr   [NC];
  logic        done_valid  [NC];
  logic [2:0]  done_nc     [NC];
  logic        done_ready  [NC];
  logic        dc_csb      [NS];
  logic        dc_web      [NS];
  logic        dc_oeb      [NS];
  logic [31:0] dc_addr     [NS];
  logic [511:0] dc_rdata   [NS];
  logic        dc_miss     [NS];
  logic        dc_miss_rsp [NS];
  logic [511:0] dc_wdata   [NS];
  logic [3:0]  cnc_state   [NS];
  logic        cmd_ovf     [NS];
  logic        illegal_cmd [NS];
  logic        ecc_err     [NS];

  cnc_system #(.NUM_CORES(NC), .NUM_SLICES(NS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // cores
  logic [31:0] r1v [NC];
  int done_cnt [NC], issued [NC];
  for (genvar c = 0; c < NC; c++) begin : g_cm
    assign rs1_val[c]    = r1v[c];
    assign rs2_val[c]    = '0;
    assign tlb_ack[c]    = tlb_req[c];
    assign tlb_paddr[c]  = tlb_vaddr[c];
    assign done_ready[c] = 1'b1;
    always @(posedge clk) if (rst_n && done_valid[c]) done_cnt[c]++;
  end

  // 16-slice hash: fold of address bits 6.. in 4-bit steps
  function automatic logic [3:0] hash(logic [31:0] a);
    logic [3:0] h = 0;
    for (int i = 6; i + 4 <= 32; i += 4) h ^= a[i +: 4];
    return h;
  endfunction

  int blk_tab [NS][NBLK];     // cache block numbers used by each slice
  int busy_max = 0;
  event ev_final;
  int n_final = 0;

  for (genvar s = 0; s < NS; s++) begin : g_sl
    l2_slice_model #(.IDXW(10), .MISS_LAT(10)) l2 (
      .clk, .csb(dc_csb[s]), .web(dc_web[s]), .oeb(dc_oeb[s]), .addr(dc_addr[s]),
      .rdata(dc_rdata[s]), .miss(dc_miss[s]), .miss_rsp(dc_miss_rsp[s]), .wdata(dc_wdata[s])
    );
    logic [511:0] a, b, exp;
    int wrong_slice = 0, illegal = 0, cnt = 0, runs = 0;
    bit waiting = 0, wb_hit = 0;

    initial begin
      logic [15:0] p [$];
      int k;
      k = 0;
      for (int blk = 0; blk < 1024 && k < NBLK; blk++)
        if (hash(32'(blk) * 64) == 4'(s)) begin blk_tab[s][k] = blk; k++; end
      for (int i = 0; i < 32; i++) begin
        a[i*16 +: 16] = 16'($urandom % Q);
        b[i*16 +: 16] = 16'($urandom % Q);
        exp[i*16 +: 16] = 16'((int'(a[i*16 +: 16]) + int'(b[i*16 +: 16])) % Q);
      end
      #1;  // after the cache model has cleared itself
      l2.mem[blk_tab[s][0]] = a;
      l2.mem[blk_tab[s][1]] = b;
      l2.mem[blk_tab[s][2]] = ~lanes(1);
      l2.mem[blk_tab[s][3]] = lanes(65536 - Q);
      modadd_prog(p);
      while (p.size() < 13 * 32) p.push_back(act(0));
      for (int j = 0; j < 13; j++)
        for (int i = 0; i < 32; i++) l2.mem[blk_tab[s][4 + j]][i*16 +: 16] = p[j*32 + i];
      for (int j = 0; j < NBLK; j++) l2.present[blk_tab[s][j]] = ($urandom % 5 != 0);
    end

    always @(posedge clk) if (rst_n) begin
      if (dut.slice_req[s].valid && dut.slice_ready[s]) begin
        if (dut.slice_req[s].dest != 4'(s)) wrong_slice++;
        if (dut.slice_req[s].nc >= NC_AES) begin
          waiting = 1; cnt = 0; wb_hit = l2.present[blk_tab[s][NBLK-1]];
        end
      end else if (waiting) begin
        cnt++;
        if (dut.slice_resp[s].valid) begin
          waiting = 0; runs++;
          if (wb_hit) check($sformatf("slice %0d: ALG took %0d cycles, expected %0d", s, cnt, 416 + 7),
                            cnt == 416 + 7);
        end
      end
      if (illegal_cmd[s] || ecc_err[s]) illegal++;
    end

    initial begin
      @(ev_final);
      check($sformatf("slice %0d: (a + b) mod q in 32 lanes", s), l2.mem[blk_tab[s][NBLK-1]] == exp);
      check($sformatf("slice %0d: requests all at home", s), wrong_slice == 0);
      check($sformatf("slice %0d: one run", s), runs == 1);
      check($sformatf("slice %0d: no illegal command or ECC error", s), illegal == 0);
      n_final++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    int busy;
    busy = 0;
    for (int s = 0; s < NS; s++) if (cnc_state[s] == 4'd4) busy++;
    if (busy > busy_max) busy_max = busy;
  end

  task automatic exec_instr(input int c, input logic [2:0] f3, input logic [4:0] alg,
                            input logic [31:0] addr);
    r1v[c] = addr;
    instr[c] = {7'd0, alg, 5'd1, f3, 5'd0, 7'b0101011};
    instr_valid[c] = 1;
    issued[c]++;
    #1;
    while (stall[c]) begin @(negedge clk); #1; end
    @(negedge clk);
    instr_valid[c] = 0;
  endtask

  task automatic core_run(input int c);
    for (int s = c; s < NS; s += NC) begin
      for (int j = 0; j < 4; j++)  exec_instr(c, F3_RD_D2CNC, 0, 32'(blk_tab[s][j]) * 64);
      for (int j = 4; j < 17; j++) exec_instr(c, F3_LD_CMD, 0, 32'(blk_tab[s][j]) * 64);
      exec_instr(c, F3_ALG_CNC, ALG_KYBER512, 32'(blk_tab[s][NBLK-1]) * 64);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int c = 0; c < NC; c++) begin
      instr_valid[c] = 0; instr[c] = 0; r1v[c] = 0; done_cnt[c] = 0; issued[c] = 0;
    end
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = int'($time / 10);
    fork
      core_run(0);
      core_run(1);
      core_run(2);
      core_run(3);
    join
    begin
      bit all;
      int t;
      t = 0;
      do begin
        @(negedge clk); t++;
        all = 1;
        for (int c = 0; c < NC; c++) if (done_cnt[c] != issued[c]) all = 0;
      end while (!all && t < 5000);
    end
    $display("512 modular additions on 16 slices finished in %0d cycles; at most %0d slices computing at once",
             int'($time / 10) - t0, busy_max);
    for (int c = 0; c < NC; c++) check($sformatf("core %0d: %0d of %0d instructions completed", c, done_cnt[c], issued[c]), done_cnt[c] == issued[c]);
    check("all 16 slices computing at the same time", busy_max == NS);
    -> ev_final;
    wait (n_final == NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
