// tb_cnc_system: end-to-end self-checking test of the CNC system at full size.
//
// The top is instantiated with its default parameters: 4 cores, 4 cache
// slices, a 256 x 512 CNC array and a 256 x 512 command array per slice.
// Around it the testbench models, per core, the register file (the operands
// of the instruction being presented), a data TLB with a random 0..4 cycle
// translation delay (PA = VA xor a fixed page offset) and a completion sink
// with random back-pressure; per slice, a cache data array with random
// misses (l2_slice_model).
//
// Cores run CNC programs written with the four CNC instructions:
//  phase 1  every core runs three jobs on its own slice, all four in
//           parallel: SW_CNC words and RD_D2CNC blocks, LD_CMD of a random
//           1-3 block command program, ALG_CNC; the third job reruns the
//           loaded program without reloading it
//  phase 2  all cores write words to slice 0 at the same time (crossbar
//           arbitration), then one core loads and runs a program there
//  phase 3  core 0 starts programs on all four slices back to back while its
//           completion sink is blocked, so responses queue up and contend
//
// A monitor per slice follows the requests the slice accepts, in the order it
// accepts them, and runs a reference CNC unit (cnc_ref) on them. Checked:
// every block an algorithm writes back, the final contents of every CNC array
// and sense-amplifier row, that each request reached the slice its address
// hashes to, per-slice latencies (SW_CNC 1 cycle, RD_D2CNC and LD_CMD 2 cycles
// on a hit, an algorithm of N commands with S extra shift cycles N + S + 7
// cycles when the write-back hits), that every instruction completes at its
// core, and that no illegal command or command-array overflow occurs.
// Each mechanism is counted and must happen at least once: cache misses on
// reads and on write-backs, TLB waits, core stalls, request arbitration,
// response contention, multi-cycle shift stalls, command reuse, logic ops,
// bit extension, slices computing in parallel, and ECC detection: at the end
// slice 1 loads a program that reads row 0, a stored bit of that row is
// flipped, and the rerun must raise ecc_err on slice 1 and nowhere else (and
// never before the flip).
module tb_cnc_system;
  import cnc_pkg::*;
  `include "cnc_ref.svh"

  localparam int NC = 4, NS = 4;
  localparam logic [31:0] PGX = 32'h0050_0000;   // TLB: PA = VA ^ PGX

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

  cnc_system dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // mechanism counters
  int n_tlb_wait = 0, n_stall = 0, n_arb = 0, n_rsp_cont = 0, n_par = 0, n_done_bp = 0;
  int n_shift_stall [NS], n_logic [NS], n_ext [NS], n_reuse [NS], n_wb_miss [NS], n_rd_miss [NS];

  // ------------------------------------------------------------ core side
  logic [31:0] r1v [NC], r2v [NC];
  int tlb_wait [NC], tlb_lat [NC];
  bit blk_done [NC];
  int issued [NC], done_cnt [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cm
    assign rs1_val[c] = (rf_rs1[c] == 5'd0) ? 32'd0 : r1v[c];
    assign rs2_val[c] = (rf_rs2[c] == 5'd0) ? 32'd0 : r2v[c];
    assign tlb_ack[c]   = tlb_req[c] && tlb_wait[c] >= tlb_lat[c];
    assign tlb_paddr[c] = tlb_vaddr[c] ^ PGX;
    always @(posedge clk) begin
      if (tlb_req[c] && !tlb_ack[c]) begin tlb_wait[c]++; n_tlb_wait++; end
      if (tlb_ack[c]) begin tlb_wait[c] = 0; tlb_lat[c] = $urandom % 5; end
      if (stall[c]) n_stall++;
      if (done_valid[c] && done_ready[c]) done_cnt[c]++;
      if (done_valid[c] && !done_ready[c]) n_done_bp++;
    end
    always @(negedge clk) done_ready[c] = !blk_done[c] && ($urandom % 4 != 0);
  end

  // interconnect activity
  always @(posedge clk) if (rst_n) begin
    int busy;
    for (int s = 0; s < NS; s++) begin
      int w, r;
      w = 0; r = 0;
      for (int c = 0; c < NC; c++) if (dut.core_req[c].valid && dut.core_req[c].dest == 4'(s)) w++;
      if (w > 1) n_arb++;
    end
    for (int c = 0; c < NC; c++) begin
      int r; r = 0;
      for (int s = 0; s < NS; s++) if (dut.slice_resp[s].valid && dut.slice_resp[s].core == 4'(c)) r++;
      if (r > 1) n_rsp_cont++;
    end
    busy = 0;
    for (int s = 0; s < NS; s++) if (cnc_state[s] == 4'd4) busy++;
    if (busy > 1) n_par++;
  end

  // ----------------------------------------------------------- slice side
  event ev_final;      // end of test: every slice monitor runs its final checks
  int   n_final = 0;
  // expected write-back results, per slice, by cache index
  for (genvar s = 0; s < NS; s++) begin : g_sl
    l2_slice_model #(.IDXW(8), .MISS_LAT(8)) l2 (
      .clk, .csb(dc_csb[s]), .web(dc_web[s]), .oeb(dc_oeb[s]), .addr(dc_addr[s]),
      .rdata(dc_rdata[s]), .miss(dc_miss[s]), .miss_rsp(dc_miss_rsp[s]), .wdata(dc_wdata[s])
    );

    cnc_ref rm;
    logic [15:0]  prog [$];
    logic [511:0] exp_res [int];
    bit fresh = 1, waiting = 0, have_prog = 0;
    int cnt = 0, exp_lat = 0, accepted = 0;
    nc_e cur_nc;

    initial begin
      rm = new();
      @(posedge rst_n);
      for (int r = 0; r < 256; r++) rm.mem[r] = dut.g_slice[s].u_slice.u_array.mem[r];
    end

    always @(posedge clk) if (rst_n) begin
      cnc_req_t q;
      q = dut.slice_req[s];
      if (waiting) begin
        cnt++;
        if (dut.slice_resp[s].valid) begin
          waiting = 0;
          if (exp_lat > 0)
            check($sformatf("slice %0d nc %0d latency %0d, expected %0d", s, cur_nc, cnt, exp_lat),
                  cnt == exp_lat);
          else
            check($sformatf("slice %0d miss stalls (%0d cycles)", s, cnt), cnt > 8);
        end
      end
      if (q.valid && dut.slice_ready[s]) begin
        int idx;
        bit hit;
        idx = int'(q.addr[13:6]);
        hit = l2.present[idx];
        accepted++;
        check("request at its home slice", q.dest == 4'(s));
        check("slice free when it accepts", !waiting);
        waiting = 1; cnt = 0; cur_nc = q.nc;
        case (q.nc)
          NC_SW_CNC: begin rm.sw_word(q.wdata); exp_lat = 1; end
          NC_RD_D2CNC: begin
            rm.rd_block(l2.mem[idx]);
            exp_lat = hit ? 2 : 0;
            if (!hit) n_rd_miss[s]++;
          end
          NC_LD_CMD: begin
            if (fresh) prog.delete();
            fresh = 0; have_prog = 1;
            for (int k = 0; k < 32; k++) prog.push_back(l2.mem[idx][k*16 +: 16]);
            exp_lat = hit ? 2 : 0;
          end
          default: begin
            int extra;
            extra = 0;
            if (fresh) n_reuse[s]++;
            foreach (prog[i]) begin
              extra += rm.cycles(prog[i]) - 1;
              if (rm.cycles(prog[i]) > 1) n_shift_stall[s]++;
              if (prog[i][15:12] == 4'b1001) n_logic[s]++;
              if (prog[i][15:12] == 4'b1111) n_ext[s]++;
              rm.exec(prog[i]);
            end
            exp_res[idx] = rm.mem[0];
            exp_lat = hit ? prog.size() + extra + 7 : 0;
            if (!hit) n_wb_miss[s]++;
            rm.alg_done();
            fresh = 1;
          end
        endcase
      end
    end

    initial begin
      int nd;
      @(ev_final);
      foreach (exp_res[i])
        check($sformatf("slice %0d write-back block %0d", s, i), l2.mem[i] == exp_res[i]);
      nd = 0;
      for (int r = 0; r < 256; r++) if (dut.g_slice[s].u_slice.u_array.mem[r] != rm.mem[r]) nd++;
      check($sformatf("slice %0d array rows differing: %0d", s, nd), nd == 0);
      check($sformatf("slice %0d sense-amplifier row", s), dut.g_slice[s].u_slice.u_sa.dout == rm.ff);
      check($sformatf("slice %0d algorithms run", s), exp_res.size() > 0);
      n_final++;
    end
  end

  int n_illegal = 0, n_ovf = 0, n_ecc = 0, n_ecc_s1 = 0, n_ecc_hit = 0;
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < NS; s++) begin
      if (illegal_cmd[s]) n_illegal++;
      if (cmd_ovf[s]) n_ovf++;
      if (ecc_err[s]) n_ecc++;
    end
  always @(posedge clk) if (rst_n && ecc_err[1]) n_ecc_s1++;

  // cache-side helpers (slice index must be constant for the generate scopes)
  task automatic set_blk(input int s, input int idx, input logic [511:0] d, input bit pres);
    case (s)
      0: begin g_sl[0].l2.mem[idx] = d; g_sl[0].l2.present[idx] = pres; end
      1: begin g_sl[1].l2.mem[idx] = d; g_sl[1].l2.present[idx] = pres; end
      2: begin g_sl[2].l2.mem[idx] = d; g_sl[2].l2.present[idx] = pres; end
      default: begin g_sl[3].l2.mem[idx] = d; g_sl[3].l2.present[idx] = pres; end
    endcase
  endtask

  // ------------------------------------------------------- address plan
  function automatic logic [1:0] hash(logic [31:0] a);
    logic [1:0] h = 0;
    for (int i = 6; i < 32; i += 2) h ^= a[i +: 2];
    return h;
  endfunction
  // blocks 0..255 (cache index = block number); 64 of them per slice
  int blk_of [NS][$];
  int next_blk [NS];
  function automatic int alloc(input int s);
    int b;
    b = blk_of[s][next_blk[s] % blk_of[s].size()];
    next_blk[s]++;
    return b;
  endfunction
  function automatic logic [31:0] va_of(input int b);
    return (32'(b) * 64) ^ PGX;
  endfunction

  function automatic logic [511:0] rnd_blk();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // --------------------------------------------------------- instructions
  function automatic logic [31:0] enc(logic [2:0] f3, logic [4:0] b, logic [11:0] im);
    return {im[11:5], b, 5'd1, f3, im[4:0], 7'b0101011};   // rs1 = x1
  endfunction

  // present one instruction (call at a negedge); returns at the negedge after it is taken
  task automatic exec_instr(input int c, input logic [2:0] f3, input logic [4:0] b,
                            input logic [31:0] va, input logic [31:0] data);
    logic [11:0] im;
    im = 12'($urandom_range(0, 127)) - 12'd64;
    r1v[c] = va - {{20{im[11]}}, im};
    r2v[c] = data;
    instr[c] = enc(f3, (f3 == F3_SW_CNC) ? 5'd2 : b, im);
    instr_valid[c] = 1;
    issued[c]++;
    #1;
    while (stall[c]) begin @(negedge clk); #1; end
    @(negedge clk);
    instr_valid[c] = 0;
  endtask

  task automatic do_sw(input int c, input int s, input logic [31:0] w);
    int b;
    b = blk_of[s][$urandom % blk_of[s].size()];
    exec_instr(c, F3_SW_CNC, 0, va_of(b) + 32'($urandom % 16) * 4, w);
  endtask

  task automatic do_rd(input int c, input int s);
    int b;
    b = alloc(s);
    set_blk(s, b, rnd_blk(), $urandom % 3 != 0);
    exec_instr(c, F3_RD_D2CNC, 0, va_of(b) + 32'($urandom % 64), 0);
  endtask

  task automatic do_ld(input int c, input int s, input int nblk, input int max_shift);
    for (int k = 0; k < nblk; k++) begin
      int b;
      logic [511:0] blk;
      b = alloc(s);
      for (int i = 0; i < 32; i++) blk[i*16 +: 16] = rand_cmd(max_shift);
      set_blk(s, b, blk, $urandom % 4 != 0);
      exec_instr(c, F3_LD_CMD, 0, va_of(b), 0);
    end
  endtask

  task automatic do_alg(input int c, input int s);
    int b;
    b = alloc(s);
    set_blk(s, b, '0, $urandom % 3 != 0);
    exec_instr(c, F3_ALG_CNC, 5'($urandom % 11), va_of(b), 0);
  endtask

  task automatic job(input int c, input int s, input bit reload);
    for (int i = 0; i < 3; i++) do_sw(c, s, $urandom);
    for (int i = 0; i < 2; i++) do_rd(c, s);
    do_sw(c, s, $urandom);
    if (reload) do_ld(c, s, 1 + $urandom % 3, 10);
    do_alg(c, s);
  endtask

  task automatic core_phase1(input int c);
    job(c, c, 1);
    job(c, c, 1);
    job(c, c, 0);     // reuse the loaded program
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 256; b++) blk_of[hash(32'(b) * 64)].push_back(b);
    for (int c = 0; c < NC; c++) begin
      instr_valid[c] = 0; instr[c] = 0; r1v[c] = 0; r2v[c] = 0;
      tlb_wait[c] = 0; tlb_lat[c] = 2; blk_done[c] = 0; issued[c] = 0; done_cnt[c] = 0;
    end
    for (int s = 0; s < NS; s++) begin
      next_blk[s] = 0; n_shift_stall[s] = 0; n_logic[s] = 0; n_ext[s] = 0;
      n_reuse[s] = 0; n_wb_miss[s] = 0; n_rd_miss[s] = 0;
    end
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // phase 1: four cores, four slices, in parallel
    fork
      core_phase1(0);
      core_phase1(1);
      core_phase1(2);
      core_phase1(3);
    join
    $display("phase 1 done at cycle %0t", $time / 10);
    // phase 2: everyone writes to slice 0 at once, then core 2 runs there
    fork
      for (int i = 0; i < 4; i++) do_sw(0, 0, $urandom);
      for (int i = 0; i < 4; i++) do_sw(1, 0, $urandom);
      for (int i = 0; i < 4; i++) do_sw(2, 0, $urandom);
      for (int i = 0; i < 4; i++) do_sw(3, 0, $urandom);
    join
    do_rd(1, 0);
    do_ld(2, 0, 2, 4);
    do_alg(2, 0);
    $display("phase 2 done at cycle %0t", $time / 10);
    // phase 3: core 0 starts programs on all slices while its completions are held
    // (a slice holding an undelivered response takes no new request, so the
    //  completion sink must not wait for the core: release it after a while)
    fork
      begin blk_done[0] = 1; repeat (150) @(negedge clk); blk_done[0] = 0; end
    join_none
    for (int s = NS - 1; s >= 0; s--) do_alg(0, s);
    repeat (200) @(negedge clk);
    $display("phase 3 issued at cycle %0t", $time / 10);

    // drain
    begin
      int t;
      bit all;
      t = 0;
      do begin
        @(negedge clk);
        t++;
        all = 1;
        for (int c = 0; c < NC; c++) if (done_cnt[c] != issued[c]) all = 0;
        for (int s = 0; s < NS; s++) if (cnc_state[s] != 4'd0) all = 0;
      end while (!all && t < 20000);
      for (int c = 0; c < NC; c++)
        check($sformatf("core %0d: %0d of %0d instructions completed", c, done_cnt[c], issued[c]),
              done_cnt[c] == issued[c]);
    end
    $display("drained at cycle %0t", $time / 10);
    -> ev_final;
    wait (n_final == NS);

    // ECC: slice 1 gets a program that reads row 0, then a stored bit of
    // row 0 is flipped; the rerun must raise ecc_err on slice 1 only
    begin
      int b, e0, e1, t;
      logic [511:0] blk;
      e0 = n_ecc; e1 = n_ecc_s1;
      b = alloc(1);
      for (int i = 0; i < 32; i++) blk[i*16 +: 16] = mk_cmd(CMD_RD_ROW, 8'd0, 4'b1000);
      set_blk(1, b, blk, 1'b1);
      exec_instr(1, F3_LD_CMD, 0, va_of(b), 0);
      dut.g_slice[1].u_slice.u_array.mem[0][0] = ~dut.g_slice[1].u_slice.u_array.mem[0][0];
      do_alg(1, 1);
      t = 0;
      while ((done_cnt[1] != issued[1] || cnc_state[1] != 4'd0) && t < 2000) begin
        @(negedge clk); t++;
      end
      n_ecc_hit = n_ecc_s1 - e1;
      check("ECC flag only on the slice with the flipped bit", n_ecc - e0 == n_ecc_hit);
    end

    begin
      int sh, lg, ex, ru, wbm, rdm, acc;
      sh = 0; lg = 0; ex = 0; ru = 0; wbm = 0; rdm = 0;
      acc = g_sl[0].accepted + g_sl[1].accepted + g_sl[2].accepted + g_sl[3].accepted;
      for (int s = 0; s < NS; s++) begin
        sh += n_shift_stall[s]; lg += n_logic[s]; ex += n_ext[s];
        ru += n_reuse[s]; wbm += n_wb_miss[s]; rdm += n_rd_miss[s];
      end
      $display("requests %0d | read misses %0d  write-back misses %0d  TLB wait cycles %0d  stall cycles %0d",
               acc, rdm, wbm, n_tlb_wait, n_stall);
      $display("arbitration cycles %0d  response contention cycles %0d  completion back-pressure %0d",
               n_arb, n_rsp_cont, n_done_bp);
      $display("shift stalls %0d  logic ops %0d  bit extensions %0d  program reuse %0d  parallel-compute cycles %0d  ECC detections %0d",
               sh, lg, ex, ru, n_par, n_ecc_hit);
      check("no illegal command", n_illegal == 0);
      check("no command-array overflow", n_ovf == 0);
      check("no ECC error before the injected one", n_ecc == n_ecc_hit);
      check("mechanism: ECC error detected", n_ecc_hit > 0);
      check("mechanism: read miss", rdm > 0);
      check("mechanism: write-back miss", wbm > 0);
      check("mechanism: TLB wait", n_tlb_wait > 0);
      check("mechanism: core stall", n_stall > 0);
      check("mechanism: request arbitration", n_arb > 0);
      check("mechanism: response contention", n_rsp_cont > 0);
      check("mechanism: completion back-pressure", n_done_bp > 0);
      check("mechanism: shift stall", sh > 0);
      check("mechanism: logic op", lg > 0);
      check("mechanism: bit extension", ex > 0);
      check("mechanism: program reuse", ru > 0);
      check("mechanism: slices computing in parallel", n_par > 0);
      for (int s = 0; s < NS; s++) check($sformatf("slice %0d used", s), n_reuse[s] + n_logic[s] > 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
