// tb_cnc_kernels: cryptographic kernels written as CNC command programs, run
// end to end on the full-size system.
//
// The top is used at its default parameters. Cores issue the real instruction
// sequence: RD_D2CNC / SW_CNC to bring operands in, LD_CMD to load the command
// program from the cache, ALG_CNC to run it and write the result block back.
// Each program is built here from the command formats and its result is
// compared with the same computation done directly in the testbench:
//
//  Kyber modular addition (core 0, slice 0, ALG code Kyber512): 32 lanes of
//    16-bit coefficients, r = (a + b) mod 3329. Addition is bit-parallel:
//    sum = a xor b, carry = a and b, then 16 rounds of carry <<= 1 (shift
//    command, with a mask row clearing the bit that crosses a lane boundary),
//    sum ^= carry, carry &= sum. The reduction adds 2^16 - q, spreads the sign
//    bit of each lane over the lane with ext_bit (16-column blocks) and
//    selects sum or sum - q with AND/NOR/OR. 411 commands in 13 blocks.
//  Keccak chi step (core 1, slice 1, ALG code Keccak-1600): five rows hold the
//    five lanes of a plane (eight 64-bit instances per row);
//    out[x] = a[x] xor (not a[x+1] and a[x+2]).
//  AES AddRoundKey (core 2, slice 2, ALG code AES-128): four 128-bit states in
//    one row from RD_D2CNC, the round key written word by word with 16 SW_CNC,
//    state xor key.
//  Keccak theta step (core 3, slice 3, ALG code Keccak-1600): the 25 lanes of
//    the state in rows 0..24 (lane (x, y) in row 5y + x, eight 64-bit
//    instances per row). Column parities C[x] by XOR; D[x] = C[x-1] xor
//    ROT(C[x+1], 1), where the 64-bit rotation is a one-column shift with the
//    lane-crossing bit masked off, ORed with bit 63 of each lane spread by
//    ext_bit (64-column blocks) and masked to bit 0; then every lane xor D[x].
//    227 commands; all 25 output lanes are checked in the array.
//
// The four run at the same time on four slices. Each kernel is then run a
// second time on new data without reloading its commands. For every ALG the
// cycles from acceptance at the slice to its completion must be N + 7 for a
// program of N commands (one command per cycle; these programs have no
// multi-step shifts). The block written back is checked, and for chi also the
// other four output rows inside the array.
module tb_cnc_kernels;
  import cnc_pkg::*;
  `include "cnc_prog.svh"

  localparam int NC = 4, NS = 4;
  localparam int Q = 3329;

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

  // cores: register operands, an always-hitting TLB (PA = VA), completions taken at once
  logic [31:0] r1v [NC], r2v [NC];
  int done_cnt [NC], issued [NC];
  for (genvar c = 0; c < NC; c++) begin : g_cm
    assign rs1_val[c]   = r1v[c];
    assign rs2_val[c]   = r2v[c];
    assign tlb_ack[c]   = tlb_req[c];
    assign tlb_paddr[c] = tlb_vaddr[c];
    assign done_ready[c] = 1'b1;
    always @(posedge clk) if (done_valid[c]) done_cnt[c]++;
  end

  // slices: cache model and an ALG latency monitor
  int prog_len [NS];
  int alg_runs [NS];
  int n_ecc [NS] = '{default: 0};
  for (genvar s = 0; s < NS; s++) begin : g_ecc
    always @(posedge clk) if (rst_n && ecc_err[s]) n_ecc[s]++;
  end
  for (genvar s = 0; s < NS; s++) begin : g_sl
    l2_slice_model #(.IDXW(8), .MISS_LAT(6)) l2 (
      .clk, .csb(dc_csb[s]), .web(dc_web[s]), .oeb(dc_oeb[s]), .addr(dc_addr[s]),
      .rdata(dc_rdata[s]), .miss(dc_miss[s]), .miss_rsp(dc_miss_rsp[s]), .wdata(dc_wdata[s])
    );
    bit waiting = 0;
    int cnt = 0;
    always @(posedge clk) if (rst_n) begin
      if (waiting) begin
        cnt++;
        if (dut.slice_resp[s].valid) begin
          waiting = 0;
          alg_runs[s]++;
          check($sformatf("slice %0d: %0d-command program took %0d cycles, expected %0d",
                          s, prog_len[s], cnt, prog_len[s] + 7), cnt == prog_len[s] + 7);
        end
      end
      if (dut.slice_req[s].valid && dut.slice_ready[s] && dut.slice_req[s].nc >= NC_AES) begin
        waiting = 1; cnt = 0;
      end
    end
  end

  task automatic set_blk(input int s, input int idx, input logic [511:0] d);
    case (s)
      0: begin g_sl[0].l2.mem[idx] = d; g_sl[0].l2.present[idx] = 1; end
      1: begin g_sl[1].l2.mem[idx] = d; g_sl[1].l2.present[idx] = 1; end
      2: begin g_sl[2].l2.mem[idx] = d; g_sl[2].l2.present[idx] = 1; end
      default: begin g_sl[3].l2.mem[idx] = d; g_sl[3].l2.present[idx] = 1; end
    endcase
  endtask
  function automatic logic [511:0] get_blk(input int s, input int idx);
    case (s)
      0: return g_sl[0].l2.mem[idx];
      1: return g_sl[1].l2.mem[idx];
      2: return g_sl[2].l2.mem[idx];
      default: return g_sl[3].l2.mem[idx];
    endcase
  endfunction

  // address plan: block b (cache index b) lives on slice hash(b*64)
  function automatic logic [1:0] hash(logic [31:0] a);
    logic [1:0] h = 0;
    for (int i = 6; i < 32; i += 2) h ^= a[i +: 2];
    return h;
  endfunction
  int blk_of [NS][$];
  int next_blk [NS];
  function automatic int alloc(input int s);
    int b;
    b = blk_of[s][next_blk[s]];
    next_blk[s]++;
    return b;
  endfunction

  // instruction issue (called at a negedge, returns at the negedge after acceptance)
  task automatic exec_instr(input int c, input logic [2:0] f3, input logic [4:0] b,
                            input logic [31:0] addr, input logic [31:0] data);
    r1v[c] = addr;
    r2v[c] = data;
    instr[c] = {7'd0, (f3 == F3_SW_CNC) ? 5'd2 : b, 5'd1, f3, 5'd0, 7'b0101011};
    instr_valid[c] = 1;
    issued[c]++;
    #1;
    while (stall[c]) begin @(negedge clk); #1; end
    @(negedge clk);
    instr_valid[c] = 0;
  endtask

  task automatic rd_block(input int c, input int s, input logic [511:0] d);
    int b;
    b = alloc(s);
    set_blk(s, b, d);
    exec_instr(c, F3_RD_D2CNC, 0, 32'(b) * 64, 0);
  endtask

  task automatic load_prog(input int c, input int s, input logic [15:0] p [$]);
    int nblk;
    while (p.size() % 32 != 0) p.push_back(mk_cmd(CMD_ACT_ROW, 8'd0, 4'b0001));  // padding
    nblk = p.size() / 32;
    prog_len[s] = p.size();
    for (int k = 0; k < nblk; k++) begin
      int b;
      logic [511:0] blk;
      b = alloc(s);
      for (int i = 0; i < 32; i++) blk[i*16 +: 16] = p[k*32 + i];
      set_blk(s, b, blk);
      exec_instr(c, F3_LD_CMD, 0, 32'(b) * 64, 0);
    end
  endtask

  // run: returns the cache block index the result was written to
  task automatic run_alg(input int c, input int s, input logic [4:0] alg, output int res);
    int d0;
    res = alloc(s);
    set_blk(s, res, '0);
    d0 = done_cnt[c];
    exec_instr(c, F3_ALG_CNC, alg, 32'(res) * 64, 0);
    while (done_cnt[c] < issued[c]) @(negedge clk);
  endtask

  // ----------------------------------------------------------------- kernels
  task automatic kyber_modadd(input int c, input int s, input bit load);
    logic [511:0] a, b, exp;
    logic [15:0] p [$];
    int res;
    for (int i = 0; i < 32; i++) begin
      a[i*16 +: 16] = 16'($urandom % Q);
      b[i*16 +: 16] = 16'($urandom % Q);
      exp[i*16 +: 16] = 16'((int'(a[i*16 +: 16]) + int'(b[i*16 +: 16])) % Q);
    end
    if (load) begin
      modadd_prog(p);
      check($sformatf("modular-add program length %0d", p.size()), p.size() == 411);
    end
    rd_block(c, s, a);                   // row 0
    rd_block(c, s, b);                   // row 1
    rd_block(c, s, ~lanes(1));           // row 2: carry mask, bit 0 of each lane clear
    rd_block(c, s, lanes(65536 - Q));    // row 3: -q
    if (load) load_prog(c, s, p);
    run_alg(c, s, ALG_KYBER512, res);
    check("Kyber modular addition: (a + b) mod 3329 in 32 lanes", get_blk(s, res) == exp);
  endtask

  task automatic keccak_chi(input int c, input int s, input bit load);
    logic [511:0] a [5], o [5];
    logic [15:0] p [$];
    int res;
    for (int x = 0; x < 5; x++) for (int i = 0; i < 16; i++) a[x][i*32 +: 32] = $urandom;
    for (int x = 0; x < 5; x++) o[x] = a[x] ^ (~a[(x + 1) % 5] & a[(x + 2) % 5]);
    if (load) begin
      for (int x = 0; x < 5; x++) begin
        p.push_back(act((x + 1) % 5)); p.push_back(op((x + 1) % 5, SA_NOR)); p.push_back(wr(5));
        p.push_back(act(5)); p.push_back(op((x + 2) % 5, SA_AND)); p.push_back(wr(6));
        p.push_back(act(x)); p.push_back(op(6, SA_XOR)); p.push_back(wr(20 + x));
      end
      p.push_back(rd(20)); p.push_back(wr(0));
    end
    for (int x = 0; x < 5; x++) rd_block(c, s, a[x]);
    if (load) load_prog(c, s, p);
    run_alg(c, s, ALG_KECCAK1600, res);
    check("Keccak chi: lane 0 written back", get_blk(s, res) == o[0]);
    for (int x = 0; x < 5; x++)
      check($sformatf("Keccak chi: lane %0d in the array", x),
            dut.g_slice[1].u_slice.u_array.mem[20 + x] == o[x]);
  endtask

  // 64-bit lane rotation by one, as Keccak's ROT(v, 1) on eight lanes per row
  function automatic logic [511:0] rot1(input logic [511:0] v);
    logic [511:0] r;
    for (int k = 0; k < 8; k++) r[k*64 +: 64] = {v[k*64 +: 63], v[k*64 + 63]};
    return r;
  endfunction

  task automatic keccak_theta(input int c, input int s, input bit load);
    logic [511:0] a [25], cc [5], d [5], o [25], low;
    logic [15:0] p [$];
    int res;
    localparam int RLOW = 25, RNLOW = 26, RCC = 27, RDD = 32, RT1 = 37, RT2 = 38, ROUT = 40;
    low = '0;
    for (int k = 0; k < 8; k++) low[k*64] = 1'b1;
    for (int i = 0; i < 25; i++) for (int w = 0; w < 16; w++) a[i][w*32 +: 32] = $urandom;
    for (int x = 0; x < 5; x++) cc[x] = a[x] ^ a[5 + x] ^ a[10 + x] ^ a[15 + x] ^ a[20 + x];
    for (int x = 0; x < 5; x++) d[x] = cc[(x + 4) % 5] ^ rot1(cc[(x + 1) % 5]);
    for (int i = 0; i < 25; i++) o[i] = a[i] ^ d[i % 5];
    if (load) begin
      for (int x = 0; x < 5; x++) begin            // column parities
        p.push_back(act(x)); p.push_back(op(5 + x, SA_XOR)); p.push_back(wr(RCC + x));
        for (int y = 2; y < 5; y++) begin
          p.push_back(act(RCC + x)); p.push_back(op(5*y + x, SA_XOR)); p.push_back(wr(RCC + x));
        end
      end
      for (int x = 0; x < 5; x++) begin            // D[x] = C[x-1] ^ ROT(C[x+1], 1)
        int src;
        src = RCC + (x + 1) % 5;
        p.push_back(rd(src)); p.push_back(shl(1)); p.push_back(wr(RT1));
        p.push_back(act(RT1)); p.push_back(op(RNLOW, SA_AND)); p.push_back(wr(RT1));
        p.push_back(rd(src)); p.push_back(ext(63, 3)); p.push_back(wr(RT2));
        p.push_back(act(RT2)); p.push_back(op(RLOW, SA_AND)); p.push_back(wr(RT2));
        p.push_back(act(RT1)); p.push_back(op(RT2, SA_OR)); p.push_back(wr(RT1));
        p.push_back(act(RT1)); p.push_back(op(RCC + (x + 4) % 5, SA_XOR)); p.push_back(wr(RDD + x));
      end
      for (int i = 0; i < 25; i++) begin           // A'[x,y] = A[x,y] ^ D[x]
        p.push_back(act(i)); p.push_back(op(RDD + i % 5, SA_XOR)); p.push_back(wr(ROUT + i));
      end
      p.push_back(rd(ROUT)); p.push_back(wr(0));
      check($sformatf("Keccak theta program length %0d", p.size()), p.size() == 227);
    end
    for (int i = 0; i < 25; i++) rd_block(c, s, a[i]);   // rows 0..24, lane (x, y) in row 5y + x
    rd_block(c, s, low);                                  // row 25
    rd_block(c, s, ~low);                                 // row 26
    if (load) load_prog(c, s, p);
    run_alg(c, s, ALG_KECCAK1600, res);
    check("Keccak theta: lane (0,0) written back", get_blk(s, res) == o[0]);
    for (int i = 0; i < 25; i++)
      check($sformatf("Keccak theta: lane (%0d,%0d) in the array", i % 5, i / 5),
            dut.g_slice[3].u_slice.u_array.mem[ROUT + i] == o[i]);
  endtask

  task automatic aes_ark(input int c, input int s, input bit load);
    logic [511:0] st, key;
    logic [127:0] rk;
    logic [15:0] p [$];
    int res;
    for (int i = 0; i < 16; i++) st[i*32 +: 32] = $urandom;
    for (int i = 0; i < 4; i++) rk[i*32 +: 32] = $urandom;
    key = {4{rk}};
    if (load) begin
      p.push_back(act(0)); p.push_back(op(1, SA_XOR)); p.push_back(wr(0));
    end
    rd_block(c, s, st);                                    // row 0
    for (int w = 0; w < 16; w++)                            // row 1, one word at a time
      exec_instr(c, F3_SW_CNC, 0, 32'(blk_of[s][0]) * 64 + 32'(w) * 4, key[w*32 +: 32]);
    if (load) load_prog(c, s, p);
    run_alg(c, s, ALG_AES128, res);
    check("AES AddRoundKey on four 128-bit states", get_blk(s, res) == (st ^ key));
  endtask

  // -------------------------------------------------------------------- main
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 256; b++) blk_of[hash(32'(b) * 64)].push_back(b);
    for (int c = 0; c < NC; c++) begin
      instr_valid[c] = 0; instr[c] = 0; r1v[c] = 0; r2v[c] = 0; done_cnt[c] = 0; issued[c] = 0;
    end
    for (int s = 0; s < NS; s++) begin next_blk[s] = 1; prog_len[s] = 0; alg_runs[s] = 0; end
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      kyber_modadd(0, 0, 1);
      keccak_chi(1, 1, 1);
      aes_ark(2, 2, 1);
      keccak_theta(3, 3, 1);
    join
    // again with new data, reusing the loaded commands (and the cache blocks)
    for (int s = 0; s < NS; s++) next_blk[s] = 1;
    fork
      kyber_modadd(0, 0, 0);
      keccak_chi(1, 1, 0);
      aes_ark(2, 2, 0);
      keccak_theta(3, 3, 0);
    join
    for (int s = 0; s < NS; s++) check($sformatf("slice %0d ran two programs", s), alg_runs[s] == 2);
    for (int s = 0; s < NS; s++) check("no illegal command", !illegal_cmd[s]);
    for (int s = 0; s < NS; s++) check("no ECC error", n_ecc[s] == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
