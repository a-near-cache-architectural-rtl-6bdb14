// tb_cnc_slice: self-checking test of one CNC unit with a model cache slice.
//
// Repeats a full CNC job several times: SW_CNC words and RD_D2CNC blocks fill
// the array, LD_CMD loads a random command program (one to three blocks of
// 32 commands) from the cache, ALG runs it and writes row 0 back to the
// cache. A reference model executes the same program; the block written back
// and the final contents of the cache are compared with it. Also checks the
// cycle counts: SW_CNC 1 cycle, RD_D2CNC 2 cycles on a hit, an algorithm of N
// commands with S extra shift cycles N + S + 7 cycles from the cycle it is
// taken to the cycle its response is seen (one command per cycle),
// and that misses stall and then complete.
module tb_cnc_slice;
  import cnc_pkg::*;
  `include "cnc_ref.svh"

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  cnc_req_t  req;
  logic      req_ready, resp_ready;
  cnc_resp_t resp;
  logic      dc_csb, dc_web, dc_oeb, dc_miss, dc_miss_rsp, cmd_ovf, illegal_cmd, ecc_err;
  logic [31:0]  dc_addr;
  logic [511:0] dc_rdata, dc_wdata;
  logic [3:0]   state;

  cnc_slice dut (.*);

  int n_ecc = 0;
  always @(posedge clk) if (rst_n && ecc_err) n_ecc++;

  l2_slice_model #(.IDXW(8), .MISS_LAT(5)) l2 (
    .clk, .csb(dc_csb), .web(dc_web), .oeb(dc_oeb), .addr(dc_addr),
    .rdata(dc_rdata), .miss(dc_miss), .miss_rsp(dc_miss_rsp), .wdata(dc_wdata)
  );

  int checks = 0, failures = 0, cyc = 0, miss_waits = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (dc_miss) miss_waits++;

  cnc_ref rm;

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0d)", what, cyc); end
  endtask

  function automatic logic [511:0] rnd_blk();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // issue one request and return the cycles until the response
  task automatic issue(input nc_e nc, input logic [31:0] addr, input logic [31:0] wdata,
                       output int lat);
    int t0;
    @(negedge clk);
    req = '0; req.valid = 1; req.nc = nc; req.addr = addr; req.wdata = wdata; req.core = 4'd2;
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(posedge clk);
    #1 req.valid = 0;
    while (!resp.valid) @(posedge clk) #1;
    lat = cyc - t0;
    check("resp core", resp.core == 4'd2 && resp.nc == nc);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    rm = new();
    rst_n = 0; req = '0; resp_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // SRAM power-up contents are arbitrary: start the reference from them
    for (int r = 0; r < 256; r++) rm.mem[r] = dut.u_array.mem[r];
    for (int job = 0; job < 6; job++) begin
      int nblk, ncmd, extra;
      logic [15:0] prog [$];
      // data blocks in cache at index 16.., program at index 64..
      for (int b = 0; b < 4; b++) begin
        l2.mem[16 + b] = rnd_blk();
        l2.present[16 + b] = (job % 2 == 0) || b != 0;   // some misses
      end
      // inputs: 3 words, then 3 blocks, then 2 words
      for (int i = 0; i < 3; i++) begin
        logic [31:0] w;
        w = $urandom;
        issue(NC_SW_CNC, 32'h1000 + 32'(i) * 4, w, lat);
        rm.sw_word(w);
        check("SW_CNC 1 cycle", lat == 1);
      end
      for (int b = 0; b < 3; b++) begin
        bit hit;
        hit = l2.present[16 + b];
        issue(NC_RD_D2CNC, 32'((16 + b) * 64), 0, lat);
        rm.rd_block(l2.mem[16 + b]);
        if (hit) check($sformatf("RD_D2CNC 2 cycles (%0d)", lat), lat == 2);
        else     check($sformatf("RD_D2CNC miss stalls (%0d)", lat), lat > 5);
      end
      for (int i = 0; i < 2; i++) begin
        logic [31:0] w;
        w = $urandom;
        issue(NC_SW_CNC, 32'h2000, w, lat);
        rm.sw_word(w);
      end
      // program
      nblk = 1 + job % 3;
      ncmd = nblk * 32;
      extra = 0;
      prog.delete();
      for (int i = 0; i < ncmd; i++) begin
        logic [15:0] c;
        c = rand_cmd(job < 3 ? 1 : 12);
        prog.push_back(c);
        extra += rm.cycles(c) - 1;
      end
      for (int b = 0; b < nblk; b++) begin
        logic [511:0] blk;
        for (int k = 0; k < 32; k++) blk[k*16 +: 16] = prog[b*32 + k];
        l2.mem[64 + b] = blk;
        l2.present[64 + b] = 1;
        issue(NC_LD_CMD, 32'((64 + b) * 64), 0, lat);
        check("LD_CMD 2 cycles", lat == 2);
      end
      foreach (prog[i]) rm.exec(prog[i]);
      l2.present[100] = 1;
      issue(job % 2 ? NC_KECCAK : NC_NTT, 32'(100 * 64), 0, lat);
      check($sformatf("ALG %0d cmds + %0d shift cycles took %0d", ncmd, extra, lat),
            lat == ncmd + extra + 7);
      check("result block", l2.mem[100] == rm.mem[0]);
      begin
        int nd; nd = 0;
        for (int r = 0; r < 256; r++) if (dut.u_array.mem[r] != rm.mem[r]) nd++;
        check($sformatf("array rows differing: %0d", nd), nd == 0);
        check("sense-amplifier row", dut.u_sa.dout == rm.ff);
      end
      rm.alg_done();
      // rerun the same program without reloading (commands are reused)
      foreach (prog[i]) rm.exec(prog[i]);
      l2.present[101] = (job % 3 != 0);
      issue(NC_AES, 32'(101 * 64), 0, lat);
      check("rerun result block", l2.mem[101] == rm.mem[0]);
      rm.alg_done();
      check("no illegal", !illegal_cmd);
      check("no ECC error", n_ecc == 0);
    end
    check("misses seen", miss_waits > 0);
    $display("miss cycles %0d", miss_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
