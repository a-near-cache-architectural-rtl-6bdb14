// tb_cnc_ctrl: self-checking test of the CNC control module on its own.
//
// Plays the cache slice (miss, miss response) and the command array (a
// one-cycle-latency store of commands written through cmd_we) and checks the
// control outputs cycle by cycle:
//  - SW_CNC writes one word, in the cycle it is taken, at the advancing pointer
//  - RD_D2CNC reads the data array, then writes a whole CNC row next cycle;
//    on a miss it waits for the miss response and reads again
//  - LD_CMD writes command-array rows in order and flags overflow after 256
//  - ALG issues the expected wordline, sense-amplifier and write-back
//    controls for a short program, a shift of N steps lasting N cycles,
//    then reads the result row and writes it to the data array.
module tb_cnc_ctrl;
  import cnc_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  cnc_req_t  req;
  logic      req_ready, resp_ready;
  cnc_resp_t resp;
  logic      dc_csb, dc_web, dc_oeb, dc_miss, dc_miss_rsp;
  logic [31:0] dc_addr;
  logic      arr_rd_en, arr_act2, arr_we;
  logic [7:0] arr_ra, arr_rb, arr_wa;
  logic [15:0] arr_wmask;
  logic [1:0] mux;
  logic      sa_load, sa_shift, sa_right, sa_ext;
  sa_op_e    sa_op;
  logic [7:0] sa_col;
  logic [2:0] sa_w;
  logic      cmd_we, cmd_re;
  logic [7:0] cmd_wrow;
  logic [12:0] cmd_raddr;
  logic [15:0] cmd_rdata;
  logic [3:0] state;
  logic      cmd_ovf, illegal_cmd;

  cnc_ctrl dut (.*);

  // command array stand-in: slot k of each written row holds a programmed command
  logic [15:0] prog [32];
  always @(posedge clk) if (cmd_re) cmd_rdata <= prog[cmd_raddr[4:0]];

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // events seen during ALG
  string ev [$];
  int shift_cycles = 0;
  always @(posedge clk) if (rst_n && state == 4'd4) begin
    if (arr_rd_en) ev.push_back($sformatf("rd %0d %0d %0d", arr_ra, arr_rb, arr_act2));
    if (sa_load)   ev.push_back($sformatf("load %0d", sa_op));
    if (arr_we)    ev.push_back($sformatf("wr %0d %0d", arr_wa, mux));
    if (sa_shift)  shift_cycles++;
    if (sa_ext)    ev.push_back($sformatf("ext %0d %0d", sa_col, sa_w));
  end

  task automatic take(input nc_e nc, input logic [31:0] addr);
    @(negedge clk);
    req = '0; req.valid = 1; req.nc = nc; req.addr = addr; req.wdata = 32'hA5A5_0000 | addr;
    check("ready in idle", req_ready);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; req = '0; resp_ready = 1; dc_miss = 0; dc_miss_rsp = 0;
    for (int i = 0; i < 32; i++) prog[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // SW_CNC x3: words 0,1,2 of row 0, written in the accept cycle
    for (int i = 0; i < 3; i++) begin
      take(NC_SW_CNC, 32'h40 + 32'(i));
      #1;
      check("sw we", arr_we && arr_wa == 0 && arr_wmask == 16'(1 << i) && mux == 0);
      @(negedge clk); req.valid = 0;
      check("sw resp", resp.valid && resp.nc == NC_SW_CNC);
    end
    // RD_D2CNC hit: goes to row 1
    take(NC_RD_D2CNC, 32'h1234);
    #1 check("rd read", !dc_csb && !dc_oeb && dc_web && dc_addr == 32'h1200);
    @(negedge clk); req.valid = 0;
    check("rd write next cycle", arr_we && arr_wa == 1 && arr_wmask == '1 && mux == 1);
    @(negedge clk);
    check("rd resp", resp.valid);
    // RD_D2CNC miss: goes to row 2 after the miss response
    take(NC_RD_D2CNC, 32'h2000);
    @(negedge clk); req.valid = 0; dc_miss = 1;
    #1 check("no write on miss", !arr_we);
    @(negedge clk); dc_miss = 0;
    repeat (3) begin check("waits", !arr_we && dc_csb); @(negedge clk); end
    dc_miss_rsp = 1;
    @(negedge clk); dc_miss_rsp = 0;
    check("re-read", !dc_csb && !dc_oeb);
    @(negedge clk);
    check("write after miss", arr_we && arr_wa == 2 && mux == 1);
    @(negedge clk);

    // LD_CMD: 257 blocks, rows 0..255, then overflow
    for (int b = 0; b < 257; b++) begin
      take(NC_LD_CMD, 32'(b * 64));
      @(negedge clk); req.valid = 0;
      if (b < 256) check($sformatf("ld row %0d", b), cmd_we && cmd_wrow == 8'(b));
      else         check("ld overflow blocks write", !cmd_we);
      @(negedge clk);
    end
    check("overflow flagged", cmd_ovf);

    // ALG: new program of one block (LD_CMD after ALG restarts the array)
    take(NC_AES, 32'h8000);
    @(negedge clk); req.valid = 0;
    while (!resp.valid) @(negedge clk);
    @(negedge clk);
    
    prog[0] = mk_cmd(CMD_ACT_ROW, 8'd5, 4'b0001);
    prog[1] = mk_cmd(CMD_LOGIC_OP, 8'd7, 4'b0100);   // XOR
    prog[2] = mk_cmd(CMD_WR_ROW, 8'd9, 4'b0000);
    prog[3] = mk_cmd(CMD_SHIFT, 8'd3, 4'b1010);      // right by 3
    prog[4] = mk_cmd(CMD_EXT_BIT, 8'd2, 4'b0010);    // width code 1
    prog[5] = mk_cmd(CMD_RD_ROW, 8'd4, 4'b1000);
    for (int i = 6; i < 32; i++) prog[i] = mk_cmd(CMD_ACT_ROW, 8'd0, 4'b0001);
    take(NC_LD_CMD, 32'h9000);
    @(negedge clk); req.valid = 0;
    check("ld after alg starts at row 0", cmd_we && cmd_wrow == 0);
    @(negedge clk);
    check("overflow cleared", !cmd_ovf);
    ev.delete(); shift_cycles = 0;
    take(NC_KYBER, 32'hC040);
    @(negedge clk); req.valid = 0;
    begin
      int wb_rd = 0, wb_wr = 0, n = 0;
      while (!resp.valid && n < 200) begin
        if (state == 4'd5 && arr_rd_en && arr_ra == 0 && !arr_act2) wb_rd++;
        if (!dc_csb && !dc_web && dc_addr == 32'hC040) wb_wr++;
        @(negedge clk); n++;
      end
      check("write-back row read", wb_rd == 1);
      check("write-back to data array", wb_wr == 1);
      check("alg response", resp.valid && resp.nc == NC_KYBER);
      // one command per cycle: 32 commands + 2 extra shift cycles + pipeline and write-back
      check($sformatf("alg cycles %0d", n), n == 32 + 2 + 7 - 1);
    end
    check("shift lasted 3 cycles", shift_cycles == 3);
    begin
      string exp [$];
      exp = '{"rd 5 7 1", "load 2", "wr 9 2", "rd 4 0 0", "ext 2 1", "load 0"};
      check($sformatf("alg events %0d", ev.size()), ev.size() == exp.size());
      foreach (exp[i]) if (i < ev.size()) check($sformatf("event %0d '%s' vs '%s'", i, ev[i], exp[i]), ev[i] == exp[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
