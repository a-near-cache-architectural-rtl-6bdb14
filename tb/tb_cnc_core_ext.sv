// tb_cnc_core_ext: self-checking test of the CNC path through a core.
//
// A register-file model answers rf_rs1/rf_rs2 with values derived from the
// register number; a TLB model acknowledges translations after a random
// 0..5 cycles (a page walk on the long ones) with PA = VA xor a fixed page
// offset; the interconnect side applies random back-pressure. A stream of
// random CNC and non-CNC instructions is issued, holding each while `stall`
// is high. Every request leaving the core is checked, in program order,
// against a reference: CNC signal, algorithm code, PA (rs1 + imm, translated,
// 64-byte aligned except for SW_CNC), write data (rs2 for SW_CNC), core
// number and destination slice (reference hash). Also checks that non-CNC
// instructions never stall or send, that stalls and TLB waits happen, and the
// unloaded timing: a request is offered three cycles after its instruction
// is presented when the TLB hits at once.
module tb_cnc_core_ext;
  import cnc_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic        instr_valid, stall, tlb_req, tlb_ack, noc_ready;
  logic [31:0] instr, rs1_val, rs2_val, tlb_vaddr, tlb_paddr;
  logic [4:0]  rf_rs1, rf_rs2;
  cnc_req_t    noc_req;

  cnc_core_ext #(.NUM_SLICES(4), .CORE_ID(3)) dut (.*);

  function automatic logic [31:0] regval(logic [4:0] r);
    return (r == 0) ? 32'd0 : 32'h1000_0000 * 32'(r % 4) + 32'h0013_5791 * 32'(r);
  endfunction
  assign rs1_val = regval(rf_rs1);
  assign rs2_val = regval(rf_rs2) ^ 32'hFFFF_0000;

  localparam logic [31:0] PG = 32'h0A00_0000;
  // TLB model
  int tlb_wait = 0, tlb_lat = 0, tlb_waits = 0, stalls = 0, bp = 0;
  bit tlb_fast = 0;
  always_comb tlb_ack = tlb_req && (tlb_wait >= tlb_lat);
  assign tlb_paddr = tlb_vaddr ^ PG;
  always @(posedge clk) begin
    if (tlb_req && !tlb_ack) begin tlb_wait++; tlb_waits++; end
    if (tlb_ack) begin tlb_wait = 0; tlb_lat = tlb_fast ? 0 : $urandom % 6; end
    if (stall) stalls++;
    if (noc_req.valid && !noc_ready) bp++;
  end

  function automatic logic [1:0] ref_hash(logic [31:0] a);
    logic [1:0] h = 0;
    for (int i = 6; i < 32; i += 2) h ^= a[i +: 2];
    return h;
  endfunction

  cnc_req_t exp_q [$];
  int checks = 0, failures = 0, got = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && noc_req.valid && noc_ready) begin
    cnc_req_t e;
    got++;
    if (exp_q.size() == 0) check("request without instruction", 0);
    else begin
      e = exp_q.pop_front();
      check($sformatf("request %0d: got nc %0d addr %h wdata %h dest %0d, expected nc %0d addr %h wdata %h dest %0d",
                      got, noc_req.nc, noc_req.addr, noc_req.wdata, noc_req.dest, e.nc, e.addr, e.wdata, e.dest),
            noc_req.nc == e.nc && noc_req.addr == e.addr && noc_req.wdata == e.wdata &&
            noc_req.dest == e.dest && noc_req.core == 4'd3 && (e.nc < NC_AES || noc_req.alg == e.alg));
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mk(logic [2:0] f3, logic [4:0] b, logic [4:0] r1, logic [11:0] im);
    return {im[11:5], b, r1, f3, im[4:0], 7'b0101011};
  endfunction

  // present one instruction until taken; returns cycles spent stalled
  task automatic issue(input logic [31:0] ins, output int waited);
    waited = 0;
    instr = ins; instr_valid = 1;
    #1;
    while (stall) begin @(negedge clk); waited++; #1; end
    @(negedge clk);
    instr_valid = 0;
  endtask

  task automatic push_exp(input logic [31:0] ins);
    cnc_req_t e;
    logic [31:0] va, pa;
    logic [2:0] f3;
    f3 = ins[14:12];
    va = regval(ins[19:15]) + {{20{ins[31]}}, ins[31:25], ins[11:7]};
    pa = va ^ PG;
    e = '0;
    case (f3)
      3'b010: begin e.nc = NC_SW_CNC; e.wdata = regval(ins[24:20]) ^ 32'hFFFF_0000; end
      3'b011: e.nc = NC_RD_D2CNC;
      3'b100: e.nc = NC_LD_CMD;
      default: begin
        e.alg = ins[24:20];
        e.nc = (e.alg <= 1) ? NC_AES : (e.alg == 2) ? NC_KECCAK : (e.alg <= 4) ? NC_NTT :
               (e.alg <= 7) ? NC_KYBER : NC_DILITHIUM;
      end
    endcase
    e.addr = (f3 == 3'b010) ? pa : {pa[31:6], 6'd0};
    e.dest = 4'(ref_hash(e.addr));
    exp_q.push_back(e);
  endtask

  initial begin
    int w, t0;
    rst_n = 0; instr_valid = 0; instr = 0; noc_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // unloaded timing
    tlb_fast = 1;
    @(negedge clk);
    begin
      logic [31:0] ins;
      ins = mk(3'b011, 5'd0, 5'd7, 12'h040);
      push_exp(ins);
      instr = ins; instr_valid = 1; #1;
      check("no stall when empty", !stall);
      @(negedge clk); instr_valid = 0;
      t0 = 1;
      while (!noc_req.valid && t0 < 20) begin @(negedge clk); t0++; end
      check($sformatf("request offered %0d cycles after issue", t0), t0 == 3);
      @(negedge clk);
    end
    tlb_fast = 0;
    // random stream with back-pressure
    fork
      forever begin @(negedge clk); noc_ready = ($urandom % 3 != 0); end
    join_none
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] ins;
      int k;
      k = $urandom % 10;
      if (k == 0) begin
        ins = 32'($urandom); ins[6:0] = 7'b0110011;   // ALU op, not CNC
        instr = ins; instr_valid = 1; #1;
        check("non-CNC never stalls", !stall);
        @(negedge clk); instr_valid = 0;
      end else begin
        logic [2:0] f3;
        logic [4:0] b;
        f3 = (k < 5) ? 3'b010 : (k < 7) ? 3'b011 : (k < 9) ? 3'b100 : 3'b101;
        b = (f3 == 3'b010) ? 5'($urandom) : (f3 == 3'b101) ? 5'($urandom % 11) : 5'd0;
        ins = mk(f3, b, 5'($urandom), 12'($urandom));
        push_exp(ins);
        issue(ins, w);
      end
      if ($urandom % 4 == 0) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    check("all requests sent", exp_q.size() == 0);
    check("stalls happened", stalls > 100);
    check("TLB waits happened", tlb_waits > 100);
    check("back-pressure happened", bp > 100);
    $display("requests %0d stall cycles %0d TLB wait cycles %0d back-pressure cycles %0d",
             got, stalls, tlb_waits, bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
