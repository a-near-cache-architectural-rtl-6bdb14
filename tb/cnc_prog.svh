// cnc_prog.svh: helpers that build CNC command programs for the testbenches.
//
// One function per command format (rd, wr, act, op, shl, ext) and the
// program of the modular-addition kernel used by the Kyber/Dilithium
// coefficient arithmetic. Row plan of that kernel: row 0 = a, row 1 = b,
// row 2 = carry mask (bit 0 of each 16-bit lane clear), row 3 = 2^16 - q in
// every lane; scratch rows 10..17; the result (a + b) mod q goes to row 0.
// Addition is bit-parallel: sum = x xor y, carry = x and y, then 16 rounds of
// carry <<= 1 (masked at lane boundaries), new carry = sum and carry,
// sum ^= carry. The reduction forms d = s + (2^16 - q), spreads the sign bit
// of each lane of d over the lane (ext_bit, 16-column blocks) and selects
// s where d is negative, d elsewhere. Include after `import cnc_pkg::*;`.

  function automatic logic [15:0] rd(int r);  return mk_cmd(CMD_RD_ROW, 8'(r), 4'b1000); endfunction
  function automatic logic [15:0] wr(int r);  return mk_cmd(CMD_WR_ROW, 8'(r), 4'b0000); endfunction
  function automatic logic [15:0] act(int r); return mk_cmd(CMD_ACT_ROW, 8'(r), 4'b0001); endfunction
  function automatic logic [15:0] op(int r, sa_op_e o); return mk_cmd(CMD_LOGIC_OP, 8'(r), {1'b0, 2'(o), 1'b0}); endfunction
  function automatic logic [15:0] shl(int n); return mk_cmd(CMD_SHIFT, 8'(n), 4'b1000); endfunction
  function automatic logic [15:0] ext(int col, int code); return mk_cmd(CMD_EXT_BIT, 8'(col), {3'(code), 1'b0}); endfunction

  localparam int RA = 0, RB = 1, RM = 2, RNQ = 3, RS = 10, RC = 11, RT = 12, RD = 13,
                 RMK = 14, RNMK = 15, RX = 16, RY = 17;

  // dst = x + y in every 16-bit lane (mod 2^16); uses RC, RT and mask row RM
  task automatic add16(inout logic [15:0] p [$], input int x, input int y, input int dst);
    p.push_back(act(x)); p.push_back(op(y, SA_XOR)); p.push_back(wr(dst));
    p.push_back(act(x)); p.push_back(op(y, SA_AND)); p.push_back(wr(RC));
    for (int i = 0; i < 16; i++) begin
      p.push_back(rd(RC)); p.push_back(shl(1)); p.push_back(wr(RT));
      p.push_back(act(RT)); p.push_back(op(RM, SA_AND)); p.push_back(wr(RT));
      p.push_back(act(dst)); p.push_back(op(RT, SA_AND)); p.push_back(wr(RC));
      p.push_back(act(dst)); p.push_back(op(RT, SA_XOR)); p.push_back(wr(dst));
    end
  endtask

  // the whole modular-addition program (411 commands)
  task automatic modadd_prog(output logic [15:0] p [$]);
    p.delete();
    add16(p, RA, RB, RS);                           // s = a + b
    add16(p, RS, RNQ, RD);                          // d = s - q
    p.push_back(rd(RD)); p.push_back(ext(15, 0)); p.push_back(wr(RMK));   // sign of d over each lane
    p.push_back(act(RMK)); p.push_back(op(RMK, SA_NOR)); p.push_back(wr(RNMK));
    p.push_back(act(RS)); p.push_back(op(RMK, SA_AND)); p.push_back(wr(RX));
    p.push_back(act(RD)); p.push_back(op(RNMK, SA_AND)); p.push_back(wr(RY));
    p.push_back(act(RX)); p.push_back(op(RY, SA_OR)); p.push_back(wr(0));
  endtask

  function automatic logic [511:0] lanes(input int v);
    logic [511:0] r;
    for (int i = 0; i < 32; i++) r[i*16 +: 16] = 16'(v);
    return r;
  endfunction
