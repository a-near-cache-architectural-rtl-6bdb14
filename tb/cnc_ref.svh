// cnc_ref.svh: reference model of a CNC unit for the testbenches.
//
// `cnc_ref` holds its own copy of the 256 x 512 array, the sense-amplifier
// flip-flop row and the first-operand row, and executes 16-bit commands with
// the semantics of the command table: rd_row, wr_row, act_row, logic_op
// (AND/OR/XOR/NOR on two rows), shift (N one-column steps) and ext_bit
// (broadcast of one column over each computing block). It also gives the
// number of cycles a command occupies and loads data the way SW_CNC and
// RD_D2CNC do. `rand_cmd` draws a random legal command.

  function automatic int unsigned ref_width(input logic [2:0] code);
    case (code)
      3'd0: return 16;
      3'd1: return 25;
      3'd2: return 32;
      3'd3: return 64;
      3'd4: return 128;
      3'd5: return 256;
      3'd6: return 512;
      default: return 8;
    endcase
  endfunction

  function automatic logic [15:0] rand_cmd(input int max_shift);
    logic [7:0] a;
    a = 8'($urandom);
    case ($urandom_range(5))
      0: return {4'b0001, a, 4'b1000};                                   // rd_row
      1: return {4'b0010, a, 1'($urandom), 3'b000};                      // wr_row
      2: return {4'b0011, 8'($urandom_range(max_shift)), 1'b1, 1'($urandom), 1'($urandom), 1'b0}; // shift
      3: return {4'b1011, a, 4'b0001};                                   // act_row
      4: return {4'b1001, a, 1'b0, 2'($urandom), 1'b0};                  // logic_op
      default: return {4'b1111, a, 3'($urandom), 1'b0};                  // ext_bit
    endcase
  endfunction

  class cnc_ref;
    logic [511:0] mem [256];
    logic [511:0] ff;
    logic [7:0]   src1;
    int unsigned  wptr;     // in 32-bit words

    function new();
      for (int i = 0; i < 256; i++) mem[i] = '0;
      ff = '0; src1 = '0; wptr = 0;
    endfunction

    function void sw_word(input logic [31:0] d);
      mem[(wptr / 16) % 256][(wptr % 16) * 32 +: 32] = d;
      wptr = (wptr + 1) % 4096;
    endfunction

    function void rd_block(input logic [511:0] d);
      int unsigned row;
      row = (wptr + 15) / 16 % 256;
      mem[row] = d;
      wptr = ((row + 1) % 256) * 16;
    endfunction

    function void alg_done();
      wptr = 0;
    endfunction

    // cycles a command holds the execution stage
    function int unsigned cycles(input logic [15:0] c);
      if (c[15:12] == 4'b0011 && c[3] && !c[0] && c[11:4] > 1) return c[11:4];
      return 1;
    endfunction

    function void exec(input logic [15:0] c);
      logic [3:0] op, ct;
      logic [7:0] a;
      logic [511:0] x, y, src;
      op = c[15:12]; a = c[11:4]; ct = c[3:0];
      if (op == 4'b0001 && ct == 4'b1000) ff = mem[a];
      else if (op == 4'b0010 && ct[2:0] == 0) mem[a] = ff;
      else if (op == 4'b1011 && ct == 4'b0001) src1 = a;
      else if (op == 4'b1001 && !ct[3] && !ct[0]) begin
        x = mem[src1]; y = mem[a];
        case (ct[2:1])
          2'd0: ff = x & y;
          2'd1: ff = x | y;
          2'd2: ff = x ^ y;
          default: ff = ~(x | y);
        endcase
      end else if (op == 4'b0011 && ct[3] && !ct[0]) begin
        for (int i = 0; i < int'(a); i++) ff = ct[1] ? ff >> 1 : ff << 1;
      end else if (op == 4'b1111 && !ct[0]) begin
        int unsigned w, col;
        w = ref_width(ct[3:1]);
        col = int'(a) % w;
        src = ff;
        for (int b = 0; (b + 1) * int'(w) <= 512; b++)
          for (int k = 0; k < int'(w); k++) ff[b*w + k] = src[b*w + col];
      end
    endfunction
  endclass

