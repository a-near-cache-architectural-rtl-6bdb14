// tb_cnc_sense_amp: self-checking test of the sense-amplifier row.
//
// Drives random BL/BLB values derived from two random rows (so BL = a & b and
// BLB = ~(a | b), as the array produces them), loads each op MUX choice and
// compares with AND/OR/XOR/NOR computed here. Then checks 1-bit left and right
// shifts and bit extension for every computing-block width code.
module tb_cnc_sense_amp;
  import cnc_pkg::*;
  localparam int COLS = 512;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [COLS-1:0] bl_and, blb_nor, dout;
  logic load, shift_en, shift_right, ext_en;
  sa_op_e op;
  logic [7:0] ext_col;
  logic [2:0] ext_w;

  cnc_sense_amp #(.COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] r;
    for (int i = 0; i < COLS / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  task automatic check(input string what, input logic [COLS-1:0] exp);
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, dout[63:0], exp[63:0]);
    end
  endtask

  task automatic idle();
    load = 0; shift_en = 0; ext_en = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COLS-1:0] a, b, exp;
    rst_n = 0; idle(); op = SA_AND; shift_right = 0; ext_col = 0; ext_w = 0;
    bl_and = 0; blb_nor = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("reset", '0);
    for (int i = 0; i < 40; i++) begin
      a = rnd(); b = rnd();
      bl_and = a & b; blb_nor = ~(a | b);
      op = sa_op_e'(i % 4);
      load = 1;
      @(negedge clk);
      idle();
      case (i % 4)
        0: exp = a & b;
        1: exp = a | b;
        2: exp = a ^ b;
        default: exp = ~(a | b);
      endcase
      check($sformatf("op%0d", i % 4), exp);
      // one shift step in a random direction
      shift_right = i[0];
      exp = shift_right ? exp >> 1 : exp << 1;
      shift_en = 1;
      @(negedge clk);
      idle();
      check("shift", exp);
      // bit extension
      ext_w = 3'($urandom_range(7));
      ext_col = 8'($urandom_range(255));
      begin
        int w, col;
        logic [COLS-1:0] src;
        src = exp;
        w = (ext_w == 0) ? 16 : (ext_w == 1) ? 25 : (ext_w == 2) ? 32 : (ext_w == 3) ? 64 :
            (ext_w == 4) ? 128 : (ext_w == 5) ? 256 : (ext_w == 6) ? 512 : 8;
        col = ext_col % w;
        for (int blk = 0; (blk + 1) * w <= COLS; blk++)
          for (int c = 0; c < w; c++) exp[blk*w + c] = src[blk*w + col];
      end
      ext_en = 1;
      @(negedge clk);
      idle();
      check($sformatf("ext w%0d", ext_w), exp);
      // nothing asserted: FF holds
      @(negedge clk);
      check("hold", exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
