// tb_cnc_array: self-checking test of the compute-enabled SRAM array.
//
// Keeps its own copy of the array contents, writes random rows under random
// word masks, then reads single rows (BL must equal the row, BLB its
// complement) and row pairs with both wordlines open (BL = AND, BLB = NOR),
// each result checked one cycle after the request. Also checks a read of a
// row written in the same cycle. Runs at the full 256 x 512 size.
module tb_cnc_array;
  localparam int ROWS = 256, COLS = 512, WORDS = COLS / 32;

  logic clk = 0;
  always #5 clk = ~clk;

  logic             rd_en, act2, we;
  logic [7:0]       ra, rb, wa;
  logic [WORDS-1:0] wmask;
  logic [COLS-1:0]  wdata, bl_and, blb_nor;

  cnc_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] r;
    for (int i = 0; i < COLS / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  task automatic write_row(input int row, input logic [WORDS-1:0] m, input logic [COLS-1:0] d);
    @(negedge clk);
    we = 1; wa = 8'(row); wmask = m; wdata = d; rd_en = 0;
    @(negedge clk);
    we = 0;
    for (int w = 0; w < WORDS; w++) if (m[w]) ref_mem[row][w*32 +: 32] = d[w*32 +: 32];
  endtask

  task automatic check(input string what, input logic [COLS-1:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got[63:0], exp[63:0]);
    end
  endtask

  task automatic read2(input int a, input int b, input logic two);
    @(negedge clk);
    rd_en = 1; act2 = two; ra = 8'(a); rb = 8'(b); we = 0;
    @(negedge clk);
    rd_en = 0;
    if (two) begin
      check("and", bl_and, ref_mem[a] & ref_mem[b]);
      check("nor", blb_nor, ~(ref_mem[a] | ref_mem[b]));
    end else begin
      check("read", bl_and, ref_mem[a]);
      check("readb", blb_nor, ~ref_mem[a]);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; act2 = 0; we = 0; ra = 0; rb = 0; wa = 0; wmask = 0; wdata = 0;
    // fill every row
    for (int r = 0; r < ROWS; r++) write_row(r, '1, rnd_row());
    // partial word writes
    for (int i = 0; i < 64; i++) write_row($urandom_range(ROWS-1), WORDS'($urandom), rnd_row());
    for (int i = 0; i < 64; i++) read2($urandom_range(ROWS-1), 0, 0);
    for (int i = 0; i < 128; i++) read2($urandom_range(ROWS-1), $urandom_range(ROWS-1), 1);
    // same-cycle write and read of one row
    begin
      logic [COLS-1:0] d;
      d = rnd_row();
      @(negedge clk);
      we = 1; wa = 8'd77; wmask = 16'h00FF; wdata = d; rd_en = 1; act2 = 0; ra = 8'd77;
      for (int w = 0; w < 8; w++) ref_mem[77][w*32 +: 32] = d[w*32 +: 32];
      @(negedge clk);
      we = 0; rd_en = 0;
      check("bypass", bl_and, ref_mem[77]);
    end
    // rd_en low holds the last output
    begin
      logic [COLS-1:0] held;
      held = bl_and;
      write_row(5, '1, rnd_row());
      check("hold", bl_and, held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
