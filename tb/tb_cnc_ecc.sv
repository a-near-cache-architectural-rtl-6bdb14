// tb_cnc_ecc: self-checking test of the CNC array's ECC unit.
//
// Drives a CNC array and the ECC unit from the same random stream of
// operations: row writes under random word masks (some in the same cycle as
// a read of that row), single-wordline reads and two-wordline logic reads.
// Between operations it flips random bits directly in the array's storage,
// playing soft errors. A reference keeps, per row word, whether it has been
// written since reset and whether an odd number of its bits are flipped; a
// new write clears the flip state.
//
// Checked every read, in the cycle the bitlines are valid (one cycle after
// the read request): `err_word` equals the expected mask. For one wordline
// that is the written words with an odd flip count. For two wordlines it is
// the words written in both rows whose flip counts add up odd, since the
// unit checks the XOR of the operands against their stored check bits.
// Also checked: errors do occur, clean reads occur, and the unit stays quiet
// without reads.
module tb_cnc_ecc;

  localparam int ROWS = 256, COLS = 512, WORDS = 16;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic             rd_en, act2, we;
  logic [7:0]       ra, rb, wa;
  logic [WORDS-1:0] wmask;
  logic [COLS-1:0]  wdata, bl_and, blb_nor;
  logic             err;
  logic [WORDS-1:0] err_word;

  cnc_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rd_en, .act2, .ra, .rb, .we, .wa, .wmask, .wdata, .bl_and, .blb_nor
  );
  cnc_ecc #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .rd_en, .act2, .ra, .rb, .we, .wa, .wmask, .wdata,
    .bl_and, .blb_nor, .err, .err_word
  );

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [WORDS-1:0] written [ROWS];
  logic [WORDS-1:0] flipped [ROWS];   // odd number of flipped bits in the word

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_err = 0, n_clean = 0;
    logic [WORDS-1:0] exp;
    rst_n = 0; rd_en = 0; act2 = 0; we = 0; ra = 0; rb = 0; wa = 0; wmask = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++) begin written[r] = '0; flipped[r] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // rows never written are not checked, whatever their contents
    for (int r = 0; r < 4; r++) u_array.mem[r] = rnd_row();
    rd_en = 1; ra = 1; act2 = 0;
    @(negedge clk); rd_en = 0;
    check("unwritten row not checked", !err);
    @(negedge clk);
    check("quiet without reads", !err);

    for (int it = 0; it < 6000; it++) begin
      int kind;
      kind = $urandom % 10;
      rd_en = 0; we = 0; act2 = 0;
      ra = 8'($urandom % 24); rb = 8'($urandom % 24);
      // write part (alone, or in the same cycle as the read)
      if (kind < 4 || kind == 9) begin
        we = 1; wa = (kind == 9) ? ra : 8'($urandom % 24);
        wmask = ($urandom % 3 == 0) ? '1 : WORDS'($urandom);
        wdata = rnd_row();
      end
      if (kind >= 4) begin
        rd_en = 1; act2 = (kind >= 7);
      end
      // expected result of the read, seeing the write of this same cycle
      begin
        logic [WORDS-1:0] va, vb, fa, fb;
        va = written[ra]; fa = flipped[ra]; vb = written[rb]; fb = flipped[rb];
        if (we && wa == ra) begin va |= wmask; fa &= ~wmask; end
        if (we && wa == rb) begin vb |= wmask; fb &= ~wmask; end
        exp = act2 ? (va & vb & (fa ^ fb)) : (va & fa);
      end
      if (we) begin written[wa] |= wmask; flipped[wa] &= ~wmask; end
      @(negedge clk);
      if (rd_en) begin
        check($sformatf("read %0d/%0d act2=%0d: err_word %h, expected %h", ra, rb, act2, err_word, exp),
              err_word == exp && err == (exp != 0));
        if (exp != 0) n_err++; else n_clean++;
      end else begin
        check("no flag without a read", !err);
      end
      // soft error: flip a bit of a random row now and then
      if ($urandom % 4 == 0) begin
        int r, b;
        r = $urandom % 24; b = $urandom % COLS;
        u_array.mem[r][b] = ~u_array.mem[r][b];
        flipped[r][b / 32] = ~flipped[r][b / 32];
      end
    end
    rd_en = 0; we = 0;
    $display("reads with a detected error: %0d, clean reads: %0d", n_err, n_clean);
    check("errors were detected", n_err > 100);
    check("clean reads occurred", n_clean > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
