// cnc_array: the compute-enabled SRAM array of one CNC unit.
//
// ROWS x COLS bitcells (256 x 512 by default, 16 kB) with two row decoders.
// Decoder A always drives wordline `ra`; when `act2` is set decoder B also
// drives wordline `rb`, so both rows discharge the same bitlines. The bitline
// BL then senses the AND of the two cells and BLB senses their NOR, which is
// what the peripheral turns into AND/OR/XOR/NOR. With a single wordline BL is
// the stored row and BLB its complement.
//
// Interface and timing: wordline addresses are registered, `bl_and`/`blb_nor`
// appear one cycle after the request (synchronous SRAM read). Writes take a
// full row with a per-32-bit-word enable (`wmask`) so a single register word
// can be stored. A read of a row written in the same cycle returns the new
// data.
//
// The size and the dual-decoder, dual-wordline structure follow the paper;
// the one-cycle read, the word mask and the same-cycle write bypass are this
// design's choices. The array is modelled as a memory, not as an SRAM macro.
module cnc_array #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 512,
  parameter int unsigned WORDS = COLS / 32,
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic             act2,
  input  logic [AW-1:0]    ra,
  input  logic [AW-1:0]    rb,
  input  logic             we,
  input  logic [AW-1:0]    wa,
  input  logic [WORDS-1:0] wmask,
  input  logic [COLS-1:0]  wdata,
  output logic [COLS-1:0]  bl_and,
  output logic [COLS-1:0]  blb_nor
);

  logic [COLS-1:0] mem [ROWS];

  logic [COLS-1:0] qa, qb;
  logic            act2_q;

  // full-row view of the write for the same-cycle bypass
  logic [COLS-1:0] wbits;
  always_comb begin
    for (int w = 0; w < int'(WORDS); w++)
      wbits[w*32 +: 32] = {32{wmask[w]}};
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int w = 0; w < int'(WORDS); w++)
        if (wmask[w]) mem[wa][w*32 +: 32] <= wdata[w*32 +: 32];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      qa     <= (we && wa == ra) ? ((mem[ra] & ~wbits) | (wdata & wbits)) : mem[ra];
      qb     <= (we && wa == rb) ? ((mem[rb] & ~wbits) | (wdata & wbits)) : mem[rb];
      act2_q <= act2;
    end
  end

  // Bitline sensing of one or two active cells per column.
  always_comb begin
    if (act2_q) begin
      bl_and  = qa & qb;
      blb_nor = ~(qa | qb);
    end else begin
      bl_and  = qa;
      blb_nor = ~qa;
    end
  end

endmodule
