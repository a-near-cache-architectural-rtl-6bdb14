// cnc_ecc: integrity check for the CNC array's stored rows and logic results.
//
// Keeps one check bit (even parity) per 32-bit word of every CNC array row,
// next to the array. Every write into the array (a register word from SW_CNC,
// a block from RD_D2CNC, or a sense-amplifier result after a logic op, shift
// or bit extension) stores the parity of the words it writes, so results are
// protected from the moment they are written back. Every read is checked:
//  - one wordline: each word read out must match its stored parity;
//  - two wordlines (a logic op): the XOR of the two operands, recovered from
//    the bitlines as ~(BL | BLB), must have parity equal to the XOR of the
//    two operands' stored parities. Parity is linear in XOR, so the result's
//    check bits are computed and compared with those of the operands; all
//    four operations come from the same pair of bitlines.
// A word is only checked once it has been written since reset (a valid bit
// per word), since the array contents are not initialised.
//
// Interface and timing: the inputs mirror the array's read and write ports.
// `err` rises in the cycle the array's bitline outputs are valid (one cycle
// after `rd_en`) when any checked word mismatches, and `err_word` is a mask of
// the failing words. A write to the row being read in the same cycle is seen,
// as in the array.
//
// The paper describes the function only: "ECC detection can check the
// integrity of the results by calculating the ECC of the logic result and
// comparing it with the corresponding ECCs of the operands" and "the ECC logic
// unit generates and stores the ECC of the shifted result". The code (one
// parity bit per 32-bit word, detecting single-bit errors), its width and
// placement, and reporting through a flag instead of correcting are this
// design's choices.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET) at the top level; here it is only an
// asynchronous reset of the valid bits.
module cnc_ecc #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 512,
  parameter int unsigned WORDS = COLS / 32,
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_en,
  input  logic             act2,
  input  logic [AW-1:0]    ra,
  input  logic [AW-1:0]    rb,
  input  logic             we,
  input  logic [AW-1:0]    wa,
  input  logic [WORDS-1:0] wmask,
  input  logic [COLS-1:0]  wdata,
  input  logic [COLS-1:0]  bl_and,
  input  logic [COLS-1:0]  blb_nor,
  output logic             err,
  output logic [WORDS-1:0] err_word
);

  logic [WORDS-1:0] par [ROWS];     // stored check bits
  logic [WORDS-1:0] vld [ROWS];     // word written since reset

  logic [WORDS-1:0] wpar;           // parity of the words being written
  always_comb begin
    for (int w = 0; w < int'(WORDS); w++) wpar[w] = ^wdata[w*32 +: 32];
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int w = 0; w < int'(WORDS); w++)
        if (wmask[w]) par[wa][w] <= wpar[w];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(ROWS); r++) vld[r] <= '0;
    end else if (we) begin
      vld[wa] <= vld[wa] | wmask;
    end
  end

  // expected check bits of a row as the array will return it (write bypass)
  function automatic logic [WORDS-1:0] merge(logic [WORDS-1:0] old_v, logic [WORDS-1:0] new_v,
                                             logic hit);
    return hit ? ((old_v & ~wmask) | (new_v & wmask)) : old_v;
  endfunction

  logic             chk_q, act2_q;
  logic [WORDS-1:0] exp_q, mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chk_q  <= 1'b0;
      act2_q <= 1'b0;
      exp_q  <= '0;
      mask_q <= '0;
    end else begin
      chk_q <= rd_en;
      if (rd_en) begin
        act2_q <= act2;
        if (act2) begin
          exp_q  <= merge(par[ra], wpar, we && wa == ra) ^ merge(par[rb], wpar, we && wa == rb);
          mask_q <= merge(vld[ra], '1, we && wa == ra) & merge(vld[rb], '1, we && wa == rb);
        end else begin
          exp_q  <= merge(par[ra], wpar, we && wa == ra);
          mask_q <= merge(vld[ra], '1, we && wa == ra);
        end
      end
    end
  end

  // data whose parity is checked: the row itself, or the XOR of two rows
  logic [COLS-1:0] seen;
  assign seen = act2_q ? ~(bl_and | blb_nor) : bl_and;

  always_comb begin
    for (int w = 0; w < int'(WORDS); w++)
      err_word[w] = chk_q && mask_q[w] && ((^seen[w*32 +: 32]) != exp_q[w]);
  end
  assign err = |err_word;

endmodule
