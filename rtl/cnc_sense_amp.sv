// cnc_sense_amp: the sense-amplifier peripheral row of a CNC array.
//
// One slice of this logic sits under every bitline pair. The BL sense
// amplifier gives the AND of the active cells and the BLB one their NOR; a NOT
// gate turns the NOR into OR, and a NOR gate of AND and NOR gives XOR. A first
// 4:1 MUX (`op`) picks AND, OR, XOR or NOR. A second 4:1 MUX picks what the
// column flip-flop loads: the op MUX output, the left neighbour D[n-1], the
// right neighbour D[n+1], or (this design's addition) the bit-extension value.
// The flip-flop output D_out drives the data bus and the write-back path.
//
// Controls, all applied at a clock edge:
//   load      FF <= op MUX(bl_and, blb_nor)
//   shift_en  FF <= FF shifted by one column; shift_right=0 moves bit n to
//             n+1 (takes D[n-1]), shift_right=1 moves bit n+1 to n; zero fill
//   ext_en    in every computing block of ext_w columns, copy FF[base+ext_col]
//             over the whole block (hardware-supported bit extension, used for
//             sign propagation); columns after the last whole block are kept
// Exactly one control is expected per cycle (checked by an assertion).
//
// The gate set, the two MUXes and the neighbour shift follow the paper's
// sense-amplifier figure; the MUX encodings, the shift direction and fill, and
// placing bit extension in the same FF row are this design's choices.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET). The registers use it as an asynchronous
// reset; the only other use is the `disable iff (!rst_n)` of the assertions
// at the end, which is simulation-only and adds no logic.
module cnc_sense_amp
  import cnc_pkg::*;
#(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [COLS-1:0] bl_and,
  input  logic [COLS-1:0] blb_nor,
  input  logic            load,
  input  sa_op_e          op,
  input  logic            shift_en,
  input  logic            shift_right,
  input  logic            ext_en,
  input  logic [7:0]      ext_col,
  input  logic [2:0]      ext_w,
  output logic [COLS-1:0] dout
);

  logic [COLS-1:0] or_v, xor_v, op_v, ext_v, nxt;

  assign or_v  = ~blb_nor;                 // NOT gate
  assign xor_v = ~(bl_and | blb_nor);      // NOR gate

  always_comb begin
    unique case (op)
      SA_AND:  op_v = bl_and;
      SA_OR:   op_v = or_v;
      SA_XOR:  op_v = xor_v;
      default: op_v = blb_nor;
    endcase
  end

  // Bit extension: broadcast one column of each computing block. One
  // candidate row per width code; inside each block a single w:1 MUX picks
  // the source bit, which then drives every column of the block.
  logic [COLS-1:0] ext_c [8];
  for (genvar code = 0; code < 8; code++) begin : g_ext
    localparam int unsigned W    = cb_width(3'(code));
    localparam int unsigned NBLK = COLS / W;
    logic [7:0] col_in;
    assign col_in = 8'(32'(ext_col) % W);
    always_comb begin
      ext_c[code] = dout;
      for (int unsigned b = 0; b < NBLK; b++)
        ext_c[code][b*W +: W] = {W{dout[b*W + 32'(col_in)]}};
    end
  end
  assign ext_v = ext_c[ext_w];

  always_comb begin
    if (load)            nxt = op_v;
    else if (shift_en)   nxt = shift_right ? (dout >> 1) : (dout << 1);
    else if (ext_en)     nxt = ext_v;
    else                 nxt = dout;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else        dout <= nxt;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({load, shift_en, ext_en}))
    else $error("cnc_sense_amp: more than one control in a cycle");

endmodule
