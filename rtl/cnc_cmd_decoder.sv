// cnc_cmd_decoder: decoder of the 16-bit CNC command.
//
// A command is {op[15:12], addr[11:4], ctrl[3:0]}. Six formats exist:
//   rd_row   0001 src  1000   FF <= row src
//   wr_row   0010 dst  x000   row dst <= FF
//   shift    0011 num  1xx0   shift FF by num columns, one per cycle
//   act_row  1011 src1 0001   open the first wordline for a logic op
//   logic_op 1001 src2 0xx0   open src2 with src1, FF <= op(src1, src2)
//   ext_bit  1111 col  xxx0   broadcast column col over each computing block
// The opcodes and fixed ctrl bits are those of the paper's command table. The
// meaning given to the free ctrl bits (x) is this design's: logic_op
// ctrl[2:1] selects AND/OR/XOR/NOR, shift ctrl[1] is the direction (1 = right),
// ext_bit ctrl[3:1] is the block-width code. A command that fits no format is
// flagged `illegal` and executes as a no-op. Purely combinational.
module cnc_cmd_decoder
  import cnc_pkg::*;
(
  input  logic [CMD_W-1:0] cmd,
  output cmd_dec_t         dec
);

  logic [3:0] op, ctrl;
  assign op   = cmd[15:12];
  assign ctrl = cmd[3:0];

  always_comb begin
    dec         = '0;
    dec.kind    = K_NOP;
    dec.addr    = cmd[11:4];
    dec.op      = SA_AND;
    dec.right   = 1'b0;
    dec.width   = 3'd0;
    dec.illegal = 1'b0;
    unique case (op)
      CMD_RD_ROW: begin
        if (ctrl == 4'b1000) dec.kind = K_RD_ROW;
        else                 dec.illegal = 1'b1;
      end
      CMD_WR_ROW: begin
        if (ctrl[2:0] == 3'b000) dec.kind = K_WR_ROW;
        else                     dec.illegal = 1'b1;
      end
      CMD_SHIFT: begin
        if (ctrl[3] && !ctrl[0]) begin
          dec.kind  = K_SHIFT;
          dec.right = ctrl[1];
        end else dec.illegal = 1'b1;
      end
      CMD_ACT_ROW: begin
        if (ctrl == 4'b0001) dec.kind = K_ACT_ROW;
        else                 dec.illegal = 1'b1;
      end
      CMD_LOGIC_OP: begin
        if (!ctrl[3] && !ctrl[0]) begin
          dec.kind = K_LOGIC_OP;
          dec.op   = sa_op_e'(ctrl[2:1]);
        end else dec.illegal = 1'b1;
      end
      CMD_EXT_BIT: begin
        if (!ctrl[0]) begin
          dec.kind  = K_EXT_BIT;
          dec.width = ctrl[3:1];
        end else dec.illegal = 1'b1;
      end
      default: dec.illegal = 1'b1;
    endcase
  end

endmodule
