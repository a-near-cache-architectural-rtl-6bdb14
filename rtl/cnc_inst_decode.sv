// cnc_inst_decode: CTRL-module extension that recognises the CNC instructions.
//
// All four instructions use the RISC-V S-type layout with the custom opcode
// 0101011: imm[11:5] in bits [31:25], rs2 (SW_CNC), zero (RD_D2CNC, LD_CMD) or
// alg[4:0] (ALG_CNC) in [24:20], rs1 in [19:15], funct3 in [14:12] (010
// SW_CNC, 011 RD_D2CNC, 100 LD_CMD, 101 ALG_CNC), imm[4:0] in [11:7]. The
// decoder gives the CNC signal sent with the request (for ALG_CNC the family
// of the 5-bit algorithm code), the register numbers and the sign-extended
// immediate. Combinational.
//
// The encodings are the paper's; the numbering of algorithm variants and the
// 3-bit CNC signal codes are this design's.
module cnc_inst_decode
  import cnc_pkg::*;
(
  input  logic [31:0]     instr,
  output logic            is_cnc,
  output nc_e             nc,
  output logic [4:0]      rs1,
  output logic [4:0]      rs2,
  output logic            uses_rs2,
  output logic [4:0]      alg,
  output logic [XLEN-1:0] imm
);

  logic [2:0] f3;
  assign f3  = instr[14:12];
  assign rs1 = instr[19:15];
  assign rs2 = instr[24:20];
  assign alg = instr[24:20];
  assign imm = {{(XLEN-12){instr[31]}}, instr[31:25], instr[11:7]};

  always_comb begin
    is_cnc   = 1'b0;
    nc       = NC_SW_CNC;
    uses_rs2 = 1'b0;
    if (instr[6:0] == OPC_CNC) begin
      unique case (f3)
        F3_SW_CNC:   begin is_cnc = 1'b1; nc = NC_SW_CNC; uses_rs2 = 1'b1; end
        F3_RD_D2CNC: begin is_cnc = instr[24:20] == 5'd0; nc = NC_RD_D2CNC; end
        F3_LD_CMD:   begin is_cnc = instr[24:20] == 5'd0; nc = NC_LD_CMD; end
        F3_ALG_CNC:  begin is_cnc = instr[24:20] <= ALG_DILITHIUM5; nc = alg_family(instr[24:20]); end
        default: ;
      endcase
    end
  end

endmodule
