// tb_cnc_inst_decode: self-checking test of the CNC instruction decoder.
//
// Builds every funct3 of the CNC opcode plus random other instructions, with
// random register, immediate and algorithm fields, and compares the decoder
// outputs with a reference written from the instruction table: S-type
// immediate, rs2 used only by SW_CNC, bits [24:20] zero for RD_D2CNC and
// LD_CMD, algorithm code 0..10 for ALG_CNC, anything else not a CNC
// instruction. Purely combinational, so no cycle counts are checked.
module tb_cnc_inst_decode;
  import cnc_pkg::*;

  logic [31:0] instr;
  logic        is_cnc, uses_rs2;
  nc_e         nc;
  logic [4:0]  rs1, rs2, alg;
  logic [31:0] imm;

  cnc_inst_decode dut (.*);

  int checks = 0, failures = 0;
  int seen [8];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] enc(logic [2:0] f3, logic [4:0] b2420, logic [4:0] r1, logic [11:0] im);
    return {im[11:5], b2420, r1, f3, im[4:0], 7'b0101011};
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [2:0]  f3;
      logic [4:0]  b, r1;
      logic [11:0] im;
      bit exp_cnc, exp_rs2;
      nc_e exp_nc;
      f3 = 3'($urandom);
      b  = (i % 3 == 0) ? 5'd0 : 5'($urandom % 16);
      r1 = 5'($urandom);
      im = 12'($urandom);
      instr = enc(f3, b, r1, im);
      if (i % 5 == 0) instr[6:0] = 7'($urandom);   // often another opcode
      exp_cnc = 0; exp_rs2 = 0; exp_nc = NC_SW_CNC;
      if (instr[6:0] == 7'b0101011) begin
        case (f3)
          3'b010: begin exp_cnc = 1; exp_rs2 = 1; exp_nc = NC_SW_CNC; end
          3'b011: begin exp_cnc = (b == 0); exp_nc = NC_RD_D2CNC; end
          3'b100: begin exp_cnc = (b == 0); exp_nc = NC_LD_CMD; end
          3'b101: begin
            exp_cnc = (b <= 10);
            exp_nc = (b <= 1) ? NC_AES : (b == 2) ? NC_KECCAK : (b <= 4) ? NC_NTT :
                     (b <= 7) ? NC_KYBER : NC_DILITHIUM;
          end
          default: ;
        endcase
      end
      #1;
      checks++;
      if (is_cnc !== exp_cnc || (exp_cnc && (nc !== exp_nc || uses_rs2 !== exp_rs2 ||
          rs1 !== r1 || imm !== {{20{im[11]}}, im} || (f3 == 3'b101 && alg !== b) ||
          (f3 == 3'b010 && rs2 !== b)))) begin
        failures++;
        $display("FAIL instr %h: is_cnc %0d nc %0d imm %h (expected %0d %0d %h)",
                 instr, is_cnc, nc, imm, exp_cnc, exp_nc, {{20{im[11]}}, im});
      end
      if (exp_cnc) seen[exp_nc]++;
    end
    foreach (seen[k]) begin
      checks++;
      if (k != 2 && seen[k] == 0) begin failures++; $display("FAIL signal %0d never decoded", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
