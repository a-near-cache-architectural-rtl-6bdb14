// tb_cnc_cmd_decoder: self-checking test of the 16-bit command decoder.
//
// Walks all 65536 command words and compares the decoder with an independent
// classification written from the command table (opcode plus the fixed ctrl
// bits), including the fields each format carries.
module tb_cnc_cmd_decoder;
  import cnc_pkg::*;

  logic [15:0] cmd;
  cmd_dec_t    dec;

  cnc_cmd_decoder dut (.cmd, .dec);

  int checks = 0, failures = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      cmd_kind_e k;
      logic [3:0] o, c;
      bit ok;
      cmd = 16'(v);
      #1;
      o = cmd[15:12]; c = cmd[3:0];
      k = K_NOP;
      if (o == 4'b0001 && c == 4'b1000) k = K_RD_ROW;
      if (o == 4'b0010 && c[2:0] == 3'b000) k = K_WR_ROW;
      if (o == 4'b0011 && c[3] == 1 && c[0] == 0) k = K_SHIFT;
      if (o == 4'b1011 && c == 4'b0001) k = K_ACT_ROW;
      if (o == 4'b1001 && c[3] == 0 && c[0] == 0) k = K_LOGIC_OP;
      if (o == 4'b1111 && c[0] == 0) k = K_EXT_BIT;
      ok = dec.kind == k && dec.illegal == (k == K_NOP) && dec.addr == cmd[11:4];
      if (k == K_LOGIC_OP) ok &= dec.op == sa_op_e'(c[2:1]);
      if (k == K_RD_ROW)   ok &= dec.op == SA_AND;
      if (k == K_SHIFT)    ok &= dec.right == c[1];
      if (k == K_EXT_BIT)  ok &= dec.width == c[3:1];
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL cmd %h: kind %0d exp %0d", cmd, dec.kind, k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
