// tb_cnc_cmd_array: self-checking test of the command array.
//
// Writes random 512-bit blocks into random rows, keeps its own copy, then
// reads random command indices and checks each 16-bit command one cycle
// later against row i/32, slot i%32.
module tb_cnc_cmd_array;
  localparam int ROWS = 256, COLS = 512;

  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [7:0] wrow;
  logic [COLS-1:0] wdata;
  logic [12:0] raddr;
  logic [15:0] rcmd;

  cnc_cmd_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  logic [COLS-1:0] ref_mem [ROWS];
  logic            written [ROWS];
  int checks = 0, failures = 0;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; wrow = 0; wdata = 0; raddr = 0;
    for (int r = 0; r < ROWS; r++) written[r] = 0;
    for (int i = 0; i < 300; i++) begin
      int r;
      r = $urandom_range(ROWS-1);
      @(negedge clk);
      we = 1; wrow = 8'(r);
      for (int k = 0; k < COLS / 32; k++) wdata[k*32 +: 32] = $urandom;
      ref_mem[r] = wdata; written[r] = 1;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 500; i++) begin
      int idx;
      do idx = $urandom_range(ROWS*32-1); while (!written[idx/32]);
      @(negedge clk);
      re = 1; raddr = 13'(idx);
      @(negedge clk);
      re = 0;
      checks++;
      if (rcmd !== ref_mem[idx/32][(idx%32)*16 +: 16]) begin
        failures++;
        $display("FAIL cmd %0d: got %h", idx, rcmd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
