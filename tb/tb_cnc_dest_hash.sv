// tb_cnc_dest_hash: self-checking test of the destination hash.
//
// For random addresses checks the slice against a reference XOR fold of the
// block-address bits, that all 64 bytes of a block map to the same slice, and
// that a run of consecutive blocks is spread evenly over the slices (each of
// the four slices gets exactly a quarter of any aligned run of four blocks
// when the upper bits are fixed). Combinational, no cycle counts.
module tb_cnc_dest_hash;
  import cnc_pkg::*;

  logic [31:0] p_addr;
  logic [1:0]  slice;

  cnc_dest_hash #(.NUM_SLICES(4)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] ref_hash(logic [31:0] a);
    logic [1:0] h = 0;
    for (int i = 6; i < 32; i += 2) h ^= a[i +: 2];
    return h;
  endfunction

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] a;
      logic [1:0]  s0;
      int cnt [4];
      a = $urandom;
      p_addr = a; #1;
      check($sformatf("hash of %h", a), slice == ref_hash(a));
      p_addr = {a[31:6], 6'd0}; #1; s0 = slice;
      p_addr = {a[31:6], 6'($urandom)}; #1;
      check("same block same slice", slice == s0);
      cnt = '{0, 0, 0, 0};
      for (int b = 0; b < 4; b++) begin
        p_addr = {a[31:8], 2'(b), 6'd0}; #1;
        cnt[slice]++;
      end
      check("four blocks on four slices", cnt[0] == 1 && cnt[1] == 1 && cnt[2] == 1 && cnt[3] == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
