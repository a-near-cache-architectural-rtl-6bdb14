// l2_slice_model: behavioural model of the data-array side of one LLC slice.
//
// Not synthesizable design: it stands in for the cache slice (tag, state,
// directory, MSHR, data array) that the CNC unit is attached to, seen
// through the CNC data-array port. Storage is 2**IDXW blocks of 512 bits,
// indexed by address bits [6 +: IDXW]; a `present` bit per block plays the
// tag. A request (csb low) is answered one cycle later: `miss` is set if the
// block is not present, otherwise a read returns the block on `rdata` and a
// write (web low) stores `wdata`. A miss is resolved MISS_LAT cycles later
// with a one-cycle `miss_rsp` pulse (the MSHR's notice), after which the
// block is present. Counters record reads, writes and misses.
module l2_slice_model #(
  parameter int unsigned IDXW     = 8,
  parameter int unsigned MISS_LAT = 6
) (
  input  logic         clk,
  input  logic         csb,
  input  logic         web,
  input  logic         oeb,
  input  logic [31:0]  addr,
  output logic [511:0] rdata,
  output logic         miss,
  output logic         miss_rsp,
  input  logic [511:0] wdata
);
  logic [511:0] mem     [2**IDXW];
  logic         present [2**IDXW];
  int reads = 0, writes = 0, misses = 0;
  int pend = 0;
  logic [IDXW-1:0] pend_idx;

  initial begin
    for (int i = 0; i < 2**IDXW; i++) begin
      mem[i] = '0;
      present[i] = 1'b0;
    end
    rdata = '0; miss = 0; miss_rsp = 0; pend_idx = '0;
  end

  always @(posedge clk) begin
    logic [IDXW-1:0] idx;
    idx = addr[6 +: IDXW];
    miss_rsp <= 1'b0;
    miss     <= 1'b0;
    if (pend > 0) begin
      pend = pend - 1;
      if (pend == 0) begin
        present[pend_idx] = 1'b1;
        miss_rsp <= 1'b1;
      end
    end
    if (!csb) begin
      if (!present[idx]) begin
        miss <= 1'b1;
        misses++;
        if (pend == 0) begin
          pend = MISS_LAT;
          pend_idx = idx;
        end
      end else if (!web) begin
        mem[idx] = wdata;
        writes++;
      end else if (!oeb) begin
        rdata <= mem[idx];
        reads++;
      end
    end
  end
endmodule
