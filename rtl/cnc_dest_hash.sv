// cnc_dest_hash: destination hash that picks the home cache slice of an address.
//
// The physical address of a CNC request (and of the SW_CNC write data that
// follows it) is hashed into a slice number so that the request reaches the
// cache slice - and so the CNC unit - that owns the block. The hash is an
// XOR fold of all block-address bits above the 64-byte offset into
// log2(NUM_SLICES) bits, so consecutive blocks spread over the slices and
// every byte of a block goes to the same slice. Combinational.
//
// The existence and place of the hash follow the paper; the hash function is
// this design's choice (the paper does not give one).
module cnc_dest_hash
  import cnc_pkg::*;
#(
  parameter int unsigned NUM_SLICES = 4,
  parameter int unsigned SW = (NUM_SLICES > 1) ? $clog2(NUM_SLICES) : 1
) (
  input  logic [PA_W-1:0] p_addr,
  output logic [SW-1:0]   slice
);

  logic [SW-1:0] h;
  always_comb begin
    h = '0;
    if (NUM_SLICES > 1) begin
      for (int i = 6; i + int'(SW) <= int'(PA_W); i += int'(SW))
        h ^= p_addr[i +: SW];
    end
    slice = h;
  end

endmodule
