// cnc_noc: interconnect between the cores' CNC paths and the cache slices.
//
// A crossbar: every core's request goes to the slice named in its `dest`
// field (set by the core's destination hash) and every slice's response goes
// back to the core named in its `core` field. Where several sources want the
// same destination in one cycle a round-robin arbiter per destination picks
// one; the pointer moves past the winner when the transfer happens, so no
// source waits more than N-1 transfers. Valid/ready handshakes on all four
// sides; arbitration is combinational, only the round-robin pointers are
// registered, so a transfer takes no extra cycle.
//
// The paper routes the request packets through the routers of the cache
// system's network; its topology is not given, so this single-hop crossbar
// and its arbitration are this design's stand-in.
module cnc_noc
  import cnc_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 4,
  parameter int unsigned NUM_SLICES = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  cnc_req_t  core_req   [NUM_CORES],
  output logic      core_ready [NUM_CORES],
  output cnc_req_t  slice_req  [NUM_SLICES],
  input  logic      slice_ready[NUM_SLICES],
  input  cnc_resp_t slice_resp [NUM_SLICES],
  output logic      slice_resp_ready [NUM_SLICES],
  output cnc_resp_t core_resp  [NUM_CORES],
  input  logic      core_resp_ready [NUM_CORES]
);

  localparam int unsigned CW = (NUM_CORES  > 1) ? $clog2(NUM_CORES)  : 1;
  localparam int unsigned SW = (NUM_SLICES > 1) ? $clog2(NUM_SLICES) : 1;

  logic [CW-1:0] rr_req [NUM_SLICES];   // next core to favour, per slice
  logic [SW-1:0] rr_rsp [NUM_CORES];    // next slice to favour, per core
  logic [CW-1:0] g_req  [NUM_SLICES];
  logic          gv_req [NUM_SLICES];
  logic [SW-1:0] g_rsp  [NUM_CORES];
  logic          gv_rsp [NUM_CORES];
  logic [CW-1:0] cand_c;
  logic [SW-1:0] cand_s;

  // request side
  always_comb begin
    for (int s = 0; s < int'(NUM_SLICES); s++) begin
      gv_req[s] = 1'b0;
      g_req[s]  = '0;
      for (int k = 0; k < int'(NUM_CORES); k++) begin
        cand_c = CW'((32'(rr_req[s]) + 32'(k)) % NUM_CORES);
        if (!gv_req[s] && core_req[cand_c].valid && 32'(core_req[cand_c].dest) == 32'(s)) begin
          gv_req[s] = 1'b1;
          g_req[s]  = cand_c;
        end
      end
      slice_req[s]       = gv_req[s] ? core_req[g_req[s]] : '0;
      slice_req[s].valid = gv_req[s];
    end
    for (int c = 0; c < int'(NUM_CORES); c++) begin
      core_ready[c] = 1'b0;
      for (int s = 0; s < int'(NUM_SLICES); s++)
        if (gv_req[s] && 32'(g_req[s]) == 32'(c) && slice_ready[s]) core_ready[c] = 1'b1;
    end
  end

  // response side
  always_comb begin
    for (int c = 0; c < int'(NUM_CORES); c++) begin
      gv_rsp[c] = 1'b0;
      g_rsp[c]  = '0;
      for (int k = 0; k < int'(NUM_SLICES); k++) begin
        cand_s = SW'((32'(rr_rsp[c]) + 32'(k)) % NUM_SLICES);
        if (!gv_rsp[c] && slice_resp[cand_s].valid && 32'(slice_resp[cand_s].core) == 32'(c)) begin
          gv_rsp[c] = 1'b1;
          g_rsp[c]  = cand_s;
        end
      end
      core_resp[c]       = gv_rsp[c] ? slice_resp[g_rsp[c]] : '0;
      core_resp[c].valid = gv_rsp[c];
    end
    for (int s = 0; s < int'(NUM_SLICES); s++) begin
      slice_resp_ready[s] = 1'b0;
      for (int c = 0; c < int'(NUM_CORES); c++)
        if (gv_rsp[c] && 32'(g_rsp[c]) == 32'(s) && core_resp_ready[c]) slice_resp_ready[s] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(NUM_SLICES); s++) rr_req[s] <= '0;
      for (int c = 0; c < int'(NUM_CORES); c++)  rr_rsp[c] <= '0;
    end else begin
      for (int s = 0; s < int'(NUM_SLICES); s++)
        if (gv_req[s] && slice_ready[s])
          rr_req[s] <= CW'((32'(g_req[s]) + 1) % NUM_CORES);
      for (int c = 0; c < int'(NUM_CORES); c++)
        if (gv_rsp[c] && core_resp_ready[c])
          rr_rsp[c] <= SW'((32'(g_rsp[c]) + 1) % NUM_SLICES);
    end
  end

endmodule
