// cnc_system: a Crypto-Near-Cache system of NUM_CORES cores and NUM_SLICES
// last-level-cache slices, each slice with its own CNC unit.
//
// Each core contributes its CNC pipeline path (cnc_core_ext): it decodes the
// four CNC instructions, forms and translates the address, hashes it to a
// home slice and sends one request packet. The crossbar (cnc_noc) delivers it
// to that slice's CNC unit (cnc_slice), which loads words or whole cache
// blocks into its compute-enabled SRAM array, loads command programs, runs
// them and writes results back into the slice's data array, then answers the
// core. Different slices run independently, so several algorithm instances
// proceed at once.
//
// What lies outside and connects through ports: per core the rest of the
// pipeline (instruction, register operands, stall) and the data TLB with its
// page-table walker; per slice the cache slice itself (tag and state arrays,
// directory, MSHR, data array), seen through a block read/write port with a
// miss flag and a miss-response pulse. Each slice also reports its status
// (controller state, command overflow, illegal command, ECC error). Every
// port is a plain signal or an array of them indexed by core or slice.
//
// The 4-core / 4-slice default and the 16 kB (256 x 512) CNC array per slice
// follow the paper's system overview and datapath figures.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET). Registers in the submodules use it as an
// asynchronous reset; the other use is the `disable iff (!rst_n)` of their
// assertions, which is simulation-only and adds no logic.
module cnc_system
  import cnc_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 4,
  parameter int unsigned NUM_SLICES = 4,
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 512,
  parameter int unsigned CMD_ROWS   = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  // cores
  input  logic            instr_valid [NUM_CORES],
  input  logic [31:0]     instr       [NUM_CORES],
  input  logic [XLEN-1:0] rs1_val     [NUM_CORES],
  input  logic [XLEN-1:0] rs2_val     [NUM_CORES],
  output logic            stall       [NUM_CORES],
  output logic [4:0]      rf_rs1      [NUM_CORES],
  output logic [4:0]      rf_rs2      [NUM_CORES],
  output logic            tlb_req     [NUM_CORES],
  output logic [XLEN-1:0] tlb_vaddr   [NUM_CORES],
  input  logic            tlb_ack     [NUM_CORES],
  input  logic [PA_W-1:0] tlb_paddr   [NUM_CORES],
  output logic            done_valid  [NUM_CORES],
  output logic [2:0]      done_nc     [NUM_CORES],
  input  logic            done_ready  [NUM_CORES],
  // cache slices
  output logic            dc_csb      [NUM_SLICES],
  output logic            dc_web      [NUM_SLICES],
  output logic            dc_oeb      [NUM_SLICES],
  output logic [PA_W-1:0] dc_addr     [NUM_SLICES],
  input  logic [COLS-1:0] dc_rdata    [NUM_SLICES],
  input  logic            dc_miss     [NUM_SLICES],
  input  logic            dc_miss_rsp [NUM_SLICES],
  output logic [COLS-1:0] dc_wdata    [NUM_SLICES],
  output logic [3:0]      cnc_state   [NUM_SLICES],
  output logic            cmd_ovf     [NUM_SLICES],
  output logic            illegal_cmd [NUM_SLICES],
  output logic            ecc_err     [NUM_SLICES]
);

  cnc_req_t  core_req   [NUM_CORES];
  logic      core_ready [NUM_CORES];
  cnc_resp_t core_resp  [NUM_CORES];
  cnc_req_t  slice_req  [NUM_SLICES];
  logic      slice_ready[NUM_SLICES];
  cnc_resp_t slice_resp [NUM_SLICES];
  logic      slice_resp_ready [NUM_SLICES];

  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_core
    cnc_core_ext #(.NUM_SLICES(NUM_SLICES), .CORE_ID(c)) u_core (
      .clk, .rst_n,
      .instr_valid(instr_valid[c]), .instr(instr[c]),
      .rs1_val(rs1_val[c]), .rs2_val(rs2_val[c]), .stall(stall[c]),
      .rf_rs1(rf_rs1[c]), .rf_rs2(rf_rs2[c]),
      .tlb_req(tlb_req[c]), .tlb_vaddr(tlb_vaddr[c]),
      .tlb_ack(tlb_ack[c]), .tlb_paddr(tlb_paddr[c]),
      .noc_req(core_req[c]), .noc_ready(core_ready[c])
    );
    assign done_valid[c] = core_resp[c].valid;
    assign done_nc[c]    = core_resp[c].nc;
  end

  cnc_noc #(.NUM_CORES(NUM_CORES), .NUM_SLICES(NUM_SLICES)) u_noc (
    .clk, .rst_n,
    .core_req, .core_ready, .slice_req, .slice_ready,
    .slice_resp, .slice_resp_ready, .core_resp, .core_resp_ready(done_ready)
  );

  for (genvar s = 0; s < int'(NUM_SLICES); s++) begin : g_slice
    cnc_slice #(.ROWS(ROWS), .COLS(COLS), .CMD_ROWS(CMD_ROWS)) u_slice (
      .clk, .rst_n,
      .req(slice_req[s]), .req_ready(slice_ready[s]),
      .resp(slice_resp[s]), .resp_ready(slice_resp_ready[s]),
      .dc_csb(dc_csb[s]), .dc_web(dc_web[s]), .dc_oeb(dc_oeb[s]), .dc_addr(dc_addr[s]),
      .dc_rdata(dc_rdata[s]), .dc_miss(dc_miss[s]), .dc_miss_rsp(dc_miss_rsp[s]),
      .dc_wdata(dc_wdata[s]), .state(cnc_state[s]), .cmd_ovf(cmd_ovf[s]),
      .illegal_cmd(illegal_cmd[s]), .ecc_err(ecc_err[s])
    );
  end

endmodule
