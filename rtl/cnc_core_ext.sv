// cnc_core_ext: the CNC path through one core's pipeline.
//
// Decode: the CTRL extension (cnc_inst_decode) recognises a CNC instruction
// and its immediate; rs1 and rs2 come from the register file with it.
// Execute: the ALU forms the virtual address GPR[rs1] + sext(imm); SW_CNC
// also carries GPR[rs2] as the write data. Memory: the virtual address goes
// to the data TLB (which walks the page table on a miss, seen here only as a
// later `tlb_ack`); the physical address bypasses the L1 cache, is aligned to
// 64 bytes for the block instructions (RD_D2CNC, LD_CMD, ALG_CNC), and the
// destination hash picks the home cache slice. Address, CNC signal, algorithm
// code, write data, core number and slice are packed into one request for the
// interconnect. SW_CNC's data travels in the same packet, so it is routed by
// the hash of its rs1-based address.
//
// One CNC instruction is held in each of Execute and Memory; `stall` holds the
// instruction in Decode while they are full (waiting for the TLB or for the
// interconnect to accept). Requests leave in program order.
//
// The stage split, the L1 bypass, TLB translation, alignment and hash follow
// the paper's core datapath. Taking SW_CNC data from rs2 follows the
// instruction table (the datapath text says rs1). The occupancy rule and the
// single-packet request are this design's choices.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET). The registers use it as an asynchronous
// reset; the only other use is the `disable iff (!rst_n)` of the assertions
// at the end, which is simulation-only and adds no logic.
module cnc_core_ext
  import cnc_pkg::*;
#(
  parameter int unsigned NUM_SLICES = 4,
  parameter int unsigned CORE_ID    = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  // Decode stage
  input  logic            instr_valid,
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] rs1_val,
  input  logic [XLEN-1:0] rs2_val,
  output logic            stall,
  output logic [4:0]      rf_rs1,     // register numbers for the register file read
  output logic [4:0]      rf_rs2,
  // data TLB
  output logic            tlb_req,
  output logic [XLEN-1:0] tlb_vaddr,
  input  logic            tlb_ack,
  input  logic [PA_W-1:0] tlb_paddr,
  // interconnect
  output cnc_req_t        noc_req,
  input  logic            noc_ready
);

  localparam int unsigned SW = (NUM_SLICES > 1) ? $clog2(NUM_SLICES) : 1;

  // ---------------------------------------------------------- Decode
  logic            is_cnc, uses_rs2;
  nc_e             d_nc;
  logic [4:0]      d_rs1, d_rs2, d_alg;
  logic [XLEN-1:0] d_imm;

  cnc_inst_decode u_dec (
    .instr, .is_cnc, .nc(d_nc), .rs1(d_rs1), .rs2(d_rs2),
    .uses_rs2, .alg(d_alg), .imm(d_imm)
  );
  assign rf_rs1 = d_rs1;
  assign rf_rs2 = d_rs2;

  // --------------------------------------------------------- Execute
  logic            ex_v;
  nc_e             ex_nc;
  logic [4:0]      ex_alg;
  logic [XLEN-1:0] ex_a, ex_imm, ex_wdata;

  // ---------------------------------------------------------- Memory
  logic            mem_v, have_pa;
  nc_e             mem_nc;
  logic [4:0]      mem_alg;
  logic [XLEN-1:0] mem_va, mem_wdata;
  logic [PA_W-1:0] mem_pa;

  logic [PA_W-1:0] pa_sel;
  logic [SW-1:0]   slice;

  wire noc_fire  = noc_req.valid && noc_ready;
  wire mem_free  = !mem_v || noc_fire;
  wire ex_adv    = ex_v && mem_free;
  wire dec_take  = instr_valid && is_cnc && (!ex_v || ex_adv);
  assign stall   = instr_valid && is_cnc && !dec_take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_v <= 1'b0; ex_nc <= NC_SW_CNC; ex_alg <= '0;
      ex_a <= '0; ex_imm <= '0; ex_wdata <= '0;
      mem_v <= 1'b0; have_pa <= 1'b0; mem_nc <= NC_SW_CNC; mem_alg <= '0;
      mem_va <= '0; mem_wdata <= '0; mem_pa <= '0;
    end else begin
      // Decode -> Execute
      if (dec_take) begin
        ex_v     <= 1'b1;
        ex_nc    <= d_nc;
        ex_alg   <= d_alg;
        ex_a     <= rs1_val;
        ex_imm   <= d_imm;
        ex_wdata <= uses_rs2 ? rs2_val : '0;
      end else if (ex_adv) ex_v <= 1'b0;
      // Execute -> Memory (address generation)
      if (ex_adv) begin
        mem_v     <= 1'b1;
        have_pa   <= 1'b0;
        mem_nc    <= ex_nc;
        mem_alg   <= ex_alg;
        mem_va    <= ex_a + ex_imm;
        mem_wdata <= ex_wdata;
      end else if (noc_fire) mem_v <= 1'b0;
      // Memory: translation
      if (mem_v && !have_pa && tlb_ack) begin
        have_pa <= 1'b1;
        mem_pa  <= tlb_paddr;
      end
    end
  end

  assign tlb_req   = mem_v && !have_pa;
  assign tlb_vaddr = mem_va;

  // PA select: block instructions use the 64-byte aligned block address
  assign pa_sel = (mem_nc == NC_SW_CNC) ? mem_pa : {mem_pa[PA_W-1:6], 6'd0};

  cnc_dest_hash #(.NUM_SLICES(NUM_SLICES)) u_hash (.p_addr(pa_sel), .slice);

  always_comb begin
    noc_req       = '0;
    noc_req.valid = mem_v && have_pa;
    noc_req.nc    = mem_nc;
    noc_req.alg   = mem_alg;
    noc_req.addr  = pa_sel;
    noc_req.wdata = mem_wdata;
    noc_req.core  = CORE_ID_W'(CORE_ID);
    noc_req.dest  = SLICE_ID_W'(slice);
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   noc_req.valid && !noc_ready |=> noc_req.valid && $stable(noc_req))
    else $error("cnc_core_ext: request changed before it was accepted");

endmodule
