// cnc_slice: the Crypto-Near-Cache unit that sits next to one LLC slice.
//
// It joins the slice's CNC control module, the 256 x 512 compute-enabled SRAM
// array, its sense-amplifier row and the command array, and puts the write
// MUX in front of the array: a 32-bit word from the data bus (SW_CNC,
// replicated over the row and written under a one-word mask), a whole cache
// block from the slice's data array (RD_D2CNC), or the sense-amplifier row
// (wr_row commands). The command array is written from the same cache-block
// path (LD_CMD). The block written back to the data array at the end of an
// algorithm is the array row read out by the controller. The ECC unit
// (cnc_ecc) watches the array's ports and raises `ecc_err` when a stored word
// or a logic result fails its parity check.
//
// Interface: one request/response pair towards the interconnect and one
// data-array port towards the cache slice (active-low csb/web/oeb, block
// address, read data and miss a cycle after a read, a miss-response pulse
// from the MSHR, write data). Timing is that of cnc_ctrl.
//
// The composition follows the paper's cache datapath; the port protocol
// towards the cache slice is this design's, as the slice itself (tag, state,
// directory, MSHR, data array) is reused from an existing cache design.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET). Registers in the submodules use it as an
// asynchronous reset; the other use is the `disable iff (!rst_n)` of their
// assertions, which is simulation-only and adds no logic. The ECC unit's
// per-word error mask is left unconnected on purpose (PINCONNECTEMPTY): only
// the error flag leaves the slice.
module cnc_slice
  import cnc_pkg::*;
#(
  parameter int unsigned ROWS     = 256,
  parameter int unsigned COLS     = 512,
  parameter int unsigned CMD_ROWS = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cnc_req_t          req,
  output logic              req_ready,
  output cnc_resp_t         resp,
  input  logic              resp_ready,
  output logic              dc_csb,
  output logic              dc_web,
  output logic              dc_oeb,
  output logic [PA_W-1:0]   dc_addr,
  input  logic [COLS-1:0]   dc_rdata,
  input  logic              dc_miss,
  input  logic              dc_miss_rsp,
  output logic [COLS-1:0]   dc_wdata,
  output logic [3:0]        state,
  output logic              cmd_ovf,
  output logic              illegal_cmd,
  output logic              ecc_err
);

  localparam int unsigned AW    = $clog2(ROWS);
  localparam int unsigned WORDS = COLS / 32;
  localparam int unsigned PER   = COLS / CMD_W;
  localparam int unsigned CAW   = $clog2(CMD_ROWS * PER);
  localparam int unsigned CMAW  = $clog2(CMD_ROWS);

  logic             arr_rd_en, arr_act2, arr_we;
  logic [AW-1:0]    arr_ra, arr_rb, arr_wa;
  logic [WORDS-1:0] arr_wmask;
  logic [1:0]       mux;
  logic [COLS-1:0]  arr_wdata, bl_and, blb_nor, sa_dout;
  logic             sa_load, sa_shift, sa_right, sa_ext;
  sa_op_e           sa_op;
  logic [7:0]       sa_col;
  logic [2:0]       sa_w;
  logic             cmd_we, cmd_re;
  logic [CMAW-1:0]  cmd_wrow;
  logic [CAW-1:0]   cmd_raddr;
  logic [CMD_W-1:0] cmd_rdata;

  cnc_ctrl #(.ROWS(ROWS), .COLS(COLS), .CMD_ROWS(CMD_ROWS)) u_ctrl (
    .clk, .rst_n, .req, .req_ready, .resp, .resp_ready,
    .dc_csb, .dc_web, .dc_oeb, .dc_addr, .dc_miss, .dc_miss_rsp,
    .arr_rd_en, .arr_act2, .arr_ra, .arr_rb, .arr_we, .arr_wa, .arr_wmask, .mux,
    .sa_load, .sa_op, .sa_shift, .sa_right, .sa_ext, .sa_col, .sa_w,
    .cmd_we, .cmd_wrow, .cmd_re, .cmd_raddr, .cmd_rdata,
    .state, .cmd_ovf, .illegal_cmd
  );

  // write MUX in front of the CNC array
  always_comb begin
    unique case (mux)
      2'd0:    arr_wdata = {WORDS{req.wdata}};
      2'd1:    arr_wdata = dc_rdata;
      default: arr_wdata = sa_dout;
    endcase
  end

  cnc_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rd_en(arr_rd_en), .act2(arr_act2), .ra(arr_ra), .rb(arr_rb),
    .we(arr_we), .wa(arr_wa), .wmask(arr_wmask), .wdata(arr_wdata),
    .bl_and, .blb_nor
  );

  cnc_ecc #(.ROWS(ROWS), .COLS(COLS)) u_ecc (
    .clk, .rst_n, .rd_en(arr_rd_en), .act2(arr_act2), .ra(arr_ra), .rb(arr_rb),
    .we(arr_we), .wa(arr_wa), .wmask(arr_wmask), .wdata(arr_wdata),
    .bl_and, .blb_nor, .err(ecc_err), .err_word()  // per-word mask, for diagnosis only
  );

  cnc_sense_amp #(.COLS(COLS)) u_sa (
    .clk, .rst_n, .bl_and, .blb_nor, .load(sa_load), .op(sa_op),
    .shift_en(sa_shift), .shift_right(sa_right), .ext_en(sa_ext),
    .ext_col(sa_col), .ext_w(sa_w), .dout(sa_dout)
  );

  cnc_cmd_array #(.ROWS(CMD_ROWS), .COLS(COLS)) u_cmd (
    .clk, .we(cmd_we), .wrow(cmd_wrow), .wdata(dc_rdata),
    .re(cmd_re), .raddr(cmd_raddr), .rcmd(cmd_rdata)
  );

  // result block: the array row read out during write-back
  assign dc_wdata = bl_and;

endmodule
