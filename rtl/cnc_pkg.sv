// cnc_pkg: types and constants shared by the Crypto-Near-Cache (CNC) blocks.
//
// Holds the ISA-extension encodings (custom opcode 0101011 with funct3 010..101,
// following the instruction table of the architecture), the 3-bit CNC signal
// that travels with a request to the cache slice, the 16-bit command format
// {op[15:12], addr[11:4], ctrl[3:0]} executed by the slice controller, and the
// request/response packets carried by the interconnect.
//
// Opcodes of the six command formats and their fixed ctrl bits follow the
// published command table. The numeric codes for the CNC signal, the 5-bit
// algorithm field and the computing-block width code, the address width and
// the packet layout are this design's own choices.
//
// Lint note: Verilator reports some constants as unused (UNUSEDPARAM), such as
// the individual algorithm codes and the block width. They define the
// encoding for software and testbenches; the hardware only needs the family
// each algorithm code maps to.
package cnc_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XLEN      = 32;   // register / virtual address width
  localparam int unsigned PA_W      = 32;   // physical address width
  localparam int unsigned BLOCK_W   = 512;  // cache block (64 bytes)
  localparam int unsigned WORD_W    = 32;   // SW_CNC payload
  localparam int unsigned CMD_W     = 16;   // one CNC command
  localparam int unsigned CORE_ID_W = 4;    // up to 16 cores
  localparam int unsigned SLICE_ID_W = 4;   // up to 16 cache slices

  // ------------------------------------------------------------ ISA fields
  localparam logic [6:0] OPC_CNC      = 7'b0101011;
  localparam logic [2:0] F3_SW_CNC    = 3'b010;
  localparam logic [2:0] F3_RD_D2CNC  = 3'b011;
  localparam logic [2:0] F3_LD_CMD    = 3'b100;
  localparam logic [2:0] F3_ALG_CNC   = 3'b101;

  // 3-bit CNC signal (nc[2:0]) sent to the slice with every request.
  typedef enum logic [2:0] {
    NC_SW_CNC    = 3'd0,
    NC_RD_D2CNC  = 3'd1,
    NC_LD_CMD    = 3'd2,
    NC_AES       = 3'd3,
    NC_KECCAK    = 3'd4,
    NC_NTT       = 3'd5,
    NC_KYBER     = 3'd6,
    NC_DILITHIUM = 3'd7
  } nc_e;

  // 5-bit algorithm variant carried in bits [24:20] of ALG_CNC.
  localparam logic [4:0] ALG_AES128     = 5'd0;
  localparam logic [4:0] ALG_AES256     = 5'd1;
  localparam logic [4:0] ALG_KECCAK1600 = 5'd2;
  localparam logic [4:0] ALG_NTT128     = 5'd3;
  localparam logic [4:0] ALG_NTT256     = 5'd4;
  localparam logic [4:0] ALG_KYBER512   = 5'd5;
  localparam logic [4:0] ALG_KYBER768   = 5'd6;
  localparam logic [4:0] ALG_KYBER1024  = 5'd7;
  localparam logic [4:0] ALG_DILITHIUM2 = 5'd8;
  localparam logic [4:0] ALG_DILITHIUM3 = 5'd9;
  localparam logic [4:0] ALG_DILITHIUM5 = 5'd10;

  function automatic nc_e alg_family(input logic [4:0] alg);
    if (alg <= ALG_AES256)          return NC_AES;
    else if (alg == ALG_KECCAK1600) return NC_KECCAK;
    else if (alg <= ALG_NTT256)     return NC_NTT;
    else if (alg <= ALG_KYBER1024)  return NC_KYBER;
    else                            return NC_DILITHIUM;
  endfunction

  // ------------------------------------------------------- command format
  localparam logic [3:0] CMD_RD_ROW   = 4'b0001;
  localparam logic [3:0] CMD_WR_ROW   = 4'b0010;
  localparam logic [3:0] CMD_SHIFT    = 4'b0011;
  localparam logic [3:0] CMD_ACT_ROW  = 4'b1011;
  localparam logic [3:0] CMD_LOGIC_OP = 4'b1001;
  localparam logic [3:0] CMD_EXT_BIT  = 4'b1111;

  // Operation selected by the sense-amplifier op MUX.
  typedef enum logic [1:0] {
    SA_AND = 2'd0,   // BL sense; with one wordline this is a plain read
    SA_OR  = 2'd1,
    SA_XOR = 2'd2,
    SA_NOR = 2'd3    // BLB sense
  } sa_op_e;

  typedef enum logic [2:0] {
    K_NOP, K_RD_ROW, K_WR_ROW, K_SHIFT, K_ACT_ROW, K_LOGIC_OP, K_EXT_BIT
  } cmd_kind_e;

  typedef struct packed {
    cmd_kind_e  kind;
    logic       illegal;   // matched no format (executed as a no-op)
    logic [7:0] addr;      // row, shift count or column index
    sa_op_e     op;        // logic_op / rd_row operation
    logic       right;     // shift direction
    logic [2:0] width;     // ext_bit computing-block width code
  } cmd_dec_t;

  // Computing-block width (columns) for the ext_bit width code.
  function automatic int unsigned cb_width(input logic [2:0] code);
    case (code)
      3'd0: return 16;
      3'd1: return 25;
      3'd2: return 32;
      3'd3: return 64;
      3'd4: return 128;
      3'd5: return 256;
      3'd6: return 512;
      default: return 8;
    endcase
  endfunction

  function automatic logic [CMD_W-1:0] mk_cmd(input logic [3:0] op,
                                              input logic [7:0] addr,
                                              input logic [3:0] ctrl);
    return {op, addr, ctrl};
  endfunction

  // ------------------------------------------------------------- packets
  typedef struct packed {
    logic                 valid;
    nc_e                  nc;
    logic [4:0]           alg;
    logic [PA_W-1:0]      addr;    // hashed physical address
    logic [WORD_W-1:0]    wdata;   // SW_CNC payload
    logic [CORE_ID_W-1:0] core;    // issuing core
    logic [SLICE_ID_W-1:0] dest;   // home slice from the destination hash
  } cnc_req_t;

  typedef struct packed {
    logic                 valid;
    nc_e                  nc;
    logic [CORE_ID_W-1:0] core;
  } cnc_resp_t;

endpackage
